// compute_ctrl: the clk_compute side of the accelerator.
//
// Each clock in which the input buffer holds a group of reorganised rows,
// and there is room for its results, the group is popped and row p goes to
// processing unit p (all P units share the group's data vector). The
// units are pipelined, so a new group can enter every clock. A shift
// register carries each group's sideband fields (layer, first row, row
// count, last flag, alpha, biases) alongside the pipeline; when the dot
// products leave the units, P act_units apply alpha, bias and sigmoid.
// One clock later the activations of a hidden-layer group are written to
// the return buffer, which carries them back to the loader as the next
// layer's data; those of an output-layer group go out on the out_* port.
//
// Flow control: the return buffer must never overflow, so a hidden-layer
// group is popped only if the return buffer's fill count plus the groups
// already inside the pipeline is below RET_DEPTH. When the input buffer is
// empty, or this credit is used up, the pipeline simply receives nothing
// that clock (a stall; nothing already inside is held up).
//
// Following the source: the processing units fed from the input buffer
// under clk_compute, one row per unit per clock, outputs concatenated into
// w . d. Own choices: the credit rule, the sideband, the return path, and
// P units sharing one data vector.
//
// Latency from pop to result: LAT = 2 + ceil(log2 N_IN) + 1 clocks, plus
// one clock into the return buffer or the out_* register.
//
// Lint note: the assertions below disable themselves while the reset is
// low, which a linter reports as a reset used both asynchronously and
// synchronously; the flip-flops themselves use it only asynchronously.
module compute_ctrl #(
  parameter int unsigned N_IN      = 784,
  parameter int unsigned P         = 3,
  parameter int unsigned D_W       = 8,
  parameter int unsigned TERMS     = 3,
  parameter int unsigned TERM_BITS = 2,
  parameter int unsigned BIAS_W    = 16,
  parameter int unsigned ALPHA_W   = 8,
  parameter int unsigned RET_DEPTH = 32,
  localparam int unsigned WB      = 1 + TERMS * TERM_BITS,
  localparam int unsigned EMAX    = (1 << TERM_BITS) - 1,
  localparam int unsigned PROD_W  = D_W + EMAX + $clog2(TERMS) + 1,
  localparam int unsigned LEVELS  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned SUM_W   = PROD_W + LEVELS,
  localparam int unsigned PU_LAT  = 2 + LEVELS,
  localparam int unsigned RAW     = $clog2(RET_DEPTH),
  localparam int unsigned ENTRY_W = 2 + 32 + ALPHA_W + P*BIAS_W + N_IN*D_W + P*N_IN*WB,
  localparam int unsigned RET_W   = 32 + P*8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input buffer read side
  input  logic                 buf_empty,
  input  logic [ENTRY_W-1:0]   buf_rdata,
  output logic                 buf_re,
  // return buffer write side
  output logic                 ret_we,
  output logic [RET_W-1:0]     ret_wdata,
  input  logic [RAW:0]         ret_count,
  // output-layer activations
  output logic                 out_valid,
  output logic [15:0]          out_first,
  output logic [15:0]          out_count,
  output logic                 out_last,
  output logic [P-1:0][7:0]    out_y
);

  typedef struct packed {
    logic                          layer;
    logic                          last;
    logic [15:0]                   first;
    logic [15:0]                   count;
    logic [ALPHA_W-1:0]            alpha;
    logic [P-1:0][BIAS_W-1:0]      bias;
    logic [N_IN-1:0][D_W-1:0]      d;
    logic [P-1:0][N_IN-1:0][WB-1:0] w;
  } entry_t;

  typedef struct packed {
    logic [15:0]          first;
    logic [15:0]          count;
    logic [P-1:0][7:0]    y;
  } ret_t;

  typedef struct packed {
    logic                     valid;
    logic                     layer;
    logic                     last;
    logic [15:0]              first;
    logic [15:0]              count;
    logic [ALPHA_W-1:0]       alpha;
    logic [P-1:0][BIAS_W-1:0] bias;
  } meta_t;

  entry_t             e;
  meta_t [PU_LAT:0]   meta;             // [0] = popped this clock
  logic [7:0]         inflight;         // hidden groups popped, not yet returned
  logic               credit_ok, pop;
  logic [P-1:0][SUM_W-1:0] sum;
  logic [P-1:0]       pu_vld, act_vld;
  logic [P-1:0][7:0]  y;
  ret_t               r;

  assign e         = entry_t'(buf_rdata);
  assign credit_ok = e.layer || (int'(ret_count) + int'(inflight) < RET_DEPTH);
  assign pop       = !buf_empty && credit_ok;
  assign buf_re    = pop;

  always_comb begin
    meta[0].valid = pop;
    meta[0].layer = e.layer;
    meta[0].last  = e.last;
    meta[0].first = e.first;
    meta[0].count = e.count;
    meta[0].alpha = e.alpha;
    meta[0].bias  = e.bias;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) meta[PU_LAT:1] <= '0;
    else        meta[PU_LAT:1] <= meta[PU_LAT-1:0];
  end

  for (genvar p = 0; p < P; p++) begin : g_pu
    pu #(.N(N_IN), .D_W(D_W), .TERMS(TERMS), .TERM_BITS(TERM_BITS)) u_pu (
      .clk, .rst_n,
      .in_valid (pop && p < int'(e.count)),
      .w        (e.w[p]),
      .d        (e.d),
      .out_valid(pu_vld[p]),
      .sum      (sum[p])
    );
    act_unit #(.SUM_W(SUM_W), .EMAX(EMAX), .ALPHA_W(ALPHA_W), .BIAS_W(BIAS_W)) u_act (
      .clk, .rst_n,
      .in_valid (pu_vld[p]),
      .sum      ($signed(sum[p])),
      .alpha    (meta[PU_LAT].alpha),
      .bias     (meta[PU_LAT].bias[p]),
      .out_valid(act_vld[p]),
      .y        (y[p])
    );
  end

  // sideband for the act_unit output stage
  typedef struct packed {
    logic        valid;
    logic        layer;
    logic        last;
    logic [15:0] first;
    logic [15:0] count;
  } tag_t;

  tag_t m_act;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_act <= '0;
    else begin
      m_act.valid <= meta[PU_LAT].valid;
      m_act.layer <= meta[PU_LAT].layer;
      m_act.last  <= meta[PU_LAT].last;
      m_act.first <= meta[PU_LAT].first;
      m_act.count <= meta[PU_LAT].count;
    end
  end

  always_comb begin
    r.first = m_act.first;
    r.count = m_act.count;
    r.y     = y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ret_we    <= 1'b0;
      ret_wdata <= '0;
      out_valid <= 1'b0;
      out_first <= '0;
      out_count <= '0;
      out_last  <= 1'b0;
      out_y     <= '0;
      inflight  <= '0;
    end else begin
      ret_we    <= m_act.valid && !m_act.layer;
      ret_wdata <= r;
      out_valid <= m_act.valid && m_act.layer;
      out_first <= m_act.first;
      out_count <= m_act.count;
      out_last  <= m_act.last;
      out_y     <= y;
      inflight  <= inflight + 8'(pop && !e.layer) - 8'(ret_we);
    end
  end

  // exactly the real rows of a group come out of the activation stage
  logic [P-1:0] lanes;
  always_comb
    for (int p = 0; p < P; p++) lanes[p] = m_act.valid && (p < int'(m_act.count));
  a_lanes_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                  act_vld == lanes);

endmodule
