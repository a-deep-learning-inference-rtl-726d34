// row_loader: builds reorganised rows in the clk_inbuff domain.
//
// For a weight-data product W . d the loader sends every weight row w_i
// together with the data vector d, so each processing unit receives the
// 2n-element row [w_i | d] it needs and nothing else. Rows travel in
// groups of P (one per processing unit): a group is one param_ram word,
// and one group is written into the input buffer per clock while there is
// room. A group carries its layer, the index of its first row, how many of
// its P rows are real (the last group of a layer may be short), a last
// flag, the layer's scale alpha and the rows' biases.
//
// Sequence for one sample, started by a start pulse:
//   L1      groups 0..G1-1 of the hidden layer, d = the input vector (held
//           in a register written by the host, one element per write);
//   WAIT_H  wait until all N_HID hidden activations have come back from
//           the computing domain through the return buffer;
//   L2      groups G1..G1+G2-1 of the output layer, d = the hidden
//           activations, zero beyond N_HID.
// Hidden activations are accepted from the return buffer whenever it is
// not empty, also while L1 is still being sent.
//
// Flow control: a RAM read is issued only when the buffer's write-side fill
// count plus the write already in flight leaves room, so the loader never
// writes a full buffer yet keeps one write per clock when the reader keeps
// up (the RAM read takes one clock).
//
// Following the source: the reorganised rows [w_i | d], all loaded into the
// input buffer under clk_inbuff. Own choices: grouping by P, the sideband
// fields, one layer at a time, the return path for hidden activations.
//
// Lint note: the assertions below disable themselves while the reset is
// low, which a linter reports as a reset used both asynchronously and
// synchronously; the flip-flops themselves use it only asynchronously.
module row_loader #(
  parameter int unsigned N_IN    = 784,
  parameter int unsigned N_HID   = 128,
  parameter int unsigned N_OUT   = 10,
  parameter int unsigned P       = 3,
  parameter int unsigned D_W     = 8,
  parameter int unsigned WB      = 7,
  parameter int unsigned BIAS_W  = 16,
  parameter int unsigned ALPHA_W = 8,
  parameter int unsigned BUF_DEPTH = 4,
  localparam int unsigned G1 = (N_HID + P - 1) / P,
  localparam int unsigned G2 = (N_OUT + P - 1) / P,
  localparam int unsigned GA = $clog2(G1 + G2),
  localparam int unsigned BAW = $clog2(BUF_DEPTH),
  localparam int unsigned ENTRY_W = 2 + 32 + ALPHA_W + P*BIAS_W + N_IN*D_W + P*N_IN*WB,
  localparam int unsigned RET_W = 32 + P*8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host: input vector element and per-layer alpha
  input  logic                  pix_we,
  input  logic [15:0]           pix_addr,
  input  logic [D_W-1:0]        pix_data,
  input  logic                  alpha_we,
  input  logic                  alpha_layer,
  input  logic [ALPHA_W-1:0]    alpha_data,
  input  logic                  start,
  output logic                  busy,
  // param_ram read port
  output logic                  ram_re,
  output logic [GA-1:0]         ram_addr,
  input  logic [P*N_IN*WB-1:0]  ram_weights,
  input  logic [P*BIAS_W-1:0]   ram_bias,
  // input buffer write side
  output logic                  buf_we,
  output logic [ENTRY_W-1:0]    buf_wdata,
  input  logic [BAW:0]          buf_count,
  // return buffer read side
  input  logic                  ret_empty,
  input  logic [RET_W-1:0]      ret_rdata,
  output logic                  ret_re
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

  typedef enum logic [1:0] {S_IDLE, S_L1, S_WAIT_H, S_L2} state_e;

  state_e                 state;
  logic [N_IN-1:0][D_W-1:0]  img;
  logic [N_HID-1:0][D_W-1:0] hid;
  logic [ALPHA_W-1:0]     alpha [2];
  logic [GA-1:0]          g;          // next group to read
  logic [15:0]            hid_cnt;    // hidden activations returned
  logic                   pend;       // RAM read issued last clock
  logic                   pend_layer, pend_last;
  logic [15:0]            pend_first, pend_count;
  logic                   issue;
  logic [GA-1:0]          g_end;
  logic [15:0]            row_in_layer, rows_in_layer;
  ret_t                   ret;
  entry_t                 e;

  assign g_end = (state == S_L2) ? GA'(G1 + G2) : GA'(G1);
  assign row_in_layer  = (state == S_L2) ? 16'((int'(g) - G1) * P) : 16'(int'(g) * P);
  assign rows_in_layer = (state == S_L2) ? 16'(N_OUT) : 16'(N_HID);
  assign issue = (state == S_L1 || state == S_L2) && (g < g_end) &&
                 (int'(buf_count) + int'(pend) + 1 <= BUF_DEPTH);
  assign ram_re   = issue;
  assign ram_addr = g;
  assign busy     = (state != S_IDLE) || pend;

  assign ret    = ret_t'(ret_rdata);
  assign ret_re = !ret_empty;

  // entry written one clock after its RAM read
  always_comb begin
    e.layer = pend_layer;
    e.last  = pend_last;
    e.first = pend_first;
    e.count = pend_count;
    e.alpha = alpha[pend_layer];
    e.bias  = ram_bias;
    e.w     = ram_weights;
    for (int j = 0; j < N_IN; j++)
      e.d[j] = !pend_layer ? img[j] : (j < N_HID) ? hid[j] : '0;
  end
  assign buf_we    = pend;
  assign buf_wdata = e;

  always_ff @(posedge clk) begin
    for (int j = 0; j < N_IN; j++)
      if (pix_we && int'(pix_addr) == j) img[j] <= pix_data;
    if (alpha_we) alpha[alpha_layer] <= alpha_data;
    for (int j = 0; j < N_HID; j++)
      for (int p = 0; p < P; p++)
        if (!ret_empty && p < int'(ret.count) && int'(ret.first) + p == j)
          hid[j] <= ret.y[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      g          <= '0;
      hid_cnt    <= '0;
      pend       <= 1'b0;
      pend_layer <= 1'b0;
      pend_last  <= 1'b0;
      pend_first <= '0;
      pend_count <= '0;
    end else begin
      pend <= issue;
      if (issue) begin
        pend_layer <= (state == S_L2);
        pend_last  <= (g == g_end - 1'b1);
        pend_first <= row_in_layer;
        pend_count <= (rows_in_layer - row_in_layer > 16'(P)) ? 16'(P)
                                                              : rows_in_layer - row_in_layer;
        g <= g + 1'b1;
      end
      if (!ret_empty) hid_cnt <= hid_cnt + ret.count;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_L1;
          g       <= '0;
          hid_cnt <= '0;
        end
        S_L1:     if (issue && g == g_end - 1'b1) state <= S_WAIT_H;
        S_WAIT_H: if (int'(hid_cnt) >= N_HID) state <= S_L2;
        S_L2:     if (issue && g == g_end - 1'b1) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_no_buffer_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                         buf_we |-> int'(buf_count) < BUF_DEPTH);

endmodule
