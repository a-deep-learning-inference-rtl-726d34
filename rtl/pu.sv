// pu: processing unit, a pipelined dot product of one reorganised row.
//
// A reorganised row is a weight row w_i (N SPx codes) side by side with the
// data vector d (N unsigned elements). The unit registers both halves
// (stage 1), forms the N element products with spx_mul and registers them
// as the temporaries t[k] (stage 2), then sums them in a binary adder tree
// with a register after every level (stages 3 .. 2+LEVELS). A new row can
// enter every cycle, and each row leaves LAT = 2 + ceil(log2 N) cycles
// after it entered, so rows flow through one clock behind each other.
//
// Following the source: the register-multiply-register-add structure of
// its processing-unit figure (w_i[k], d_t[k] -> product -> t[k] -> adder)
// and the one-row-per-cycle pipelining. Own choices: a register after every
// adder-tree level, no stall input (the feeder guarantees room downstream),
// and a tree padded to a power of two with zero leaves.
//
// Interface: in_valid/w/d in; out_valid/sum out LAT cycles later. sum is
// d . w * 2^EMAX (see spx_mul), without alpha.
module pu #(
  parameter int unsigned N         = 784,
  parameter int unsigned D_W       = 8,
  parameter int unsigned TERMS     = 3,
  parameter int unsigned TERM_BITS = 2,
  localparam int unsigned WB     = 1 + TERMS * TERM_BITS,
  localparam int unsigned EMAX   = (1 << TERM_BITS) - 1,
  localparam int unsigned PROD_W = D_W + EMAX + $clog2(TERMS) + 1,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SUM_W  = PROD_W + LEVELS,
  localparam int unsigned LAT    = 2 + LEVELS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [N-1:0][WB-1:0]       w,
  input  logic [N-1:0][D_W-1:0]      d,
  output logic                       out_valid,
  output logic signed [SUM_W-1:0]    sum
);

  localparam int unsigned NP2 = 1 << LEVELS;

  // Stage 1: operand registers.
  logic [N-1:0][WB-1:0]  w_q;
  logic [N-1:0][D_W-1:0] d_q;
  logic [N-1:0][PROD_W-1:0] prod;
  logic [LAT-1:0]           vld;

  always_ff @(posedge clk) begin
    w_q <= w;
    d_q <= d;
  end

  for (genvar k = 0; k < N; k++) begin : g_lane
    spx_mul #(.D_W(D_W), .TERMS(TERMS), .TERM_BITS(TERM_BITS)) u_mul (
      .d(d_q[k]), .code(w_q[k]), .prod(prod[k])
    );
  end

  // Stage 2 (level 0): product registers t[k], zero leaves up to NP2.
  // Level l holds NP2 >> l partial sums, each a registered pair sum.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lv
    logic [(NP2 >> l)-1:0][SUM_W-1:0] node;
    if (l == 0) begin : g_leaf
      always_ff @(posedge clk) begin
        for (int k = 0; k < NP2; k++)
          node[k] <= (k < N) ? SUM_W'($signed(prod[k])) : '0;
      end
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int k = 0; k < (NP2 >> l); k++)
          node[k] <= $signed(g_lv[l-1].node[2*k]) + $signed(g_lv[l-1].node[2*k+1]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end

  assign out_valid = vld[LAT-1];
  assign sum       = $signed(g_lv[LEVELS].node[0]);

endmodule
