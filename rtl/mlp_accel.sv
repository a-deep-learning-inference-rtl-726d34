// mlp_accel: MLP inference accelerator with a decoupled loading clock and
// computing clock.
//
// The network is a three-layer perceptron, N_IN -> N_HID -> N_OUT (784 ->
// 128 -> 10 for 28x28 handwritten digits), sigmoid on both computed layers,
// class = argmax of the outputs. Weights are SPx-quantised (sign plus TERMS
// power-of-two terms, times a per-layer scale alpha), so every element
// product is shifts and adds.
//
// Structure, in the clk_inbuff domain: param_ram (weights and biases) and
// row_loader, which pairs each weight row with the layer's data vector and
// writes the rows, P at a time, into input_buffer. In the clk_compute domain:
// compute_ctrl with P pipelined processing units (pu) and P act_units, and
// argmax_unit. The two clocks are unrelated; input_buffer crosses rows from
// loading to computing, and a second, narrower input_buffer (the return
// buffer) carries the hidden activations back to the loader, which uses them
// as the data vector of the output layer.
//
// Host interface (clk_inbuff): one write per clock through host (see
// mlp_pkg) to load weight codes, biases, the per-layer alphas and the input
// vector; then a start pulse. busy is high while the loader works on a
// sample. Results (clk_compute): done pulses for one clock with the class
// and the N_OUT output activations (Q0.8).
//
// Following the source: the RAM -> input buffer -> processing units
// dataflow with the buffer written under clk_inbuff and read under an
// asynchronous clk_compute; reorganised rows [w_i | d]; pipelined dot
// products; SPx weights; 784-128-10 sigmoid MLP with argmax. Own choices:
// P = 3 units (the dataflow figure draws three), the fixed-point formats,
// buffer depths, the return path and the host port.
module mlp_accel
  import mlp_pkg::*;
#(
  parameter int unsigned N_IN      = 784,
  parameter int unsigned N_HID     = 128,
  parameter int unsigned N_OUT     = 10,
  parameter int unsigned P         = 3,
  parameter int unsigned TERMS     = 3,
  parameter int unsigned TERM_BITS = 2,
  parameter int unsigned BUF_DEPTH = 4,
  parameter int unsigned RET_DEPTH = 32,
  localparam int unsigned D_W     = 8,
  localparam int unsigned BIAS_W  = 16,
  localparam int unsigned ALPHA_W = 8,
  localparam int unsigned WB      = 1 + TERMS * TERM_BITS,
  localparam int unsigned G1      = (N_HID + P - 1) / P,
  localparam int unsigned G2      = (N_OUT + P - 1) / P,
  localparam int unsigned GA      = $clog2(G1 + G2),
  localparam int unsigned ENTRY_W = 2 + 32 + ALPHA_W + P*BIAS_W + N_IN*D_W + P*N_IN*WB,
  localparam int unsigned RET_W   = 32 + P*8,
  localparam int unsigned IW      = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                  rst_n,
  // loading domain
  input  logic                  clk_inbuff,
  input  host_wr_t              host,
  input  logic                  start,
  output logic                  busy,
  // computing domain
  input  logic                  clk_compute,
  output logic                  done,
  output logic [IW-1:0]         cls,
  output logic [N_OUT-1:0][7:0] scores
);

  logic rst_in_n, rst_cp_n;
  reset_sync u_rs_in (.clk(clk_inbuff),  .rst_n, .out_n(rst_in_n));
  reset_sync u_rs_cp (.clk(clk_compute), .rst_n, .out_n(rst_cp_n));

  // loading domain
  logic                 ram_re;
  logic [GA-1:0]        ram_addr;
  logic [P*N_IN*WB-1:0] ram_weights;
  logic [P*BIAS_W-1:0]  ram_bias;
  logic                 buf_we, buf_full;
  logic [ENTRY_W-1:0]   buf_wdata;
  logic [$clog2(BUF_DEPTH):0] buf_count;
  logic                 ret_empty, ret_re;
  logic [RET_W-1:0]     ret_rdata;

  // computing domain
  logic                 buf_empty, buf_re;
  logic [ENTRY_W-1:0]   buf_rdata;
  logic                 ret_we, ret_full;
  logic [RET_W-1:0]     ret_wdata;
  logic [$clog2(RET_DEPTH):0] ret_count;
  logic                 o_valid, o_last;
  logic [15:0]          o_first, o_count;
  logic [P-1:0][7:0]    o_y;

  param_ram #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .P(P), .WB(WB),
              .BIAS_W(BIAS_W)) u_ram (
    .clk(clk_inbuff),
    .we(host.we && (host.sel == HOST_WEIGHT || host.sel == HOST_BIAS)),
    .is_bias(host.sel == HOST_BIAS),
    .layer(host.layer), .row(host.row), .col(host.col), .wdata(host.wdata),
    .re(ram_re), .raddr(ram_addr), .rweights(ram_weights), .rbias(ram_bias)
  );

  row_loader #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .P(P), .D_W(D_W),
               .WB(WB), .BIAS_W(BIAS_W), .ALPHA_W(ALPHA_W),
               .BUF_DEPTH(BUF_DEPTH)) u_loader (
    .clk(clk_inbuff), .rst_n(rst_in_n),
    .pix_we(host.we && host.sel == HOST_PIXEL), .pix_addr(host.col),
    .pix_data(host.wdata[D_W-1:0]),
    .alpha_we(host.we && host.sel == HOST_ALPHA), .alpha_layer(host.layer),
    .alpha_data(host.wdata[ALPHA_W-1:0]),
    .start, .busy,
    .ram_re, .ram_addr, .ram_weights, .ram_bias,
    .buf_we, .buf_wdata, .buf_count,
    .ret_empty, .ret_rdata, .ret_re
  );

  input_buffer #(.WIDTH(ENTRY_W), .DEPTH(BUF_DEPTH)) u_inbuf (
    .clk_w(clk_inbuff), .rst_wn(rst_in_n), .wr_en(buf_we), .wdata(buf_wdata),
    .full(buf_full), .wr_count(buf_count),
    .clk_r(clk_compute), .rst_rn(rst_cp_n), .rd_en(buf_re), .rdata(buf_rdata),
    .empty(buf_empty)
  );

  compute_ctrl #(.N_IN(N_IN), .P(P), .D_W(D_W), .TERMS(TERMS),
                 .TERM_BITS(TERM_BITS), .BIAS_W(BIAS_W), .ALPHA_W(ALPHA_W),
                 .RET_DEPTH(RET_DEPTH)) u_compute (
    .clk(clk_compute), .rst_n(rst_cp_n),
    .buf_empty, .buf_rdata, .buf_re,
    .ret_we, .ret_wdata, .ret_count,
    .out_valid(o_valid), .out_first(o_first), .out_count(o_count),
    .out_last(o_last), .out_y(o_y)
  );

  input_buffer #(.WIDTH(RET_W), .DEPTH(RET_DEPTH)) u_retbuf (
    .clk_w(clk_compute), .rst_wn(rst_cp_n), .wr_en(ret_we), .wdata(ret_wdata),
    .full(ret_full), .wr_count(ret_count),
    .clk_r(clk_inbuff), .rst_rn(rst_in_n), .rd_en(ret_re), .rdata(ret_rdata),
    .empty(ret_empty)
  );

  argmax_unit #(.N_OUT(N_OUT), .P(P)) u_argmax (
    .clk(clk_compute), .rst_n(rst_cp_n),
    .in_valid(o_valid), .in_first(o_first), .in_count(o_count),
    .in_last(o_last), .in_y(o_y),
    .done, .cls, .scores
  );

endmodule
