// param_ram: the weight and bias memory read by the row loader.
//
// The weights of both layers are kept as row groups: one memory word holds
// the SPx codes of P consecutive weight rows (P = number of processing
// units), N_IN codes per row, so a single read delivers one full input-
// buffer entry. Hidden-layer rows 0..N_HID-1 occupy words 0..G1-1 and
// output-layer rows 0..N_OUT-1 occupy words G1..G1+G2-1, with
// G1 = ceil(N_HID/P) and G2 = ceil(N_OUT/P). Output-layer rows use only the
// first N_HID columns. A parallel word array keeps the P biases of each
// group.
//
// The host writes one weight code or one bias per clk cycle (byte-enable
// style writes into the wide word); the loader reads with a one-cycle
// latency (registered read data).
//
// Following the source: a RAM that feeds the input buffer at a bandwidth
// set by its word width and clk_inbuff. Own choices: the row-group word
// layout (a word as wide as one buffer entry, so loading keeps pace with
// one entry per clock), keeping biases here, and the host write format.
module param_ram #(
  parameter int unsigned N_IN  = 784,
  parameter int unsigned N_HID = 128,
  parameter int unsigned N_OUT = 10,
  parameter int unsigned P     = 3,
  parameter int unsigned WB    = 7,
  parameter int unsigned BIAS_W = 16,
  localparam int unsigned G1 = (N_HID + P - 1) / P,
  localparam int unsigned G2 = (N_OUT + P - 1) / P,
  localparam int unsigned GROUPS = G1 + G2,
  localparam int unsigned GA = $clog2(GROUPS)
) (
  input  logic                     clk,
  // host write: one weight (is_bias = 0) or one bias (is_bias = 1)
  input  logic                     we,
  input  logic                     is_bias,
  input  logic                     layer,
  input  logic [15:0]              row,
  input  logic [15:0]              col,
  input  logic [15:0]              wdata,
  // loader read
  input  logic                     re,
  input  logic [GA-1:0]            raddr,
  output logic [P*N_IN*WB-1:0]     rweights,
  output logic [P*BIAS_W-1:0]      rbias
);

  logic [P*N_IN*WB-1:0] wmem [GROUPS];
  logic [P*BIAS_W-1:0]  bmem [GROUPS];

  logic [GA-1:0] wgroup;
  logic [15:0]   wslot;

  always_comb begin
    wgroup = GA'((layer ? G1 : 0) + int'(row) / P);
    wslot  = 16'(int'(row) % P);
  end

  always_ff @(posedge clk) begin
    if (we && !is_bias)
      wmem[wgroup][(int'(wslot) * N_IN + int'(col)) * WB +: WB] <= wdata[WB-1:0];
    if (we && is_bias)
      bmem[wgroup][int'(wslot) * BIAS_W +: BIAS_W] <= wdata[BIAS_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (re) begin
      rweights <= wmem[raddr];
      rbias    <= bmem[raddr];
    end
  end

endmodule
