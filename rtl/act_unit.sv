// act_unit: scale, bias and sigmoid for one neuron.
//
// Input is a processing-unit dot product s = sum_j d_j * q_j * 2^EMAX (see
// spx_mul), with d_j in Q0.8. The unit forms the pre-activation
//   z = alpha * s / 2^(EMAX+4) + b         (Q.8 fixed point)
// where alpha is the layer's SPx scale (unsigned Q4.4) and b the neuron's
// bias (signed Q7.8), and returns y = sigmoid(z) as an unsigned Q0.8 byte.
// The right shift rounds towards minus infinity.
//
// The sigmoid is the piecewise-linear PLAN approximation, built from shifts
// and adds: for x = |z|
//   x >= 5          : 1
//   2.375 <= x < 5  : x/32 + 0.84375
//   1 <= x < 2.375  : x/8  + 0.625
//   0 <= x < 1      : x/4  + 0.5
// and 1 - f(|z|) for z < 0; 1.0 is clipped to 255/256.
//
// Following the source: y = sigma(W F + b) with the logistic sigmoid for both
// layers, and one scale alpha shared by a layer's SPx weights. Own choices:
// the fixed-point formats, the PLAN approximation of the sigmoid, and one
// register stage (LAT = 1: result one clock after in_valid).
module act_unit #(
  parameter int unsigned SUM_W   = 24,
  parameter int unsigned EMAX    = 3,
  parameter int unsigned ALPHA_W = 8,
  parameter int unsigned BIAS_W  = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [SUM_W-1:0]  sum,
  input  logic [ALPHA_W-1:0]       alpha,
  input  logic signed [BIAS_W-1:0] bias,
  output logic                     out_valid,
  output logic [7:0]               y
);

  localparam int unsigned Z_W = SUM_W + ALPHA_W + 2;

  logic signed [Z_W-1:0] scaled, z;
  logic [Z_W-1:0]        ax;
  logic [9:0]            f;      // f(|z|) in Q.8, at most 256
  logic [9:0]            s;

  always_comb begin
    scaled = (Z_W'(sum) * $signed({1'b0, alpha})) >>> (EMAX + 4);
    z      = scaled + Z_W'(bias);
    ax     = z[Z_W-1] ? Z_W'(-z) : Z_W'(z);
    if (ax >= Z_W'(1280))      f = 10'd256;
    else if (ax >= Z_W'(608))  f = 10'(ax >> 5) + 10'd216;
    else if (ax >= Z_W'(256))  f = 10'(ax >> 3) + 10'd160;
    else                       f = 10'(ax >> 2) + 10'd128;
    s = z[Z_W-1] ? 10'd256 - f : f;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= (s > 10'd255) ? 8'd255 : s[7:0];
    end
  end

endmodule
