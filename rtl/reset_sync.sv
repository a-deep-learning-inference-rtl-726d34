// reset_sync: asynchronous-assert, synchronous-release reset for one clock
// domain. rst_n drops out_n at once; out_n rises on the second rising edge
// of clk after rst_n rises. Used once per clock domain of the accelerator.
module reset_sync (
  input  logic clk,
  input  logic rst_n,
  output logic out_n
);
  logic s1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {out_n, s1} <= 2'b00;
    else        {out_n, s1} <= {s1, 1'b1};
  end
endmodule
