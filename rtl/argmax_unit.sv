// argmax_unit: classification y = argmax_k F_k over the output layer.
//
// Output-layer activations arrive in groups of up to P per clock, each
// group tagged with the index of its first neuron and the number of valid
// lanes; the last group of a sample is flagged. The unit stores every
// activation as a score, keeps a running maximum (the lowest index wins a
// tie), and one clock after the last group raises done for one cycle with
// the class index and all N_OUT scores. A group whose first index is 0
// starts a new sample.
//
// Following the source: the argmax over the sigmoid outputs. Own choices:
// tie rule, grouped input, one-cycle done pulse.
module argmax_unit #(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned P     = 3,
  localparam int unsigned IW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [15:0]          in_first,   // index of lane 0
  input  logic [15:0]          in_count,   // valid lanes, 1..P
  input  logic                 in_last,
  input  logic [P-1:0][7:0]    in_y,
  output logic                 done,
  output logic [IW-1:0]        cls,
  output logic [N_OUT-1:0][7:0] scores
);

  logic [7:0]    best_v, nbest_v;
  logic [IW-1:0] best_i, nbest_i;

  always_comb begin
    nbest_v = (in_first == 16'd0) ? 8'd0 : best_v;
    nbest_i = (in_first == 16'd0) ? '0 : best_i;
    for (int p = 0; p < P; p++) begin
      if (p < int'(in_count) && (in_y[p] > nbest_v ||
          (int'(in_first) + p == 0))) begin
        nbest_v = in_y[p];
        nbest_i = IW'(int'(in_first) + p);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_v <= '0;
      best_i <= '0;
      done   <= 1'b0;
      cls    <= '0;
      scores <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        best_v <= nbest_v;
        best_i <= nbest_i;
        for (int p = 0; p < P; p++)
          if (p < int'(in_count) && int'(in_first) + p < N_OUT)
            scores[int'(in_first) + p] <= in_y[p];
        if (in_last) begin
          done <= 1'b1;
          cls  <= nbest_i;
        end
      end
    end
  end

endmodule
