// tb_argmax_unit: feeds samples of N_OUT = 10 random activations in groups of
// P = 3 (4, 3, 3 ... with a short last group), with idle clocks between
// groups, and checks the done pulse, the class (first maximum) and all ten
// scores against a reference. Some samples have ties and all-zero values.
module tb_argmax_unit;
  localparam int N_OUT = 10, P = 3, IW = $clog2(N_OUT), NSAMP = 300;

  logic clk = 0, rst_n = 1, in_valid = 0, in_last = 0, done;
  logic [15:0] in_first = 0, in_count = 0;
  logic [P-1:0][7:0] in_y = '0;
  logic [IW-1:0] cls;
  logic [N_OUT-1:0][7:0] scores;
  int checks = 0, failures = 0, n_done = 0;

  argmax_unit #(.N_OUT(N_OUT), .P(P)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (done) n_done++;

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSAMP; s++) begin
      int v [N_OUT];
      int best;
      best = 0;
      for (int k = 0; k < N_OUT; k++) begin
        v[k] = (s % 5 == 0) ? int'($urandom % 4) * 60 : int'($urandom % 256);
        if (s % 11 == 0) v[k] = 0;
        if (v[k] > v[best]) best = k;
      end
      for (int g = 0; g < N_OUT; g += P) begin
        in_valid = 1;
        in_first = 16'(g);
        in_count = 16'((N_OUT - g < P) ? N_OUT - g : P);
        in_last  = (g + P >= N_OUT);
        for (int p = 0; p < P; p++) in_y[p] = (g + p < N_OUT) ? 8'(v[g+p]) : 8'hFF;
        @(negedge clk);
        in_valid = 0;
        in_y = '1;
        if (g + P < N_OUT) repeat ($urandom % 2) @(negedge clk);
      end
      checks += 2 + N_OUT;
      if (!done) begin failures++; $display("FAIL no done, sample %0d", s); end
      if (int'(cls) != best) begin
        failures++;
        $display("FAIL sample %0d class %0d expected %0d", s, cls, best);
      end
      for (int k = 0; k < N_OUT; k++)
        if (int'(scores[k]) != v[k]) begin failures++; $display("FAIL score %0d", k); end
      @(negedge clk);
    end
    checks++;
    if (n_done != NSAMP) begin failures++; $display("FAIL %0d done pulses", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
