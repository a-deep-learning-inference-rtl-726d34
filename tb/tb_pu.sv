// tb_pu: drives a processing unit with one random reorganised row per clock
// (with some idle clocks in between) and checks every dot product against
// a reference computed in real arithmetic, and that each result appears
// exactly LAT = 2 + ceil(log2 N) clocks after its row entered.
// N = 13 keeps the run short and exercises a tree padded to 16 leaves.
module tb_pu;
  localparam int N = 13, D_W = 8, TERMS = 3, TERM_BITS = 2;
  localparam int WB = 1 + TERMS * TERM_BITS;
  localparam int EMAX = (1 << TERM_BITS) - 1;
  localparam int LEVELS = $clog2(N);
  localparam int LAT = 2 + LEVELS;
  localparam int SUM_W = D_W + EMAX + $clog2(TERMS) + 1 + LEVELS;
  localparam int NROWS = 200;

  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  logic [N-1:0][WB-1:0] w;
  logic [N-1:0][D_W-1:0] d;
  logic [N-1:0][WB-1:0] wl;
  logic [N-1:0][D_W-1:0] dl;
  logic signed [SUM_W-1:0] sum;
  int checks = 0, failures = 0, cycle = 0;
  int exp_sum [NROWS];
  int in_cycle [NROWS];
  int n_in = 0, n_out = 0;

  pu #(.N(N), .D_W(D_W), .TERMS(TERMS), .TERM_BITS(TERM_BITS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real spx_value(logic [WB-1:0] c);
    real v = 0.0;
    for (int i = 0; i < TERMS; i++) begin
      int k = int'(c[i*TERM_BITS +: TERM_BITS]);
      if (k != 0) v += 1.0 / real'(1 << k);
    end
    return c[WB-1] ? -v : v;
  endfunction

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (n_in < NROWS) begin
      real acc;
      bit go;
      acc = 0.0;
      go = ($urandom % 4) != 0;
      for (int k = 0; k < N; k++) begin
        wl[k] = WB'($urandom);
        dl[k] = (n_in % 17 == 0) ? 8'd255 : D_W'($urandom);
        if (n_in % 17 == 0) wl[k] = (n_in % 34 == 0) ? 7'b1010101 : 7'b0010101;
        acc += real'(dl[k]) * spx_value(wl[k]) * real'(1 << EMAX);
      end
      w <= wl;
      d <= dl;
      in_valid <= go;
      if (go) begin
        exp_sum[n_in] = $rtoi(acc);
        in_cycle[n_in] = cycle + 1;  // sampled on the coming edge
        n_in++;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out != NROWS) begin
      failures++;
      $display("FAIL %0d results for %0d rows", n_out, NROWS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results are sampled on the falling edge, clear of the clock edge
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      if (n_out >= NROWS) failures++;
      else begin
        if (int'(sum) != exp_sum[n_out]) begin
          failures++;
          $display("FAIL row %0d sum=%0d expected=%0d", n_out, sum, exp_sum[n_out]);
        end
        if (cycle - in_cycle[n_out] != LAT) begin
          failures++;
          $display("FAIL row %0d latency %0d, expected %0d", n_out, cycle - in_cycle[n_out], LAT);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
