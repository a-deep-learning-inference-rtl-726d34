// tb_act_unit: checks scale + bias + sigmoid against a reference written in
// real arithmetic. For random dot products, scales and biases the
// reference forms z = floor(alpha*s / 2^(EMAX+4)) + b (Q.8), evaluates the
// PLAN segments of the sigmoid on |z|/256 in floating point, takes
// floor(256 f), mirrors it as 256 - that for z < 0 and clips to 255. It
// also compares the result with the exact logistic function (error below
// 0.02 + one LSB) and checks the one-clock latency.
module tb_act_unit;
  localparam int SUM_W = 24, EMAX = 3, ALPHA_W = 8, BIAS_W = 16, NTEST = 3000;

  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  logic signed [SUM_W-1:0] sum = '0;
  logic [ALPHA_W-1:0] alpha = '0;
  logic signed [BIAS_W-1:0] bias = '0;
  logic [7:0] y;
  int checks = 0, failures = 0;
  int exp_q [$];

  act_unit #(.SUM_W(SUM_W), .EMAX(EMAX), .ALPHA_W(ALPHA_W), .BIAS_W(BIAS_W)) dut (.*);

  always #5 clk = ~clk;

  function automatic real plan(real x);  // x >= 0
    if (x >= 5.0)   return 1.0;
    if (x >= 2.375) return x / 32.0 + 0.84375;
    if (x >= 1.0)   return x / 8.0 + 0.625;
    return x / 4.0 + 0.5;
  endfunction

  function automatic int ref_y(longint s, int a, int b, output real zr);
    longint zq;
    int f, r;
    zq = longint'($floor(real'(s) * real'(a) / real'(1 << (EMAX + 4)))) + b;
    zr = real'(zq) / 256.0;
    f = $rtoi($floor(256.0 * plan(zr < 0 ? -zr : zr)));
    r = (zq < 0) ? 256 - f : f;
    return (r > 255) ? 255 : r;
  endfunction

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NTEST; i++) begin
      longint s;
      int a, b, e;
      real zr, err;
      case (i % 4)
        0: s = longint'($signed($urandom)) % 400;
        1: s = longint'($signed($urandom)) % 40000;
        2: s = longint'($signed($urandom)) % (1 << (SUM_W - 1));
        default: s = (i % 8 == 3) ? -(1 << (SUM_W - 1)) : (1 << (SUM_W - 1)) - 1;
      endcase
      a = int'($urandom % 256);
      b = int'($signed(16'($urandom))) / ((i % 3) + 1);
      e = ref_y(s, a, b, zr);
      // the PLAN curve stays within 0.02 of the logistic function
      checks++;
      err = real'(e) / 256.0 - 1.0 / (1.0 + $exp(-zr));
      if (err > 0.02 + 1.0 / 256.0 || err < -0.02 - 1.0 / 256.0) begin
        failures++;
        $display("FAIL reference far from sigmoid at z=%f", zr);
      end
      exp_q.push_back(e);
      @(negedge clk);
      sum <= SUM_W'(s); alpha <= ALPHA_W'(a); bias <= BIAS_W'(b); in_valid <= 1;
      @(negedge clk);
      in_valid <= 0;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result must be there exactly one clock after in_valid
  logic in_valid_d = 0;
  always @(posedge clk) in_valid_d <= in_valid;
  always @(negedge clk) begin
    if (rst_n && (out_valid || in_valid_d)) begin
      checks += 2;
      if (out_valid != in_valid_d) begin
        failures++;
        $display("FAIL latency");
      end
      if (exp_q.size() == 0) failures++;
      else begin
        int e;
        e = exp_q.pop_front();
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("FAIL y=%0d expected %0d", y, e);
        end
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
