// tb_spx_mul: checks spx_mul against the SPx value set computed in real
// arithmetic. Every weight code with sign, for a set of data values
// including 0 and 255, is multiplied; the expected product is
// d * (+/- sum of 2^-c_i over non-zero codes) * 2^EMAX, which is an exact
// integer.
module tb_spx_mul;
  localparam int D_W = 8, TERMS = 3, TERM_BITS = 2;
  localparam int WB = 1 + TERMS * TERM_BITS;
  localparam int EMAX = (1 << TERM_BITS) - 1;
  localparam int PROD_W = D_W + EMAX + $clog2(TERMS) + 1;

  logic [D_W-1:0] d;
  logic [WB-1:0] code;
  logic signed [PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  spx_mul #(.D_W(D_W), .TERMS(TERMS), .TERM_BITS(TERM_BITS)) dut (.*);

  function automatic real spx_value(logic [WB-1:0] c);
    real v = 0.0;
    for (int i = 0; i < TERMS; i++) begin
      int k = int'(c[i*TERM_BITS +: TERM_BITS]);
      if (k != 0) v += 1.0 / real'(1 << k);
    end
    return c[WB-1] ? -v : v;
  endfunction

  initial begin
    int dv [6] = '{0, 1, 37, 128, 200, 255};
    for (int di = 0; di < 6 + 20; di++) begin
      d = (di < 6) ? D_W'(dv[di]) : D_W'($urandom);
      for (int c = 0; c < (1 << WB); c++) begin
        code = WB'(c);
        #1;
        begin
          int exp_p;
          exp_p = $rtoi(real'(d) * spx_value(code) * real'(1 << EMAX));
          checks++;
          if (int'(prod) != exp_p) begin
            failures++;
            if (failures < 10)
              $display("FAIL d=%0d code=%b prod=%0d expected=%0d", d, code, prod, exp_p);
          end
        end
      end
    end
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
