// tb_param_ram: writes random weight codes and biases for every row of both
// layers through the host write port, one per clock, then reads every row
// group and compares each field with a copy kept in the testbench. Reads
// must return data one clock after the read request. Small sizes (N_IN=9,
// N_HID=7, N_OUT=4, P=3) give short last groups in both layers.
module tb_param_ram;
  localparam int N_IN = 9, N_HID = 7, N_OUT = 4, P = 3, WB = 7, BIAS_W = 16;
  localparam int G1 = (N_HID + P - 1) / P, G2 = (N_OUT + P - 1) / P;
  localparam int GA = $clog2(G1 + G2);

  logic clk = 0, we = 0, is_bias = 0, layer = 0, re = 0;
  logic [15:0] row = 0, col = 0, wdata = 0;
  logic [GA-1:0] raddr = 0;
  logic [P*N_IN*WB-1:0] rweights;
  logic [P*BIAS_W-1:0] rbias;
  logic [WB-1:0] wref [2][N_HID][N_IN];
  logic [15:0] bref [2][N_HID];
  int checks = 0, failures = 0;

  param_ram #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .P(P), .WB(WB),
              .BIAS_W(BIAS_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    @(negedge clk);
    for (int l = 0; l < 2; l++)
      for (int r = 0; r < (l ? N_OUT : N_HID); r++) begin
        for (int c = 0; c < N_IN; c++) begin
          wref[l][r][c] = WB'($urandom);
          we = 1; is_bias = 0; layer = l[0]; row = 16'(r); col = 16'(c);
          wdata = 16'(wref[l][r][c]);
          @(negedge clk);
        end
        bref[l][r] = 16'($urandom);
        we = 1; is_bias = 1; layer = l[0]; row = 16'(r); wdata = bref[l][r];
        @(negedge clk);
      end
    we = 0;
    for (int g = 0; g < G1 + G2; g++) begin
      re = 1; raddr = GA'(g);
      @(negedge clk);
      re = 0; raddr = GA'(g + 1);   // must not disturb the registered data
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        int l, r;
        l = (g >= G1);
        r = (l ? g - G1 : g) * P + p;
        if (r < (l ? N_OUT : N_HID)) begin
          for (int c = 0; c < N_IN; c++) begin
            checks++;
            if (rweights[(p*N_IN + c)*WB +: WB] != wref[l][r][c]) begin
              failures++;
              $display("FAIL layer %0d row %0d col %0d", l, r, c);
            end
          end
          checks++;
          if (rbias[p*BIAS_W +: BIAS_W] != bref[l][r]) begin
            failures++;
            $display("FAIL bias layer %0d row %0d", l, r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
