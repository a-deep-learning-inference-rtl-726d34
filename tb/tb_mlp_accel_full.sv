// tb_mlp_accel_full: one complete inference of the 784-128-10 network with
// the accelerator at its default parameters. Random SPx weights (scaled so
// the hidden layer is not saturated), biases and a sparse random 784-pixel
// input are loaded through the host port; the class and the ten output
// activations are compared with mlp_ref_pkg's model. The loading clock runs
// faster than the computing clock, and the test reports the computing-clock
// cycles from start to done, checking that the hidden layer's groups entered
// the processing units one per clock (43 groups in 43 clocks).
module tb_mlp_accel_full;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int N_IN = 784, N_HID = 128, N_OUT = 10, P = 3;
  localparam int TERMS = 3, TERM_BITS = 2;
  localparam int WB = 1 + TERMS * TERM_BITS, EMAX = (1 << TERM_BITS) - 1;
  localparam int IW = $clog2(N_OUT);
  localparam int ALPHA1 = 2, ALPHA2 = 8;

  logic rst_n = 1, clk_in = 0, clk_cp = 0, start = 0, busy, done;
  host_wr_t host = '0;
  logic [IW-1:0] cls;
  logic [N_OUT-1:0][7:0] scores;
  int checks = 0, failures = 0;

  int w1 [N_HID][N_IN];
  int w2 [N_OUT][N_HID];
  int b1 [N_HID];
  int b2 [N_OUT];
  int x [N_IN];

  mlp_accel dut (.clk_inbuff(clk_in), .clk_compute(clk_cp), .*);

  always #2 clk_in = ~clk_in;
  always #5 clk_cp = ~clk_cp;

  int cp_cycle = 0, pops [$];
  always @(posedge clk_cp) begin
    cp_cycle <= cp_cycle + 1;
    if (dut.u_compute.pop && !dut.u_compute.e.layer) pops.push_back(cp_cycle);
  end

  task automatic host_write(host_sel_e sel, int layer, int row, int col, int data);
    host.we = 1; host.sel = sel; host.layer = layer[0];
    host.row = 16'(row); host.col = 16'(col); host.wdata = 16'(data);
    @(negedge clk_in);
    host.we = 0;
  endtask

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    int h [N_HID];
    int o [N_OUT];
    int best, t0, t1;
    real s;
    repeat (4) @(negedge clk_in);
    rst_n = 1;
    repeat (4) @(negedge clk_in);
    for (int r = 0; r < N_HID; r++) begin
      for (int c = 0; c < N_IN; c++) begin
        w1[r][c] = int'($urandom % (1 << WB));
        host_write(HOST_WEIGHT, 0, r, c, w1[r][c]);
      end
      b1[r] = int'($signed(16'($urandom))) / 128;
      host_write(HOST_BIAS, 0, r, 0, b1[r]);
    end
    for (int r = 0; r < N_OUT; r++) begin
      for (int c = 0; c < N_HID; c++) begin
        w2[r][c] = int'($urandom % (1 << WB));
        host_write(HOST_WEIGHT, 1, r, c, w2[r][c]);
      end
      b2[r] = int'($signed(16'($urandom))) / 128;
      host_write(HOST_BIAS, 1, r, 0, b2[r]);
    end
    host_write(HOST_ALPHA, 0, 0, 0, ALPHA1);
    host_write(HOST_ALPHA, 1, 0, 0, ALPHA2);
    for (int c = 0; c < N_IN; c++) begin
      x[c] = ($urandom % 4 != 0) ? 0 : int'($urandom % 256);
      host_write(HOST_PIXEL, 0, 0, c, x[c]);
    end
    for (int r = 0; r < N_HID; r++) begin
      s = 0.0;
      for (int c = 0; c < N_IN; c++) s += real'(x[c]) * spx_value(w1[r][c], TERMS, TERM_BITS);
      h[r] = neuron(s * real'(1 << EMAX), ALPHA1, b1[r], EMAX);
    end
    best = 0;
    for (int r = 0; r < N_OUT; r++) begin
      s = 0.0;
      for (int c = 0; c < N_HID; c++) s += real'(h[c]) * spx_value(w2[r][c], TERMS, TERM_BITS);
      o[r] = neuron(s * real'(1 << EMAX), ALPHA2, b2[r], EMAX);
      if (o[r] > o[best]) best = r;
    end
    start = 1;
    t0 = cp_cycle;
    @(negedge clk_in);
    start = 0;
    @(posedge clk_cp iff done);
    t1 = cp_cycle;
    checks += 1 + N_OUT;
    if (int'(cls) != best) begin
      failures++;
      $display("FAIL class %0d, expected %0d", cls, best);
    end
    for (int r = 0; r < N_OUT; r++)
      if (int'(scores[r]) != o[r]) begin
        failures++;
        $display("FAIL score %0d = %0d, expected %0d", r, scores[r], o[r]);
      end
    checks++;
    if (pops.size() != (N_HID + P - 1) / P || pops[pops.size()-1] - pops[0] != pops.size() - 1) begin
      failures++;
      $display("FAIL hidden groups did not enter one per clock");
    end
    $display("class %0d (expected %0d), scores %p", cls, best, o);
    $display("computing clocks from start to done: %0d", t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
