// tb_mlp_accel: end-to-end test of the accelerator at reduced size
// (N_IN = 20, N_HID = 16, N_OUT = 10, P = 3, RET_DEPTH = 2).
//
// Random SPx weights, biases and layer scales are loaded through the host
// port, then several input vectors are classified. For each sample the class
// and all output activations are compared with mlp_ref_pkg's model. The
// samples run under two clock ratios: a loading clock faster than the
// computing clock (the input buffer fills up and the loader waits), and a
// slower one (the processing units wait for data). The test counts how often
// each flow-control mechanism of the design happened and fails if one never
// did: loader waiting on a full input buffer, processing waiting on an empty
// one, hidden-layer groups held back by the return-buffer credit, short last
// groups, output-layer groups, and the loader waiting for the hidden results.
// It also checks that the output layer's groups, which no credit holds back,
// enter the processing units one per clock when loading is faster.
module tb_mlp_accel;
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  localparam int N_IN = 20, N_HID = 16, N_OUT = 10, P = 3;
  localparam int TERMS = 3, TERM_BITS = 2, BUF_DEPTH = 4, RET_DEPTH = 2;
  localparam int NSAMP = 6;
  localparam int WB = 1 + TERMS * TERM_BITS, EMAX = (1 << TERM_BITS) - 1;
  localparam int IW = $clog2(N_OUT);
  localparam int ALPHA1 = 16, ALPHA2 = 16;

  logic rst_n = 1, clk_in = 0, clk_cp = 0, start = 0, busy, done;
  host_wr_t host = '0;
  logic [IW-1:0] cls;
  logic [N_OUT-1:0][7:0] scores;
  int half_in = 2, half_cp = 5;
  int checks = 0, failures = 0;

  int w1 [N_HID][N_IN];
  int w2 [N_OUT][N_HID];
  int b1 [N_HID];
  int b2 [N_OUT];
  int x [N_IN];

  mlp_accel #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .P(P), .TERMS(TERMS),
              .TERM_BITS(TERM_BITS), .BUF_DEPTH(BUF_DEPTH), .RET_DEPTH(RET_DEPTH)) dut (
    .clk_inbuff(clk_in), .clk_compute(clk_cp), .*);

  always #(half_in) clk_in = ~clk_in;
  always #(half_cp) clk_cp = ~clk_cp;

  // ---- mechanism counters ----
  int n_full_wait = 0, n_empty_wait = 0, n_credit_wait = 0, n_short = 0;
  int n_out_groups = 0, n_wait_h = 0, in_sample = 0;
  always @(posedge clk_in) if (dut.u_loader.rst_n) begin
    if ((int'(dut.u_loader.state) == 1 || int'(dut.u_loader.state) == 3) &&
        dut.u_loader.g < dut.u_loader.g_end && !dut.u_loader.issue) n_full_wait++;
    if (int'(dut.u_loader.state) == 2) n_wait_h++;
  end
  always @(posedge clk_cp) if (dut.u_compute.rst_n) begin
    if (in_sample && dut.u_compute.buf_empty) n_empty_wait++;
    if (!dut.u_compute.buf_empty && !dut.u_compute.credit_ok) n_credit_wait++;
    if (dut.u_compute.pop && int'(dut.u_compute.e.count) < P) n_short++;
    if (dut.u_compute.pop && dut.u_compute.e.layer) n_out_groups++;
  end

  // pops of output-layer groups, with the compute clock count
  int cp_cycle = 0, pop_cycle [$];
  always @(posedge clk_cp) begin
    cp_cycle <= cp_cycle + 1;
    if (dut.u_compute.pop && dut.u_compute.e.layer) pop_cycle.push_back(cp_cycle);
  end

  task automatic host_write(host_sel_e sel, int layer, int row, int col, int data);
    @(negedge clk_in);
    host.we = 1; host.sel = sel; host.layer = layer[0];
    host.row = 16'(row); host.col = 16'(col); host.wdata = 16'(data);
    @(negedge clk_in);
    host.we = 0;
  endtask

  task automatic load_model();
    for (int r = 0; r < N_HID; r++) begin
      for (int c = 0; c < N_IN; c++) begin
        w1[r][c] = int'($urandom % (1 << WB));
        host_write(HOST_WEIGHT, 0, r, c, w1[r][c]);
      end
      b1[r] = int'($signed(16'($urandom))) / 64;
      host_write(HOST_BIAS, 0, r, 0, b1[r]);
    end
    for (int r = 0; r < N_OUT; r++) begin
      for (int c = 0; c < N_HID; c++) begin
        w2[r][c] = int'($urandom % (1 << WB));
        host_write(HOST_WEIGHT, 1, r, c, w2[r][c]);
      end
      b2[r] = int'($signed(16'($urandom))) / 64;
      host_write(HOST_BIAS, 1, r, 0, b2[r]);
    end
    host_write(HOST_ALPHA, 0, 0, 0, ALPHA1);
    host_write(HOST_ALPHA, 1, 0, 0, ALPHA2);
  endtask

  task automatic run_sample(int sidx);
    int h [N_HID];
    int o [N_OUT];
    int best;
    real s;
    for (int c = 0; c < N_IN; c++) begin
      x[c] = ($urandom % 3 == 0) ? 0 : int'($urandom % 256);
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
    pop_cycle.delete();
    @(negedge clk_in);
    start = 1; in_sample = 1;
    @(negedge clk_in);
    start = 0;
    @(posedge clk_cp iff done);
    in_sample = 0;
    checks += 1 + N_OUT;
    if (int'(cls) != best) begin
      failures++;
      $display("FAIL sample %0d: class %0d, expected %0d", sidx, cls, best);
    end
    for (int r = 0; r < N_OUT; r++)
      if (int'(scores[r]) != o[r]) begin
        failures++;
        $display("FAIL sample %0d: score %0d = %0d, expected %0d", sidx, r, scores[r], o[r]);
      end
    // with the loading clock faster, the output-layer groups enter one per clock
    if (half_in < half_cp) begin
      checks++;
      if (pop_cycle.size() != (N_OUT + P - 1) / P ||
          pop_cycle[pop_cycle.size()-1] - pop_cycle[0] != pop_cycle.size() - 1) begin
        failures++;
        $display("FAIL sample %0d: output groups not one per clock", sidx);
      end
    end
    $display("sample %0d: class %0d (expected %0d), scores %p", sidx, cls, best, o);
    repeat (3) @(negedge clk_in);
  endtask

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    repeat (4) @(negedge clk_in);
    rst_n = 1;
    repeat (4) @(negedge clk_cp);
    load_model();
    for (int i = 0; i < NSAMP; i++) begin
      if (i == NSAMP / 2) begin half_in = 11; half_cp = 3; end
      run_sample(i);
    end
    $display("loader waited on full buffer %0d, units waited on empty buffer %0d,",
             n_full_wait, n_empty_wait);
    $display("credit holds %0d, short groups %0d, output-layer groups %0d, waits for hidden %0d",
             n_credit_wait, n_short, n_out_groups, n_wait_h);
    checks += 6;
    if (n_full_wait == 0)   begin failures++; $display("FAIL no full-buffer wait"); end
    if (n_empty_wait == 0)  begin failures++; $display("FAIL no empty-buffer wait"); end
    if (n_credit_wait == 0) begin failures++; $display("FAIL no credit hold"); end
    if (n_short == 0)       begin failures++; $display("FAIL no short group"); end
    if (n_out_groups == 0)  begin failures++; $display("FAIL no output-layer group"); end
    if (n_wait_h == 0)      begin failures++; $display("FAIL no wait for hidden results"); end
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
