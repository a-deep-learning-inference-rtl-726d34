// tb_row_loader: the loader against models of its neighbours: a RAM with a
// one-clock registered read (random row-group contents), an input buffer
// whose reader pops at random, and a return buffer that hands back hidden
// activations (value 100 + index) some clocks after their group was sent.
// Every entry written to the buffer is checked field by field: layer, first
// row, row count (short last group), last flag, alpha, biases, weights of
// the right RAM word, and the data vector (input vector for the hidden
// layer; returned activations, zero beyond N_HID, for the output layer).
// Also checked: the buffer never overflows, no output-layer group is sent
// before all hidden activations are back, and busy falls after the sample.
module tb_row_loader;
  localparam int N_IN = 5, N_HID = 7, N_OUT = 4, P = 3, D_W = 8, WB = 7;
  localparam int BIAS_W = 16, ALPHA_W = 8, BUF_DEPTH = 4;
  localparam int G1 = (N_HID + P - 1) / P, G2 = (N_OUT + P - 1) / P;
  localparam int GA = $clog2(G1 + G2), BAW = $clog2(BUF_DEPTH);
  localparam int ENTRY_W = 2 + 32 + ALPHA_W + P*BIAS_W + N_IN*D_W + P*N_IN*WB;
  localparam int RET_W = 32 + P*8;
  localparam int NSAMP = 4;

  typedef struct packed {
    logic                          layer;
    logic                          last;
    logic [15:0]                   first;
    logic [15:0]                   count;
    logic [ALPHA_W-1:0]            alpha;
    logic [P-1:0][BIAS_W-1:0]      bias;
    logic [N_IN-1:0][D_W-1:0]      d;
    logic [P-1:0][N_IN-1:0][WB-1:0] w;
  } entry_t;

  typedef struct packed {
    logic [15:0]          first;
    logic [15:0]          count;
    logic [P-1:0][7:0]    y;
  } ret_t;

  logic clk = 0, rst_n = 1;
  logic pix_we = 0, alpha_we = 0, alpha_layer = 0, start = 0, busy;
  logic [15:0] pix_addr = 0;
  logic [D_W-1:0] pix_data = 0;
  logic [ALPHA_W-1:0] alpha_data = 0;
  logic ram_re;
  logic [GA-1:0] ram_addr;
  logic [P*N_IN*WB-1:0] ram_weights;
  logic [P*BIAS_W-1:0] ram_bias;
  logic buf_we;
  logic [ENTRY_W-1:0] buf_wdata;
  logic [BAW:0] buf_count;
  logic ret_empty, ret_re;
  logic [RET_W-1:0] ret_rdata;

  row_loader #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .P(P), .D_W(D_W), .WB(WB),
               .BIAS_W(BIAS_W), .ALPHA_W(ALPHA_W), .BUF_DEPTH(BUF_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  logic [P*N_IN*WB-1:0] wmem [G1+G2];
  logic [P*BIAS_W-1:0]  bmem [G1+G2];
  int img [N_IN];
  int alphas [2];
  int checks = 0, failures = 0;
  int n_entries = 0, hid_back = 0, buf_cnt = 0, ret_cnt_model = 0;
  ret_t ret_q [$];
  int ret_delay [$];
  entry_t e;

  assign buf_count = (BAW+1)'(buf_cnt);
  assign ret_empty = (ret_q.size() == 0) || (ret_delay[0] > 0);
  assign ret_rdata = (ret_q.size() != 0) ? ret_q[0] : '0;
  assign e = entry_t'(buf_wdata);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL entry %0d: %s", n_entries, what);
    end
  endtask

  // RAM model, registered read
  always @(posedge clk) if (ram_re) begin
    ram_weights <= wmem[ram_addr];
    ram_bias    <= bmem[ram_addr];
  end

  int exp_g = 0;
  always @(posedge clk) begin
    // return buffer model
    foreach (ret_delay[i]) if (ret_delay[i] > 0) ret_delay[i]--;
    if (ret_re && !ret_empty) begin
      hid_back += int'(ret_q[0].count);
      ret_q.pop_front();
      ret_delay.pop_front();
    end
    // buffer model: random pops, checked writes
    if (buf_cnt > 0 && ($urandom % 2 == 0)) buf_cnt--;
    if (buf_we) begin
      int g, lay, first, cnt;
      g = exp_g;
      lay = (g >= G1);
      first = (lay ? g - G1 : g) * P;
      cnt = (lay ? N_OUT : N_HID) - first;
      if (cnt > P) cnt = P;
      check(buf_cnt < BUF_DEPTH, "write to a full buffer");
      check(int'(e.layer) == lay, "layer");
      check(int'(e.first) == first, "first");
      check(int'(e.count) == cnt, "count");
      check(e.last == (g == G1 - 1 || g == G1 + G2 - 1), "last");
      check(int'(e.alpha) == alphas[lay], "alpha");
      check(e.bias == bmem[g], "bias");
      check(e.w == wmem[g], "weights");
      for (int j = 0; j < N_IN; j++)
        check(int'(e.d[j]) == (lay ? ((j < N_HID) ? 100 + j : 0) : img[j]), "data");
      if (lay) check(hid_back >= N_HID, "output layer before hidden results");
      if (!lay) begin
        ret_t r;
        r.first = 16'(first);
        r.count = 16'(cnt);
        for (int p = 0; p < P; p++) r.y[p] = 8'(100 + first + p);
        ret_q.push_back(r);
        ret_delay.push_back(3 + int'($urandom % 20));
      end
      buf_cnt++;
      exp_g++;
      n_entries++;
    end
  end

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    foreach (wmem[g]) begin
      for (int k = 0; k < P*N_IN*WB; k += 32) wmem[g][k +: 32] = $urandom;
      for (int k = 0; k < P*BIAS_W; k += 16) bmem[g][k +: 16] = 16'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      alphas[l] = 10 + 7 * l;
      alpha_we = 1; alpha_layer = l[0]; alpha_data = 8'(alphas[l]);
      @(negedge clk);
    end
    alpha_we = 0;
    for (int s = 0; s < NSAMP; s++) begin
      for (int j = 0; j < N_IN; j++) begin
        img[j] = int'($urandom % 256);
        pix_we = 1; pix_addr = 16'(j); pix_data = 8'(img[j]);
        @(negedge clk);
      end
      pix_we = 0;
      exp_g = 0; hid_back = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      while (busy) @(negedge clk);
      check(exp_g == G1 + G2, "group count");
      repeat (3) @(negedge clk);
    end
    $display("entries %0d", n_entries);
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
