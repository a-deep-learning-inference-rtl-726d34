// tb_compute_ctrl: the computing side against models of the input buffer
// (a queue of random row groups, offered with random gaps) and of the return
// buffer (fill count rises with each write, falls when its reader, at
// random, takes a word). For every popped group the results are predicted
// with mlp_ref_pkg and checked where they come out: hidden-layer groups in
// the return-buffer write, output-layer groups on out_*, including the
// first row, row count and last flag, in order. Also checked: the return
// buffer never holds more than RET_DEPTH words, every result leaves exactly
// 2 + ceil(log2 N_IN) + 2 clocks after its pop, and the credit hold happened.
module tb_compute_ctrl;
  import mlp_ref_pkg::*;
  localparam int N_IN = 6, P = 3, D_W = 8, TERMS = 3, TERM_BITS = 2;
  localparam int BIAS_W = 16, ALPHA_W = 8, RET_DEPTH = 2;
  localparam int WB = 1 + TERMS * TERM_BITS, EMAX = (1 << TERM_BITS) - 1;
  localparam int RAW = $clog2(RET_DEPTH);
  localparam int ENTRY_W = 2 + 32 + ALPHA_W + P*BIAS_W + N_IN*D_W + P*N_IN*WB;
  localparam int RET_W = 32 + P*8;
  localparam int LAT = 2 + $clog2(N_IN) + 2;
  localparam int NGROUPS = 400;

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

  typedef struct {
    int layer, last, first, count, t_pop;
    int y [P];
  } exp_t;

  logic clk = 0, rst_n = 1;
  logic buf_empty, buf_re;
  logic [ENTRY_W-1:0] buf_rdata;
  logic ret_we;
  logic [RET_W-1:0] ret_wdata;
  logic [RAW:0] ret_count;
  logic out_valid, out_last;
  logic [15:0] out_first, out_count;
  logic [P-1:0][7:0] out_y;

  compute_ctrl #(.N_IN(N_IN), .P(P), .D_W(D_W), .TERMS(TERMS), .TERM_BITS(TERM_BITS),
                 .BIAS_W(BIAS_W), .ALPHA_W(ALPHA_W), .RET_DEPTH(RET_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  entry_t in_q [$];
  exp_t exp_q [$];
  int checks = 0, failures = 0, cycle = 0, ret_fill = 0, n_hold = 0, n_done = 0;
  int gap = 0;

  assign buf_empty = (in_q.size() == 0) || (gap > 0);
  assign buf_rdata = (in_q.size() != 0) ? in_q[0] : '0;
  assign ret_count = (RAW+1)'(ret_fill);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  function automatic exp_t predict(entry_t e, int t);
    exp_t x;
    x.layer = e.layer; x.last = e.last; x.first = e.first; x.count = e.count;
    x.t_pop = t;
    for (int p = 0; p < P; p++) begin
      real s;
      s = 0.0;
      for (int j = 0; j < N_IN; j++)
        s += real'(e.d[j]) * spx_value(int'(e.w[p][j]), TERMS, TERM_BITS);
      x.y[p] = neuron(s * real'(1 << EMAX), int'(e.alpha), int'($signed(e.bias[p])), EMAX);
    end
    return x;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (!buf_empty && !buf_re) n_hold++;
      // return-buffer model
      check(ret_fill <= RET_DEPTH, "return buffer overflow");
      ret_fill <= ret_fill + int'(ret_we) - int'(ret_fill > 0 && ($urandom % 4 == 0));
      if (gap > 0) gap <= gap - 1;
      if (buf_re) begin
        exp_q.push_back(predict(in_q[0], cycle));
        in_q.pop_front();
        gap <= ($urandom % 3 == 0) ? int'($urandom % 4) : 0;
      end
      if (ret_we || out_valid) begin
        ret_t r;
        r = ret_t'(ret_wdata);
        check(exp_q.size() != 0, "unexpected result");
        if (exp_q.size() != 0) begin
          exp_t x;
          x = exp_q.pop_front();
          check(ret_we == (x.layer == 0) && out_valid == (x.layer == 1), "destination");
          check(cycle - x.t_pop == LAT, "latency");
          if (ret_we) begin
            check(int'(r.first) == x.first && int'(r.count) == x.count, "return sideband");
            for (int p = 0; p < x.count; p++) check(int'(r.y[p]) == x.y[p], "hidden value");
          end else begin
            check(int'(out_first) == x.first && int'(out_count) == x.count &&
                  int'(out_last) == x.last, "output sideband");
            for (int p = 0; p < x.count; p++) check(int'(out_y[p]) == x.y[p], "output value");
          end
          n_done++;
        end
      end
    end
  end

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    for (int i = 0; i < NGROUPS; i++) begin
      entry_t e;
      e.layer = (i % 5 >= 3);
      e.last  = (i % 5 == 2 || i % 5 == 4);
      e.first = 16'((i % 5) * P);
      e.count = 16'(e.last ? 1 + $urandom % P : P);
      e.alpha = 8'(1 + $urandom % 40);
      for (int p = 0; p < P; p++) e.bias[p] = 16'($signed(16'($urandom)) / 16);
      for (int j = 0; j < N_IN; j++) e.d[j] = 8'($urandom);
      for (int p = 0; p < P; p++)
        for (int j = 0; j < N_IN; j++) e.w[p][j] = WB'($urandom);
      in_q.push_back(e);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (in_q.size() == 0);
    repeat (LAT + 4) @(negedge clk);
    check(n_done == NGROUPS, "all groups done");
    check(n_hold > 0, "credit hold seen");
    $display("groups %0d, credit holds %0d", n_done, n_hold);
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
