// tb_input_buffer: the dual-clock buffer between two unrelated clocks.
// A writer pushes a numbered sequence whenever the buffer is not full and a
// coin says so; a reader pops whenever it is not empty and a coin says so.
// The reader checks that every word arrives once and in order, and the test
// checks that both "full" and "empty" were reached and that wr_count never
// exceeds DEPTH. The first half runs with the write clock faster than the
// read clock, the second half the other way round.
module tb_input_buffer;
  localparam int WIDTH = 16, DEPTH = 4, AW = $clog2(DEPTH), NWORDS = 600;

  logic clk_w = 0, clk_r = 0, rst_n = 1;
  logic wr_en, rd_en, full, empty;
  logic wr_want = 0, rd_want = 0;   // requests, gated by full / empty
  assign wr_en = wr_want && !full;
  assign rd_en = rd_want && !empty;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [AW:0] wr_count;
  int half_w = 3, half_r = 7;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_full = 0, n_empty = 0;

  input_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk_w, .rst_wn(rst_n), .wr_en, .wdata, .full, .wr_count,
    .clk_r, .rst_rn(rst_n), .rd_en, .rdata, .empty
  );

  always #(half_w) clk_w = ~clk_w;
  always #(half_r) clk_r = ~clk_r;

  // writer: counts the write taken on this edge and sets up the next one
  always @(posedge clk_w) begin
    if (rst_n) begin
      int nxt;
      nxt = n_wr + int'(wr_en && !full);
      if (full) n_full++;
      if (int'(wr_count) > DEPTH) begin
        failures++;
        $display("FAIL wr_count %0d", wr_count);
      end
      n_wr  <= nxt;
      wr_want <= (nxt < NWORDS) && ($urandom % 3 != 0);
      wdata <= WIDTH'(nxt * 7 + 3);
    end
  end

  // reader: checks the word popped on this edge and decides the next pop
  always @(posedge clk_r) begin
    if (rst_n) begin
      if (empty) n_empty++;
      if (rd_en && !empty) begin
        checks++;
        if (rdata != WIDTH'(n_rd * 7 + 3)) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d = %0d", n_rd, rdata);
        end
        n_rd <= n_rd + 1;
      end
      rd_want <= ($urandom % 3 != 0);
    end
  end

  // reset falls at t=1, before the first clock edge, and releases later
  initial #1 rst_n = 0;

  initial begin
    #50 rst_n = 1;
    wait (n_rd >= NWORDS / 2);
    half_w = 11; half_r = 2;
    wait (n_rd >= NWORDS);
    #200;
    checks += 3;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    if (n_empty == 0) begin failures++; $display("FAIL never empty"); end
    if (!empty || n_wr != NWORDS) begin failures++; $display("FAIL words left"); end
    $display("full seen %0d, empty seen %0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
