// input_buffer: register buffer between the loading clock and the
// computing clock.
//
// The loader writes whole entries (groups of reorganised rows) under
// clk_w (clk_inbuff); the processing side reads them under clk_r
// (clk_compute). The two clocks are unrelated, so the buffer is a
// dual-clock FIFO: binary read and write pointers one bit wider than the
// address, exchanged between the domains in Gray code through two-flop
// synchronisers. The read side sees the oldest entry on rdata whenever
// empty is low (show-ahead) and pops it with rd_en. The write side also
// reports wr_count, its conservative view of the fill level (it may lag
// the reader by the synchroniser delay, never the writer), which lets a
// producer keep several writes in flight without overflowing.
//
// Following the source: a register buffer that decouples RAM loading under
// clk_inbuff from computing under an asynchronous clk_compute, so that the
// computation is not held to the loading clock. Own choices: FIFO order,
// the Gray-code pointer crossing, DEPTH, and the show-ahead read. The same
// module, with another width, carries hidden-layer results back from the
// computing domain to the loader.
//
// Timing: a write becomes visible to the reader two to three clk_r edges
// later; a read frees space for the writer two to three clk_w edges later.
//
// Lint note: the assertions below disable themselves while the reset is
// low, which a linter reports as a reset used both asynchronously and
// synchronously; the flip-flops themselves use it only asynchronously.
module input_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4,  // power of two, at least 2
  localparam int unsigned AW = $clog2(DEPTH)
) (
  // write side, clk_inbuff domain
  input  logic             clk_w,
  input  logic             rst_wn,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  output logic [AW:0]      wr_count,
  // read side, clk_compute domain
  input  logic             clk_r,
  input  logic             rst_rn,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wptr, rptr;              // binary pointers
  logic [AW:0] wgray, rgray;            // Gray copies, registered
  logic [AW:0] rgray_w1, rgray_w2;      // read pointer into write domain
  logic [AW:0] wgray_r1, wgray_r2;      // write pointer into read domain
  logic [AW:0] rptr_w, wptr_r;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  always_ff @(posedge clk_w or negedge rst_wn) begin
    if (!rst_wn) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge clk_w) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wdata;
  end

  assign rptr_w   = gray2bin(rgray_w2);
  assign wr_count = wptr - rptr_w;
  assign full     = (wr_count == (AW+1)'(DEPTH));

  // ---------------- read domain ----------------
  always_ff @(posedge clk_r or negedge rst_rn) begin
    if (!rst_rn) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

  assign wptr_r = gray2bin(wgray_r2);
  assign empty  = (wptr_r == rptr);
  assign rdata  = mem[rptr[AW-1:0]];

  // Handshake rules: the user never writes a full or reads an empty buffer.
  a_no_overflow: assert property (@(posedge clk_w) disable iff (!rst_wn)
                                  !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk_r) disable iff (!rst_rn)
                                   !(rd_en && empty));

endmodule
