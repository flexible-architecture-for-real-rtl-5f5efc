// circular_fifo: dual-clock circular frame buffer of the synchronization module.
//
// One byte of the buffered video is written per write-clock cycle and one
// byte is read per read-clock cycle. A pulse on en_w (the frame start of the
// buffered video, from its frame start detector) restarts writing at
// location 0, so the first pixel of each frame lands at the first location
// and the following pixels at the following ones; a pulse on en_r (the frame
// start of the reference video) restarts reading at location 0 in the
// reference clock domain. Both pointers wrap modulo DEPTH. The reader
// therefore always returns the byte the buffered video carried at the same
// offset from its own frame start as the reference stream now has, as long
// as that byte has not been overwritten: this holds for any phase when
// DEPTH is at least one field of samples, and otherwise while the buffered
// video leads the reference by less than (field length - DEPTH) samples.
// Before the first en_w nothing is written, before the first en_r nothing
// is read. This restart-and-wrap scheme is the paper's; the one-clock
// registered read and the blanket storage of every byte (timing codes
// included, so the output is again a BT.656 stream) are this design's.
//
// Ports: clk_w/en_w/din (write side), clk_r/en_r/dout (read side, dout one
// clk_r cycle after the address is issued), status wr_active/rd_active and
// a one-clock wr_wrap pulse when the write pointer wraps.
// Default DEPTH = 720 x 480 bytes, the buffer size given for the case study.
module circular_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 720 * 480
) (
  input  logic         clk_w,
  input  logic         clk_r,
  input  logic         rst_n,
  input  logic         en_w,
  input  logic [W-1:0] din,
  input  logic         en_r,
  output logic [W-1:0] dout,
  output logic         wr_active,
  output logic         rd_active,
  output logic         wr_wrap
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  typedef logic [AW-1:0] addr_t;

  logic [W-1:0] mem [DEPTH];
  addr_t        wptr, rptr, waddr, raddr;
  logic         we, re;

  // ---------------- write side (buffered video clock) ----------------
  always_comb begin
    we    = en_w || wr_active;
    waddr = en_w ? addr_t'(0) : wptr;
  end

  always_ff @(posedge clk_w or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      wr_active <= 1'b0;
      wr_wrap   <= 1'b0;
    end else begin
      wr_wrap <= 1'b0;
      if (we) begin
        wr_active <= 1'b1;
        if (waddr == addr_t'(DEPTH - 1)) begin
          wptr    <= '0;
          wr_wrap <= 1'b1;
        end else begin
          wptr <= waddr + addr_t'(1);
        end
      end
    end
  end

  always_ff @(posedge clk_w) begin
    if (we) mem[waddr] <= din;
  end

  // ---------------- read side (reference clock c_o) ----------------
  always_comb begin
    re    = en_r || rd_active;
    raddr = en_r ? addr_t'(0) : rptr;
  end

  always_ff @(posedge clk_r or negedge rst_n) begin
    if (!rst_n) begin
      rptr      <= '0;
      rd_active <= 1'b0;
    end else if (re) begin
      rd_active <= 1'b1;
      rptr      <= (raddr == addr_t'(DEPTH - 1)) ? addr_t'(0) : raddr + addr_t'(1);
    end
  end

  always_ff @(posedge clk_r) begin
    if (re) dout <= mem[raddr];
  end

  // Both pointers stay inside the buffer.
  a_wptr_range: assert property (@(posedge clk_w) disable iff (!rst_n) 32'(wptr) < DEPTH)
    else $error("circular_fifo: write pointer %0d out of range", wptr);
  a_rptr_range: assert property (@(posedge clk_r) disable iff (!rst_n) 32'(rptr) < DEPTH)
    else $error("circular_fifo: read pointer %0d out of range", rptr);
endmodule
