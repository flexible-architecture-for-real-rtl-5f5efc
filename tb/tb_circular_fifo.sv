// tb_circular_fifo: dual-clock test of the circular frame buffer.
//
// The writer side receives "frames" of FR bytes whose value is a function of
// the offset from the frame start; en_w pulses at each frame start. The
// reader clock runs slightly slower with a drifting period and its frames
// start LEAD cycles later (en_r). DEPTH is smaller than a frame, so the
// write pointer wraps inside each frame. Every byte read (one read clock
// after its address) must be the byte written at the same offset of the
// writer's frame. Also checks that nothing is read before the first en_r
// (rd_active low) and counts the wraps.
module tb_circular_fifo;
  localparam int DEPTH = 64, FR = 100, LEAD = 20;
  logic clk_w = 0, clk_r = 0, rst_n = 0;
  logic en_w = 0, en_r = 0;
  logic [7:0] din = 0, dout;
  logic wr_active, rd_active, wr_wrap;
  int checks = 0, failures = 0, wraps = 0, reads = 0;
  realtime half_r = 5.0;

  circular_fifo #(.W(8), .DEPTH(DEPTH)) dut (
    .clk_w, .clk_r, .rst_n, .en_w, .din, .en_r, .dout, .wr_active, .rd_active, .wr_wrap
  );

  function automatic logic [7:0] val(int off);
    return 8'((off * 37 + 11) & 8'hFF);
  endfunction

  always #5 clk_w = ~clk_w;
  always #(half_r) clk_r = ~clk_r;

  initial begin
    #400us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer: frames of FR bytes, en_w with the first byte of each frame
  int woff = 0;
  initial begin
    repeat (3) @(posedge clk_w);
    rst_n = 1;
    forever begin
      @(negedge clk_w);
      en_w = (woff == 0);
      din  = val(woff);
      woff = (woff == FR - 1) ? 0 : woff + 1;
    end
  end
  always @(posedge clk_w) if (rst_n && wr_wrap) wraps++;

  // reader: frames of FR cycles starting LEAD writer cycles later
  int roff = -1;
  initial begin
    wait (rst_n);
    repeat (LEAD + 2) @(posedge clk_r);
    // no read has been started yet
    checks++;
    if (rd_active) failures++;
    for (int n = 0; n < 30 * FR; n++) begin
      @(negedge clk_r);
      half_r = 5.0 + 0.01 * ((n / 500) % 3);   // slowly varying read clock
      roff   = (roff + 1) % FR;
      en_r   = (roff == 0);
      @(posedge clk_r);
      #0.1;
      checks++;
      reads++;
      if (dout !== val(roff)) begin
        failures++;
        if (failures < 10) $display("offset %0d: got %h exp %h", roff, dout, val(roff));
      end
    end
    checks++;
    if (wraps < 20) failures++;
    $display("reads=%0d wraps=%0d", reads, wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
