// tb_mvp_top_full: the end-to-end test of tb_mvp_top at full size.
//
// The top keeps all its default parameters (720 x 480-byte buffer, 50 MHz
// control clock, 100 kHz I2C); the decoder models produce the 525-line
// BT.656 raster (1716 bytes per line, 900900 bytes per frame) at 27 MHz.
// Video 2 leads by LEAD bytes, which must stay under one field (450450
// bytes) minus the buffer size for the alignment to hold; two frames
// (four fields) are run and checked byte by byte.
module tb_mvp_top_full;
  import tb_video_pkg::*;
  import mvp_pkg::*;
  localparam int K = 2, H = 1;
  localparam raster_t R = NTSC;
  localparam int LEAD = 30000, FRAMES = 2;
  localparam int LAT = 7;
  localparam time TIMEOUT = 100ms;
`define MVP_TOP_INST \
  mvp_top dut ( \
    .clk_in, .clk_sys, .rst_n, .vin, .clk_o, .frame_start, .buf_wrap, .proc_in, .proc_out, \
    .vout, .cfg_done, .cfg_error, .scl_o, .sda_o, .sda_i);
`include "tb_mvp_top_body.svh"

  // watchdog
  initial begin
    #(TIMEOUT);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
