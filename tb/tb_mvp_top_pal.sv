// tb_mvp_top_pal: the full-size end-to-end test on 625-line video.
//
// The top keeps all its default parameters (720 x 480-byte buffer, 50 MHz
// control clock, 100 kHz I2C); the decoder models produce the 625-line
// BT.656 raster (1728 bytes per line, 1080000 bytes per frame, 25 frames/s
// at 27 MHz). Nothing in the synchronization depends on the line count: the
// buffer only has to cover the lead, which must stay under one field
// (540000 bytes) minus the buffer size, i.e. under 194400 bytes. Video 2
// leads by LEAD bytes; two frames are run and checked byte by byte, and the
// output frame period must be 1080000 c_o cycles.
module tb_mvp_top_pal;
  import tb_video_pkg::*;
  import mvp_pkg::*;
  localparam int K = 2, H = 1;
  localparam raster_t R = PAL;
  localparam int LEAD = 30000, FRAMES = 2;
  localparam int LAT = 7;
  localparam time TIMEOUT = 120ms;
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
