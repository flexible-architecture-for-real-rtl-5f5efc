// tb_mvp_top: end-to-end run of the two-input, one-output configuration.
//
// Two decoder models with their own clocks feed the top; video 2 starts
// LEAD bytes earlier and its clock period wanders around video 1's. Three
// I2C target models answer the configuration writes. A processing model
// stands in for the application: it takes the two synchronized raw streams
// and, for active samples, outputs the rounded mean of the two (a trivial
// "fusion"), keeping video 1's timing tags; it registers its output.
// Every output byte must equal the BT.656 byte of video 1's raster at the
// position seven c_o cycles earlier (1 sync + 4 interface + 1 processing +
// 1 formatter), with active samples replaced by the mean of both videos'
// pixels at that position. The run counts each mechanism: frame starts on
// both inputs, start-up delay, clock-rate deviation, buffer wrap, timing
// codes rebuilt, fused pixels and configuration writes; a mechanism never
// seen counts as a failure.
module tb_mvp_top;
  import tb_video_pkg::*;
  import mvp_pkg::*;
  localparam int K = 2, H = 1;
  localparam raster_t R = SMALL;
  localparam int DEPTH = 150, LEAD = 20, FRAMES = 8;
  localparam int CLK_HZ = 4_000_000;
  localparam int LAT = 7;
  localparam time TIMEOUT = 3ms;
`define MVP_TOP_INST \
  mvp_top #(.K(K), .H(H), .DEPTH(DEPTH), .CLK_HZ(CLK_HZ)) dut ( \
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
