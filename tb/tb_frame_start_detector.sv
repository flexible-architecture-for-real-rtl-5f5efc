// tb_frame_start_detector: feeds a BT.656 raster from the decoder model and
// checks that start pulses exactly when the first active byte of the first
// active line of each field is on the bus, and at no other time.
module tb_frame_start_detector;
  import tb_video_pkg::*;
  localparam raster_t R = SMALL;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] din;
  logic start, v_sync, f_id, h_sync;
  int line, x, frame;
  bit running;
  int checks = 0, failures = 0, starts = 0;

  bt656_source #(.R(R), .SRC(1)) src (.clk, .en, .dout(din), .line, .x, .frame, .running);
  frame_start_detector dut (.clk, .rst_n, .din, .start, .v_sync, .f_id, .h_sync);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    en = 1;
    @(posedge clk);
    while (frame < 4) begin
      @(negedge clk);
      begin
        bit exp;
        exp = running && x == sav_end(R) &&
              (line == R.v1_last + 1 || line == R.v2_last + 1);
        checks++;
        if (start !== exp) begin
          failures++;
          if (failures < 10) $display("line %0d x %0d: start=%b exp=%b", line, x, start, exp);
        end
        if (start) starts++;
      end
    end
    checks++;
    if (starts != 8) failures++;   // two fields per frame, four frames
    $display("starts=%0d", starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
