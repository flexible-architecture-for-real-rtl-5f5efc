// tb_sync_module: two decoder models with different, drifting clocks and a
// start-up delay, through the synchronization module.
//
// Video 2 starts LEAD bytes before video 1 and its clock period wanders
// around video 1's. After the first reference frame start, every c_o cycle
// vout[0] must be video 1's byte of one cycle earlier and vout[1] must be
// the byte video 2 carries at that same raster position. DEPTH is smaller
// than a field so the buffer wraps; LEAD is kept below (field - DEPTH).
module tb_sync_module;
  import tb_video_pkg::*;
  localparam raster_t R = SMALL;
  localparam int FIELD = 6 * 32;          // bytes per field of the SMALL raster
  localparam int DEPTH = 150, LEAD = 20;
  logic [1:0] clk_in = '0;
  logic rst_n = 0;
  logic [1:0] en = '0;
  logic [1:0][7:0] vin, vout;
  logic clk_o;
  logic [1:0] frame_start, wr_active, wr_wrap;
  int line1, x1, frame1, line2, x2, frame2;
  bit run1, run2;
  int checks = 0, failures = 0, starts1 = 0, starts2 = 0, wraps = 0;
  realtime half2 = 5.0;

  bt656_source #(.R(R), .SRC(1)) s1 (.clk(clk_in[0]), .en(en[0]), .dout(vin[0]), .line(line1), .x(x1), .frame(frame1), .running(run1));
  bt656_source #(.R(R), .SRC(2)) s2 (.clk(clk_in[1]), .en(en[1]), .dout(vin[1]), .line(line2), .x(x2), .frame(frame2), .running(run2));

  sync_module #(.K(2), .W(8), .DEPTH(DEPTH)) dut (
    .clk_in, .rst_n, .vin, .clk_o, .vout, .frame_start, .wr_active, .wr_wrap
  );

  always #5 clk_in[0] = ~clk_in[0];
  always #(half2) clk_in[1] = ~clk_in[1];

  always @(posedge clk_in[0]) if (rst_n && frame_start[0]) starts1++;
  always @(posedge clk_in[1]) begin
    if (rst_n && frame_start[1]) starts2++;
    if (rst_n && wr_wrap[1]) wraps++;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pl, px;
    bit pr;
    repeat (2) @(posedge clk_in[0]);
    rst_n = 1;
    en[1] = 1;
    repeat (LEAD) @(posedge clk_in[1]);
    @(negedge clk_in[0]);
    en[0] = 1;
    pr = 0;
    while (frame1 < 12) begin
      @(posedge clk_in[0]);
      #0.1;
      half2 = 5.0 + 0.002 * ((frame1 % 4) - 1.5);   // time-varying rate of video 2
      if (pr && starts1 > 0) begin
        checks += 2;
        if (vout[0] !== byte_at(R, 1, pl, px)) failures++;
        if (vout[1] !== byte_at(R, 2, pl, px)) begin
          failures++;
          if (failures < 10) $display("line %0d x %0d: v2s=%h exp %h", pl, px, vout[1], byte_at(R, 2, pl, px));
        end
      end
      pl = line1; px = x1; pr = run1;
    end
    checks += 2;
    if (starts1 < 20 || starts2 < 20) failures++;
    if (wraps < 10) failures++;
    $display("starts1=%0d starts2=%0d wraps=%0d", starts1, starts2, wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
