// tb_sync_module_ref: the synchronization module with its reference on
// another input (K = 3, REF = 2). The three decoder models of the K = 3 test
// are connected to the module in reverse order, so the reference stream
// (steady clock, started last) enters on input 2 and the two buffered
// streams, which start LEAD and LEAD3 bytes earlier and drift in opposite
// directions, on inputs 1 and 0. The outputs are put back in source order
// and checked as in that test: every c_o cycle after the first reference
// frame start, all three carry the bytes of the raster position of the
// reference one cycle earlier. clk_o must follow the reference clock.
module tb_sync_module_ref;
  import tb_video_pkg::*;
  localparam raster_t R = SMALL;
  localparam int FIELD = 6 * 32;          // bytes per field of the SMALL raster
  localparam int DEPTH = 150, LEAD = 20, LEAD3 = 35;
  logic [2:0] clk_in = '0;
  logic rst_n = 0;
  logic [2:0] en = '0;
  logic [2:0][7:0] vin, vout;
  logic clk_o;
  logic [2:0] frame_start, wr_active, wr_wrap;
  int line3, x3, frame3, starts3 = 0, wraps3 = 0;
  bit run3;
  realtime half3 = 5.0;
  int line1, x1, frame1, line2, x2, frame2;
  bit run1, run2;
  int checks = 0, failures = 0, starts1 = 0, starts2 = 0, wraps = 0;
  realtime half2 = 5.0;

  bt656_source #(.R(R), .SRC(1)) s1 (.clk(clk_in[0]), .en(en[0]), .dout(vin[0]), .line(line1), .x(x1), .frame(frame1), .running(run1));
  bt656_source #(.R(R), .SRC(2)) s2 (.clk(clk_in[1]), .en(en[1]), .dout(vin[1]), .line(line2), .x(x2), .frame(frame2), .running(run2));

  bt656_source #(.R(R), .SRC(3)) s3 (.clk(clk_in[2]), .en(en[2]), .dout(vin[2]), .line(line3), .x(x3), .frame(frame3), .running(run3));

  logic [2:0] dclk, dfs, dwa, dww;
  logic [2:0][7:0] dvin, dvout;
  assign dclk = {clk_in[0], clk_in[1], clk_in[2]};   // input 2 = source 1
  assign dvin = {vin[0], vin[1], vin[2]};
  assign vout = {dvout[0], dvout[1], dvout[2]};
  assign frame_start = {dfs[0], dfs[1], dfs[2]};
  assign wr_active = {dwa[0], dwa[1], dwa[2]};
  assign wr_wrap = {dww[0], dww[1], dww[2]};

  sync_module #(.K(3), .W(8), .DEPTH(DEPTH), .REF(2)) dut (
    .clk_in(dclk), .rst_n, .vin(dvin), .clk_o, .vout(dvout),
    .frame_start(dfs), .wr_active(dwa), .wr_wrap(dww)
  );

  always #5 clk_in[0] = ~clk_in[0];
  always #(half2) clk_in[1] = ~clk_in[1];
  always #(half3) clk_in[2] = ~clk_in[2];
  always @(posedge clk_in[2]) if (rst_n) begin
    if (frame_start[2]) starts3++;
    if (wr_wrap[2]) wraps3++;
  end

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
    en[2] = 1;
    repeat (LEAD3 - LEAD) @(posedge clk_in[2]);
    en[1] = 1;
    repeat (LEAD) @(posedge clk_in[1]);
    @(negedge clk_in[0]);
    en[0] = 1;
    pr = 0;
    while (frame1 < 12) begin
      @(posedge clk_in[0]);
      #0.1;
      half2 = 5.0 + 0.002 * ((frame1 % 4) - 1.5);   // time-varying rate of video 2
      half3 = 5.0 - 0.002 * ((frame1 % 4) - 1.5);   // and of video 3
      checks++;
      if (clk_o !== 1'b1) failures++;
      if (pr && starts1 > 0) begin
        checks += 2;
        if (vout[0] !== byte_at(R, 1, pl, px)) failures++;
        if (vout[1] !== byte_at(R, 2, pl, px)) begin
          failures++;
          if (failures < 10) $display("line %0d x %0d: v2s=%h exp %h", pl, px, vout[1], byte_at(R, 2, pl, px));
        end
        checks++;
        if (vout[2] !== byte_at(R, 3, pl, px)) begin
          failures++;
          if (failures < 10) $display("line %0d x %0d: v3s=%h exp %h", pl, px, vout[2], byte_at(R, 3, pl, px));
        end
      end
      pl = line1; px = x1; pr = run1;
    end
    checks += 2;
    if (starts1 < 20 || starts2 < 20) failures++;
    if (wraps < 10) failures++;
    checks++;
    if (starts3 < 20 || wraps3 < 10) failures++;
    checks++;
    if (wr_active[0] !== 1'b0) failures++;   // the reference has no buffer
    $display("starts1=%0d starts2=%0d starts3=%0d wraps=%0d/%0d", starts1, starts2, starts3, wraps, wraps3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
