// tb_sync_extractor: drives random XY strobes and checks that V and F follow
// the last SAV (H = 0) code only and H follows every code, one clock later.
module tb_sync_extractor;
  logic clk = 0, rst_n = 0;
  logic xy_valid;
  logic [7:0] xy;
  logic v_sync, f_id, h_sync;
  int checks = 0, failures = 0;
  bit ev = 1, ef = 0, eh = 1;

  sync_extractor dut (.clk, .rst_n, .xy_valid, .xy, .v_sync, .f_id, .h_sync);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xy_valid = 0; xy = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (v_sync !== 1'b1) failures++;  // resets to blanking
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      xy_valid = ($urandom_range(0, 3) == 0);
      xy = {1'b1, 7'($urandom)};
      @(posedge clk);
      if (xy_valid) begin
        eh = xy[4];
        if (!xy[4]) begin ev = xy[5]; ef = xy[6]; end
      end
      #1;
      checks++;
      if (v_sync !== ev || f_id !== ef || h_sync !== eh) begin
        failures++;
        if (failures < 10) $display("cycle %0d: v=%b/%b f=%b/%b h=%b/%b", i, v_sync, ev, f_id, ef, h_sync, eh);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
