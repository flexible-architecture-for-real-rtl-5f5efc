// tb_trs_detector: checks the SAV/EAV byte detector on a random byte stream
// with timing references inserted. A software history of the last three
// bytes predicts xy_valid for every cycle; xy must equal the current byte.
module tb_trs_detector;
  logic clk = 0, rst_n = 0;
  logic [7:0] din, xy;
  logic xy_valid;
  int checks = 0, failures = 0, hits = 0;
  logic [7:0] h1 = 0, h2 = 0, h3 = 0;

  trs_detector dut (.clk, .rst_n, .din, .xy_valid, .xy);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 8'h80;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int r;
      @(negedge clk);
      r = $urandom_range(0, 9);
      // bias towards the preamble so that partial and full matches occur
      if (r < 3)      din = 8'hFF;
      else if (r < 6) din = 8'h00;
      else            din = 8'($urandom);
      #1;
      begin
        bit exp;
        exp = (h3 == 8'hFF) && (h2 == 8'h00) && (h1 == 8'h00) && (i >= 3);
        checks++;
        if (xy_valid !== exp || xy !== din) begin
          failures++;
          if (failures < 10) $display("mismatch at %0d: valid=%b exp=%b din=%h h=%h %h %h", i, xy_valid, exp, din, h3, h2, h1);
        end
        if (exp) hits++;
      end
      @(posedge clk);
      h3 = h2; h2 = h1; h1 = din;
    end
    checks++;
    if (hits < 10) failures++;
    $display("timing references seen: %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
