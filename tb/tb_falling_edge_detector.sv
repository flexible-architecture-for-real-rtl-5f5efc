// tb_falling_edge_detector: random level, checks a pulse exactly on 1->0.
module tb_falling_edge_detector;
  logic clk = 0, rst_n = 0, level = 0, fall;
  int checks = 0, failures = 0, falls = 0;
  bit prev = 0;

  falling_edge_detector dut (.clk, .rst_n, .level, .fall);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      level = ($urandom_range(0, 2) != 0);
      #1;
      checks++;
      if (fall !== (prev && !level)) failures++;
      if (prev && !level) falls++;
      @(posedge clk);
      prev = level;
    end
    checks++;
    if (falls < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
