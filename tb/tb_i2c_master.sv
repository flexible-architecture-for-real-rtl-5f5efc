// tb_i2c_master: register writes to behavioural I2C targets on three buses.
//
// Each write must arrive at the target on the selected bus with the right
// register and value, the other buses must stay idle, a write to an absent
// address must end with nack, and a transfer must take the expected time:
// 4 quarter periods for START, 3 x 9 bits x 4 quarters, 4 for STOP, i.e.
// 116 quarter periods of DIV clocks (44 when the address is not
// acknowledged), give or take two clocks.
module tb_i2c_master;
  localparam int CLK_HZ = 4_000_000, I2C_HZ = 100_000, NBUS = 3;
  localparam int DIV = CLK_HZ / (4 * I2C_HZ);
  logic clk = 0, rst_n = 0;
  logic req = 0;
  logic [3:0] bus;
  logic [6:0] dev;
  logic [7:0] reg_addr, data;
  logic busy, done, nack;
  logic [NBUS-1:0] scl_o, sda_o, sda_i, drv;
  int writes[NBUS], starts[NBUS];
  logic [7:0] lreg[NBUS], ldat[NBUS];
  int checks = 0, failures = 0;
  localparam logic [6:0] ADDRS [NBUS] = '{7'h5C, 7'h5D, 7'h2A};

  i2c_master #(.CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .NBUS(NBUS)) dut (
    .clk, .rst_n, .req, .bus, .dev, .reg_addr, .data, .busy, .done, .nack, .scl_o, .sda_o, .sda_i
  );

  for (genvar b = 0; b < NBUS; b++) begin : g_s
    assign sda_i[b] = sda_o[b] & drv[b];   // wired-AND open-drain line
    i2c_slave_model #(.ADDR(ADDRS[b])) s (
      .scl(scl_o[b]), .sda(sda_i[b]), .sda_drive(drv[b]), .writes(writes[b]),
      .last_reg(lreg[b]), .last_data(ldat[b]), .starts(starts[b])
    );
  end

  always #5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_write(input int b, input logic [6:0] a, input logic [7:0] r, input logic [7:0] d,
                          input bit exp_nack);
    int cyc = 0;
    int exp_cyc = exp_nack ? 44 * DIV : 116 * DIV;   // a NACKed address ends after one byte
    int w0[NBUS];
    for (int k = 0; k < NBUS; k++) w0[k] = writes[k];
    @(negedge clk);
    bus = 4'(b); dev = a; reg_addr = r; data = d; req = 1;
    @(negedge clk);
    req = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < exp_cyc - 2 || cyc > exp_cyc + 2) begin
      failures++;
      $display("transfer took %0d clocks, expected about %0d", cyc, exp_cyc);
    end
    checks++;
    if (nack !== exp_nack) failures++;
    repeat (DIV) @(negedge clk);
    for (int k = 0; k < NBUS; k++) begin
      int e;
      e = w0[k] + ((k == b && !exp_nack) ? 1 : 0);
      checks++;
      if (writes[k] != e) begin failures++; $display("bus %0d writes %0d exp %0d", k, writes[k], e); end
    end
    if (!exp_nack) begin
      checks++;
      if (lreg[b] !== r || ldat[b] !== d) begin
        failures++;
        $display("bus %0d got reg %h data %h exp %h %h", b, lreg[b], ldat[b], r, d);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (busy || scl_o !== '1 || sda_o !== '1) failures++;
    for (int i = 0; i < 6; i++)
      do_write(i % NBUS, ADDRS[i % NBUS], 8'($urandom), 8'($urandom), 0);
    do_write(1, 7'h33, 8'h12, 8'h34, 1);   // nobody answers 33h
    do_write(2, ADDRS[2], 8'hA5, 8'h5A, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
