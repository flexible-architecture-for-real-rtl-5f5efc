// tb_control_module: the configuration sequencer with a four-entry table
// over three buses, one entry addressed to a device that does not answer.
// Each target must receive exactly its entries with the right values in
// order, cfg_done must rise after the last entry, and cfg_error must be set
// by the unanswered one. A second instance with the default table must
// write one entry per bus and finish without error.
module tb_control_module;
  import mvp_pkg::*;
  localparam int CLK_HZ = 4_000_000, I2C_HZ = 100_000, NBUS = 3;
  localparam cfg_entry_t [3:0] TBL = {
    cfg_entry_t'{bus: 4'd2, dev: 7'h2A, reg_addr: 8'h07, data: 8'h5A},
    cfg_entry_t'{bus: 4'd0, dev: 7'h11, reg_addr: 8'h01, data: 8'h02},   // absent device
    cfg_entry_t'{bus: 4'd1, dev: 7'h5D, reg_addr: 8'h03, data: 8'h0D},
    cfg_entry_t'{bus: 4'd0, dev: 7'h5C, reg_addr: 8'h0F, data: 8'hC3}
  };
  localparam logic [6:0] ADDRS [NBUS] = '{7'h5C, 7'h5D, 7'h2A};
  logic clk = 0, rst_n = 0;
  logic [1:0] cfg_done, cfg_error;
  logic [1:0][NBUS-1:0] scl_o, sda_o, sda_i, drv;
  int writes[2][NBUS], starts[2][NBUS];
  logic [7:0] lreg[2][NBUS], ldat[2][NBUS];
  int checks = 0, failures = 0;

  control_module #(.CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .NBUS(NBUS), .N_CFG(4), .CFG(TBL)) dut (
    .clk, .rst_n, .cfg_done(cfg_done[0]), .cfg_error(cfg_error[0]),
    .scl_o(scl_o[0]), .sda_o(sda_o[0]), .sda_i(sda_i[0])
  );
  control_module #(.CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .NBUS(NBUS)) dut_def (
    .clk, .rst_n, .cfg_done(cfg_done[1]), .cfg_error(cfg_error[1]),
    .scl_o(scl_o[1]), .sda_o(sda_o[1]), .sda_i(sda_i[1])
  );

  for (genvar u = 0; u < 2; u++) begin : g_u
    for (genvar b = 0; b < NBUS; b++) begin : g_s
      assign sda_i[u][b] = sda_o[u][b] & drv[u][b];
      i2c_slave_model #(.ADDR(ADDRS[b])) s (
        .scl(scl_o[u][b]), .sda(sda_i[u][b]), .sda_drive(drv[u][b]), .writes(writes[u][b]),
        .last_reg(lreg[u][b]), .last_data(ldat[u][b]), .starts(starts[u][b])
      );
    end
  end

  always #5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first entry on bus 0 must arrive before the absent-device attempt
  bit first_ok = 0;
  always @(writes[0][0]) if (writes[0][0] == 1 && lreg[0][0] == 8'h0F && ldat[0][0] == 8'hC3) first_ok = 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    checks++;
    if (cfg_done !== 2'b00) failures++;
    wait (cfg_done == 2'b11);
    repeat (20) @(posedge clk);
    checks += 8;
    if (cfg_error[0] !== 1'b1) failures++;
    if (cfg_error[1] !== 1'b0) failures++;
    if (!first_ok) failures++;
    if (writes[0][0] != 1 || starts[0][0] != 2) failures++;
    if (writes[0][1] != 1 || lreg[0][1] !== 8'h03 || ldat[0][1] !== 8'h0D) failures++;
    if (writes[0][2] != 1 || lreg[0][2] !== 8'h07 || ldat[0][2] !== 8'h5A) failures++;
    if (writes[1][0] != 1 || writes[1][1] != 1 || writes[1][2] != 1) failures++;
    if (lreg[1][2] !== 8'h00 || ldat[1][2] !== 8'h00) failures++;
    $display("writes %0d %0d %0d / %0d %0d %0d", writes[0][0], writes[0][1], writes[0][2],
             writes[1][0], writes[1][1], writes[1][2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
