// i2c_slave_model: behavioural I2C target that records register writes.
//
// Watches one open-drain bus (scl, sda as seen on the wire) and answers the
// 7-bit address ADDR. After a START it shifts in bytes on rising SCL edges
// and pulls SDA low during the acknowledge slot of every byte while it is
// addressed with the write bit; any other address is left unacknowledged.
// For each complete address/register/data write followed by STOP it counts
// one write and keeps the last register and value. Used to stand in for the
// decoders and encoder on the configuration buses.
module i2c_slave_model #(
  parameter logic [6:0] ADDR = 7'h5C
) (
  input  logic       scl,
  input  logic       sda,
  output logic       sda_drive,   // 0 pulls the bus low
  output int         writes,
  output logic [7:0] last_reg,
  output logic [7:0] last_data,
  output int         starts
);
  logic [7:0] sh;
  int         nbit, nbyte;
  bit         selected, in_ack, active;
  logic [7:0] rx [3];

  initial begin
    sda_drive = 1; writes = 0; starts = 0; active = 0; in_ack = 0;
    selected = 0; nbit = 0; nbyte = 0; last_reg = 0; last_data = 0; sh = 0;
  end

  // START and STOP: SDA changing while SCL is high.
  always @(negedge sda) if (scl) begin
    active = 1; nbit = 0; nbyte = 0; selected = 0; in_ack = 0; starts++;
  end
  always @(posedge sda) if (scl && active) begin
    if (selected && nbyte == 3) begin
      writes++;
      last_reg  = rx[1];
      last_data = rx[2];
    end
    active = 0;
  end

  always @(posedge scl) if (active && !in_ack) begin
    sh = {sh[6:0], sda};
    nbit++;
  end

  always @(negedge scl) if (active) begin
    if (in_ack) begin
      in_ack    = 0;
      sda_drive = 1;
    end else if (nbit == 8) begin
      nbit = 0;
      if (nbyte < 3) rx[nbyte] = sh;
      if (nbyte == 0) selected = (sh == {ADDR, 1'b0});
      nbyte++;
      in_ack = 1;
      if (selected) sda_drive = 0;
    end
  end
endmodule
