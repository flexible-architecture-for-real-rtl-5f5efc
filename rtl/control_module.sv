// control_module: configures the video decoders and encoders after reset.
//
// Walks a table of register writes, one cfg_entry_t {bus, device address,
// register, value} per entry, and hands each to i2c_master, waiting for its
// done before the next. A NACK on any entry sets cfg_error; the sequence
// still runs to the end. cfg_done rises when the last entry has finished and
// stays high. The paper has the control module program each decoder and
// encoder over a serial bus but gives no register contents: the default
// table is one example write per device (two TVP5150 decoders at 7-bit
// addresses 5Ch and 5Dh, register 00h input select; one ADV7171 encoder at
// 2Ah, register 00h mode 0), to be replaced through the CFG parameter with
// the values a given board needs.
//
// Ports: clk (system clock), rst_n; cfg_done, cfg_error, and the I2C lines
// scl_o/sda_o/sda_i of the NBUS buses.
module control_module
  import mvp_pkg::*;
#(
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned I2C_HZ = 100_000,
  parameter int unsigned NBUS   = 3,
  parameter int unsigned N_CFG  = 3,
  parameter cfg_entry_t [N_CFG-1:0] CFG = {
    cfg_entry_t'{bus: 4'd2, dev: 7'h2A, reg_addr: 8'h00, data: 8'h00},
    cfg_entry_t'{bus: 4'd1, dev: 7'h5D, reg_addr: 8'h00, data: 8'h00},
    cfg_entry_t'{bus: 4'd0, dev: 7'h5C, reg_addr: 8'h00, data: 8'h00}
  }
) (
  input  logic            clk,
  input  logic            rst_n,
  output logic            cfg_done,
  output logic            cfg_error,
  output logic [NBUS-1:0] scl_o,
  output logic [NBUS-1:0] sda_o,
  input  logic [NBUS-1:0] sda_i
);
  localparam int unsigned IW = $clog2(N_CFG + 1);

  typedef enum logic [1:0] {C_ISSUE, C_WAIT, C_DONE} cstate_t;

  cstate_t       state;
  logic [IW-1:0] idx;
  logic          req, busy, done, nack;
  cfg_entry_t    cur;

  assign cur = CFG[idx];
  assign req = (state == C_ISSUE) && !busy;

  i2c_master #(.CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .NBUS(NBUS)) u_i2c (
    .clk, .rst_n, .req, .bus(cur.bus), .dev(cur.dev), .reg_addr(cur.reg_addr),
    .data(cur.data), .busy, .done, .nack, .scl_o, .sda_o, .sda_i
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= (N_CFG == 0) ? C_DONE : C_ISSUE;
      idx       <= '0;
      cfg_done  <= (N_CFG == 0);
      cfg_error <= 1'b0;
    end else begin
      unique case (state)
        C_ISSUE: if (req) state <= C_WAIT;
        C_WAIT: if (done) begin
          if (nack) cfg_error <= 1'b1;
          if (idx == IW'(N_CFG - 1)) begin
            state    <= C_DONE;
            cfg_done <= 1'b1;
          end else begin
            idx   <= idx + IW'(1);
            state <= C_ISSUE;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
