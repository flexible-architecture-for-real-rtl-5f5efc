// i2c_master: I2C register-write master of the control module.
//
// Performs one register write on request: START, device address with the
// write bit, register index, data byte, STOP, checking the acknowledge after
// each byte. A missing acknowledge ends the transfer with a STOP and raises
// nack together with done. The controller has NBUS separate buses (one per
// decoder and encoder, as the case-study board wires them); the selected bus
// toggles, the others stay released.
//
// Each bit takes four quarter periods of the I2C clock, paced by a divider
// from CLK_HZ to 4 x I2C_HZ: SCL low while SDA changes, SCL high for two
// quarters (SDA sampled in the second for acknowledges), SCL low again.
// Outputs are open-drain style: 0 pulls the line low, 1 releases it. No clock
// stretching or arbitration is done. That the decoders and encoder are
// programmed over I2C is the paper's; the bus rate, the single-write
// transaction and the NACK handling are this design's choices.
//
// Ports: req/bus/dev/reg_addr/data in (sampled when req and not busy);
// busy, done (one clock), nack; scl_o/sda_o/sda_i per bus.
module i2c_master #(
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned I2C_HZ = 100_000,
  parameter int unsigned NBUS   = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req,
  input  logic [3:0]              bus,
  input  logic [6:0]              dev,
  input  logic [7:0]              reg_addr,
  input  logic [7:0]              data,
  output logic                    busy,
  output logic                    done,
  output logic                    nack,
  output logic [NBUS-1:0]         scl_o,
  output logic [NBUS-1:0]         sda_o,
  input  logic [NBUS-1:0]         sda_i
);
  localparam int unsigned DIV = (CLK_HZ / (4 * I2C_HZ) > 0) ? CLK_HZ / (4 * I2C_HZ) : 1;
  localparam int unsigned CW  = (DIV > 1) ? $clog2(DIV) : 1;

  typedef enum logic [2:0] {S_IDLE, S_START, S_BIT, S_ACK, S_STOP} state_t;

  state_t         state;
  logic [CW-1:0]  div_cnt;
  logic           tick;
  logic [1:0]     q;        // quarter of the current bit
  logic [2:0]     bitn;     // bit being sent, 7 first
  logic [1:0]     byten;    // 0: address, 1: register, 2: data
  logic [7:0]     shreg;
  logic [3:0]     bus_q;
  logic [7:0]     reg_q, data_q;
  logic           scl_r, sda_r;
  logic           sda_sel;  // SDA of the selected bus (released if out of range)

  assign tick = (div_cnt == CW'(DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= (tick || state == S_IDLE) ? '0 : div_cnt + CW'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      q      <= '0;
      bitn   <= '0;
      byten  <= '0;
      shreg  <= '0;
      bus_q  <= '0;
      reg_q  <= '0;
      data_q <= '0;
      scl_r  <= 1'b1;
      sda_r  <= 1'b1;
      busy   <= 1'b0;
      done   <= 1'b0;
      nack   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          scl_r <= 1'b1;
          sda_r <= 1'b1;
          if (req) begin
            state  <= S_START;
            busy   <= 1'b1;
            nack   <= 1'b0;
            q      <= '0;
            bus_q  <= bus;
            shreg  <= {dev, 1'b0};
            reg_q  <= reg_addr;
            data_q <= data;
            byten  <= '0;
            bitn   <= 3'd7;
          end
        end
        S_START: if (tick) begin
          q <= q + 2'd1;
          unique case (q)
            2'd0: begin scl_r <= 1'b1; sda_r <= 1'b1; end
            2'd1: sda_r <= 1'b0;
            2'd2: scl_r <= 1'b0;
            2'd3: state <= S_BIT;
          endcase
        end
        S_BIT: if (tick) begin
          q <= q + 2'd1;
          unique case (q)
            2'd0: begin scl_r <= 1'b0; sda_r <= shreg[7]; end
            2'd1: scl_r <= 1'b1;
            2'd2: ;
            2'd3: begin
              scl_r <= 1'b0;
              shreg <= {shreg[6:0], 1'b0};
              if (bitn == 3'd0) state <= S_ACK;
              else              bitn  <= bitn - 3'd1;
            end
          endcase
        end
        S_ACK: if (tick) begin
          q <= q + 2'd1;
          unique case (q)
            2'd0: begin scl_r <= 1'b0; sda_r <= 1'b1; end
            2'd1: scl_r <= 1'b1;
            2'd2: if (sda_sel) nack <= 1'b1;
            2'd3: begin
              scl_r <= 1'b0;
              bitn  <= 3'd7;
              if (nack || byten == 2'd2) begin
                state <= S_STOP;
              end else begin
                state <= S_BIT;
                byten <= byten + 2'd1;
                shreg <= (byten == 2'd0) ? reg_q : data_q;
              end
            end
          endcase
        end
        S_STOP: if (tick) begin
          q <= q + 2'd1;
          unique case (q)
            2'd0: begin scl_r <= 1'b0; sda_r <= 1'b0; end
            2'd1: scl_r <= 1'b1;
            2'd2: sda_r <= 1'b1;
            2'd3: begin state <= S_IDLE; busy <= 1'b0; done <= 1'b1; end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    scl_o   = '1;
    sda_o   = '1;
    sda_sel = 1'b1;
    for (int b = 0; b < NBUS; b++) begin
      if (b == int'(bus_q)) begin
        scl_o[b] = scl_r;
        sda_o[b] = sda_r;
        sda_sel  = sda_i[b];
      end
    end
  end

  // I2C bus rule: SDA changes while SCL is high only to make a START or a
  // STOP condition.
  a_sda_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (scl_r && $past(scl_r) && sda_r != $past(sda_r)) |-> $past(state) inside {S_START, S_STOP})
    else $error("i2c_master: SDA changed while SCL high");
  // Handshake: a transfer ends (busy falls) only together with done.
  a_busy_done: assert property (@(posedge clk) disable iff (!rst_n) $fell(busy) |-> done)
    else $error("i2c_master: busy fell without done");
endmodule
