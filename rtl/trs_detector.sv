// trs_detector: SAV/EAV byte detector of the frame start detector.
//
// Watches a BT.656 byte stream for the timing-reference preamble FF 00 00 and
// flags the fourth byte, the XY status byte of an SAV or EAV code. The three
// previous bytes are held in registers and the match on the current byte is
// combinational, so xy_valid is high in the same cycle the XY byte is on din
// and xy simply mirrors din. The block and its place in the frame start
// detector follow the paper; the preamble value is the BT.656 standard's.
//
// Ports: clk/rst_n (decoder sample clock, async active-low reset), din (byte
// stream), xy_valid/xy (status byte strobe). Latency: 0 cycles.
module trs_detector #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic         xy_valid,
  output logic [W-1:0] xy
);
  logic [W-1:0] d1, d2, d3;  // d1 = previous byte, d3 = three bytes ago

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
      d3 <= '0;
    end else begin
      d1 <= din;
      d2 <= d1;
      d3 <= d2;
    end
  end

  always_comb begin
    xy_valid = (d3 == {W{1'b1}}) && (d2 == '0) && (d1 == '0);
    xy       = din;
  end
endmodule
