// output_formatter: output formatter of the video processor (YCbCr to BT.656).
//
// Turns the tagged raw video slots coming back from the processing module
// into a BT.656 byte stream for a video encoder. At the four slots of each
// timing reference it writes FF 00 00 and an XY status byte built from the
// slot's F/V/H levels with the BT.656 protection bits. Active samples are
// passed on, clipped to 01h..FEh so that they cannot imitate a timing
// reference. All other slots are blanking and get the blanking levels 80h
// (chroma) and 10h (luma). The paper states the function only; code values
// are BT.656's, and overwriting any ancillary data in the blanking is this
// design's choice.
//
// Ports: clk (c_o), rst_n, vin (raw_video_t) in; dout out, registered, one
// clock after vin. The Cb/Cr tag of vin is not needed here and is unused.
module output_formatter
  import mvp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  raw_video_t vin,
  output logic [7:0] dout
);
  logic [1:0] trs_idx;  // position of vin inside a timing reference
  logic [7:0] byte_n;

  always_comb begin
    if (vin.trs) begin
      unique case (trs_idx)
        2'd0:    byte_n = TRS_PRE0;
        2'd3:    byte_n = xy_code(vin.f, vin.v, vin.h);
        default: byte_n = TRS_PRE1;
      endcase
    end else if (vin.active) begin
      if (vin.sample == 8'h00)      byte_n = 8'h01;
      else if (vin.sample == 8'hFF) byte_n = 8'hFE;
      else                          byte_n = vin.sample;
    end else begin
      byte_n = vin.luma ? BLANK_Y : BLANK_C;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trs_idx <= '0;
      dout    <= BLANK_C;
    end else begin
      trs_idx <= vin.trs ? trs_idx + 2'd1 : 2'd0;
      dout    <= byte_n;
    end
  end
endmodule
