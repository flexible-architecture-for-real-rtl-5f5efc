// bt656_source: behavioural model of a video decoder's digital output.
//
// Stands in for an analog-to-BT.656 decoder in the testbenches. From the
// first clock edge with en high it puts out the raster R of source SRC, one
// byte per clock of its own sample clock, starting at the EAV of line 1,
// and repeats frames forever. The clock is driven by the testbench, which
// is how start-up delay (late en) and rate deviation (clock period) are
// modelled. The current line, byte position and frame count are outputs so
// a checker can predict any downstream byte. Before en the output is 80h.
module bt656_source
  import tb_video_pkg::*;
#(
  parameter raster_t R   = SMALL,
  parameter int      SRC = 1
) (
  input  logic       clk,
  input  logic       en,
  output logic [7:0] dout,
  output int         line,
  output int         x,
  output int         frame,
  output bit         running
);
  initial begin
    running = 0;
    line    = 1;
    x       = 0;
    frame   = 0;
    dout    = 8'h80;
  end

  always @(posedge clk) begin
    if (en || running) begin
      if (!running) begin
        running <= 1;
        line    <= 1;
        x       <= 0;
        dout    <= byte_at(R, SRC, 1, 0);
      end else begin
        int nl, nx;
        nl = line;
        nx = x + 1;
        if (nx == line_len(R)) begin
          nx = 0;
          nl = line + 1;
          if (nl > R.lines) begin
            nl = 1;
            frame <= frame + 1;
          end
        end
        line <= nl;
        x    <= nx;
        dout <= byte_at(R, SRC, nl, nx);
      end
    end
  end
endmodule
