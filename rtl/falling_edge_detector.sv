// falling_edge_detector: turns a 1-to-0 transition of a level into a pulse.
//
// The previous value of the level is registered; fall is high for the one
// clock in which the registered value is 1 and the present value 0. In the
// frame start detector the level is V_sync, and its fall marks the first
// active line of a frame (paper). The previous value resets to 0, so no
// pulse follows reset (this design's choice).
//
// Ports: level in, fall out. Latency: fall is combinational from the level.
module falling_edge_detector (
  input  logic clk,
  input  logic rst_n,
  input  logic level,
  output logic fall
);
  logic prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prev <= 1'b0;
    else        prev <= level;
  end

  assign fall = prev && !level;
endmodule
