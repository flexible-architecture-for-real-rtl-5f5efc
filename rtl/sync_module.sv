// sync_module: synchronization module of the multi-video architecture.
//
// K decoded videos arrive, each with its own sample clock c_i, its own
// start-up delay and a slowly varying rate. One video, input REF (video 1,
// REF = 0, by default, as in the paper), is the reference: its clock becomes
// the common output clock c_o. Each video has a frame start detector in its
// own clock domain, and each of the other K-1 videos is stored in a
// circular_fifo written with its own clock from its own frame start and read
// with c_o from the reference frame start, so all K outputs present the
// bytes of the same spatial position in the same c_o cycle (possibly from a
// different temporal frame, which the architecture accepts).
//
// The reference video passes through one c_o register so that it lines up
// with the FIFOs' one-cycle read latency (the paper draws it as a straight
// wire; the register is this design's choice). Everything else follows the
// paper's block diagram: K detectors, K-1 FIFOs, en_w from each buffered
// video's detector and en_r from the reference detector.
//
// The paper takes video 1 as the reference "without loss of generality";
// the REF parameter lets any input be the one whose clock is kept.
//
// Ports: clk_in[K], vin[K] in; clk_o (= clk_in[REF]), vout[K] in the c_o
// domain, one c_o cycle behind vin[REF]; frame_start[K] and FIFO status for
// observation (each in the clock domain of its video; wr_active[REF] and
// wr_wrap[REF] are 0).
module sync_module #(
  parameter int unsigned K     = 2,
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 720 * 480,
  parameter int unsigned REF   = 0
) (
  input  logic [K-1:0]        clk_in,
  input  logic                rst_n,
  input  logic [K-1:0][W-1:0] vin,
  output logic                clk_o,
  output logic [K-1:0][W-1:0] vout,
  output logic [K-1:0]        frame_start,
  output logic [K-1:0]        wr_active,
  output logic [K-1:0]        wr_wrap
);
  assign clk_o = clk_in[REF];

  for (genvar i = 0; i < K; i++) begin : g_fsd
    frame_start_detector #(.W(W)) u_fsd (
      .clk(clk_in[i]), .rst_n, .din(vin[i]), .start(frame_start[i]),
      .v_sync(), .f_id(), .h_sync()
    );
  end

  for (genvar i = 0; i < K; i++) begin : g_path
    if (i == REF) begin : g_ref
      // Reference path: one register to match the FIFO read latency.
      always_ff @(posedge clk_o or negedge rst_n) begin
        if (!rst_n) vout[i] <= '0;
        else        vout[i] <= vin[i];
      end
      assign wr_active[i] = 1'b0;
      assign wr_wrap[i]   = 1'b0;
    end else begin : g_fifo
      circular_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
        .clk_w(clk_in[i]), .clk_r(clk_o), .rst_n,
        .en_w(frame_start[i]), .din(vin[i]),
        .en_r(frame_start[REF]), .dout(vout[i]),
        .wr_active(wr_active[i]), .rd_active(), .wr_wrap(wr_wrap[i])
      );
    end
  end
endmodule
