// mvp_top: FPGA-side logic of the flexible multi-video processing architecture.
//
// K video decoders deliver BT.656 streams, each with its own sample clock,
// start-up delay and drifting rate. The synchronization module re-times
// the other videos onto the reference video's clock c_o (video 1, input
// REF = 0, by default) through circular frame buffers that
// restart at each video's frame start, so that all K streams present the
// same spatial position in the same c_o cycle. One interface module per
// stream decodes BT.656 into tagged raw YCbCr slots (raw_video_t), which
// leave the top for the video processing module (the application, e.g.
// visible/near-infrared fusion, which is not part of this RTL). The H
// processed streams come back, one output formatter each rebuilds BT.656
// for an encoder, and c_o is passed to the encoders as their clock. The
// control module configures decoders and encoders over I2C after reset.
// Its table is built here from K and H: one example write per device,
// decoder i on bus i (addresses 5Ch and 5Dh alternating) and encoder j on
// bus K+j (address 2Ah); with K = 2, H = 1 this is control_module's own
// default table. The register values are placeholders, as the paper gives
// none.
//
// The partition into decoding, synchronization, processing (interface,
// processing, output formatter) and encoding, and the control module, follow
// the paper; K = 2, H = 1, 8-bit streams and the 720 x 480-byte buffer are
// its case study. The raw_video_t bus and its timing are this design's.
//
// Status: frame_start[i] and buf_wrap[i] (write pointer of buffer i-1
// wrapped) are pulses in clk_in[i]'s domain.
// Clocks: clk_in[i] for the write side of buffer i-1 and detector i;
// clk_o = clk_in[REF] for everything downstream; clk_sys for the control
// module. Latency from vin[REF] to proc_in: 1 (sync) + 4 (interface) c_o
// cycles; from proc_out to vout: 1 cycle.
module mvp_top
  import mvp_pkg::*;
#(
  parameter int unsigned K      = 2,
  parameter int unsigned H      = 1,
  parameter int unsigned DEPTH  = 720 * 480,
  parameter int unsigned REF    = 0,
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned I2C_HZ = 100_000,
  parameter int unsigned NBUS   = K + H
) (
  input  logic [K-1:0]        clk_in,
  input  logic                clk_sys,
  input  logic                rst_n,
  input  logic [K-1:0][7:0]   vin,
  output logic                clk_o,
  output logic [K-1:0]        frame_start,
  output logic [K-1:0]        buf_wrap,
  output raw_video_t [K-1:0]  proc_in,
  input  raw_video_t [H-1:0]  proc_out,
  output logic [H-1:0][7:0]   vout,
  output logic                cfg_done,
  output logic                cfg_error,
  output logic [NBUS-1:0]     scl_o,
  output logic [NBUS-1:0]     sda_o,
  input  logic [NBUS-1:0]     sda_i
);
  logic [K-1:0][7:0] vsync;

  sync_module #(.K(K), .W(8), .DEPTH(DEPTH), .REF(REF)) u_sync (
    .clk_in, .rst_n, .vin, .clk_o, .vout(vsync), .frame_start,
    .wr_active(), .wr_wrap(buf_wrap)
  );

  for (genvar i = 0; i < K; i++) begin : g_if
    bt656_interface u_if (
      .clk(clk_o), .rst_n, .din(vsync[i]), .vout(proc_in[i])
    );
  end

  for (genvar j = 0; j < H; j++) begin : g_fmt
    output_formatter u_fmt (
      .clk(clk_o), .rst_n, .vin(proc_out[j]), .dout(vout[j])
    );
  end

  typedef cfg_entry_t [NBUS-1:0] cfg_table_t;

  function automatic cfg_table_t default_cfg();
    cfg_table_t t;
    for (int unsigned b = 0; b < NBUS; b++) begin
      t[b].bus      = 4'(b);
      t[b].dev      = (b >= K) ? 7'h2A : (b % 2 == 0) ? 7'h5C : 7'h5D;
      t[b].reg_addr = 8'h00;
      t[b].data     = 8'h00;
    end
    return t;
  endfunction

  localparam cfg_table_t CFG = default_cfg();

  control_module #(
    .CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .NBUS(NBUS), .N_CFG(NBUS), .CFG(CFG)
  ) u_ctrl (
    .clk(clk_sys), .rst_n, .cfg_done, .cfg_error, .scl_o, .sda_o, .sda_i
  );
endmodule
