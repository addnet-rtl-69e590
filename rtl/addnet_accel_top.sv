// addnet_accel_top: single-layer (loopback) AddNet CNN accelerator.
//
// One network layer of N_PE processing elements whose multipliers are
// reconfigurable constant coefficient multipliers (2-Add by default). A host
// runs a whole network by sending one layer at a time: the weight indices of
// the layer, then its input in window order, and reading the layer's output
// back before sending the next layer. With 2048 PEs every output channel of
// the largest layer is computed in one pass.
//
// Data path:
//   input DMA  (256-bit beats) -> 256->24 bit width reduction -> input buffer
//              (24-bit FIFO) -> 24->8 bit split into features -> layer
//   weight DMA (256-bit beats) -> 256->b bit width reduction -> weight index
//              buffer (b-bit FIFO) -> layer
//   layer output (8-bit activations) -> output buffer (FIFO) -> packing into
//              256-bit beats (a partial beat is zero-filled and flushed with
//              the layer's last output) -> output DMA
// Performance counters are read through a register port. The PCIe core
// and its DMA engines are outside this design: their AXI4-stream channels
// (tvalid/tready/tdata/tlast) and the layer configuration are ports.
//
// Interface timing: every stream moves a word when valid && ready. Pulse
// cfg_start for one cycle with the cfg_* values valid to start a layer; the
// weight stream must then carry cfg_neurons * cfg_groups * P indices, the
// input stream cfg_pixels * cfg_groups * P features (three per 24-bit word,
// ten 24-bit words per 256-bit beat); the output stream returns
// cfg_pixels * cfg_neurons bytes, 32 per beat, tlast on the final beat.
// Byte k of a beat lies in bits 8k+7..8k. busy is high from cfg_start until
// the last output byte has left the layer.
//
// cfg_start also empties the input and weight paths, so words left over
// from a previous layer's last, partly used DMA beat are dropped; the DMA
// streams of a layer must therefore start after its cfg_start.
//
// Buffer depths, the register map and the byte packing are this design's
// choices; the width reduction to 24-bit input and b-bit weight buffers, the
// PE count and the 256-bit DMA width follow the reference system.
module addnet_accel_top
  import addnet_pkg::*;
#(
  parameter int unsigned N_PE       = 2048,
  parameter int unsigned P          = 1,
  parameter int unsigned ARCH       = 2,
  parameter int unsigned WBUF_DEPTH = 4096,
  parameter bit          PIPELINE   = 1'b0,
  parameter int unsigned DMA_W      = 256,
  parameter int unsigned IN_BUF_W   = 24,
  parameter int unsigned BUF_DEPTH  = 512,
  localparam int unsigned SW        = sel_w(ARCH),
  localparam int unsigned AW        = $clog2(WBUF_DEPTH),
  localparam int unsigned NW        = $clog2(N_PE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // input feature DMA stream
  input  logic              s_axis_in_tvalid,
  output logic              s_axis_in_tready,
  input  logic [DMA_W-1:0]  s_axis_in_tdata,
  // weight index DMA stream
  input  logic              s_axis_wt_tvalid,
  output logic              s_axis_wt_tready,
  input  logic [DMA_W-1:0]  s_axis_wt_tdata,
  // output DMA stream
  output logic              m_axis_out_tvalid,
  input  logic              m_axis_out_tready,
  output logic [DMA_W-1:0]  m_axis_out_tdata,
  output logic              m_axis_out_tlast,
  // layer configuration
  input  logic              cfg_start,
  input  logic [AW:0]       cfg_groups,
  input  logic [NW-1:0]     cfg_neurons,
  input  logic [23:0]       cfg_pixels,
  input  logic [7:0]        cfg_scale,
  input  logic [5:0]        cfg_shift,
  // register bank slave port
  input  logic              reg_rd_en,
  input  logic [2:0]        reg_addr,
  output logic [31:0]       reg_rd_data,
  output logic              busy
);

  localparam int unsigned FEAT_W = 8;
  localparam int unsigned OUT_N  = DMA_W / FEAT_W;

  // input path
  logic                 in_w_valid, in_w_ready;
  logic [IN_BUF_W-1:0]  in_w_data;
  logic                 inbuf_valid, inbuf_ready;
  logic [IN_BUF_W-1:0]  inbuf_data;
  logic                 feat_valid, feat_ready;
  logic [FEAT_W-1:0]    feat_data;
  logic [$clog2(BUF_DEPTH):0] inbuf_level, wtbuf_level, outbuf_level;

  stream_downsizer #(.IN_W(DMA_W), .OUT_W(IN_BUF_W)) u_in_width (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start),
    .in_valid(s_axis_in_tvalid), .in_ready(s_axis_in_tready), .in_data(s_axis_in_tdata),
    .out_valid(in_w_valid), .out_ready(in_w_ready), .out_data(in_w_data));

  stream_fifo #(.W(IN_BUF_W), .DEPTH(BUF_DEPTH)) u_input_buffer (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start),
    .in_valid(in_w_valid), .in_ready(in_w_ready), .in_data(in_w_data),
    .out_valid(inbuf_valid), .out_ready(inbuf_ready), .out_data(inbuf_data),
    .level(inbuf_level));

  stream_downsizer #(.IN_W(IN_BUF_W), .OUT_W(FEAT_W)) u_feat_split (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start),
    .in_valid(inbuf_valid), .in_ready(inbuf_ready), .in_data(inbuf_data),
    .out_valid(feat_valid), .out_ready(feat_ready), .out_data(feat_data));

  // weight path
  logic          wt_w_valid, wt_w_ready;
  logic [SW-1:0] wt_w_data;
  logic          wtbuf_valid, wtbuf_ready;
  logic [SW-1:0] wtbuf_data;

  stream_downsizer #(.IN_W(DMA_W), .OUT_W(SW)) u_wt_width (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start),
    .in_valid(s_axis_wt_tvalid), .in_ready(s_axis_wt_tready), .in_data(s_axis_wt_tdata),
    .out_valid(wt_w_valid), .out_ready(wt_w_ready), .out_data(wt_w_data));

  stream_fifo #(.W(SW), .DEPTH(BUF_DEPTH)) u_weight_index_buffer (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start),
    .in_valid(wt_w_valid), .in_ready(wt_w_ready), .in_data(wt_w_data),
    .out_valid(wtbuf_valid), .out_ready(wtbuf_ready), .out_data(wtbuf_data),
    .level(wtbuf_level));

  // network layer
  logic              lay_valid, lay_ready, lay_last;
  logic [FEAT_W-1:0] lay_data;
  logic              ev_stall, ev_pixel;

  network_layer #(
    .N_PE(N_PE), .P(P), .ARCH(ARCH), .W_IN(FEAT_W + 1), .FEAT_W(FEAT_W),
    .ACC_W(32), .WBUF_DEPTH(WBUF_DEPTH), .PIPELINE(PIPELINE)
  ) u_layer (
    .clk(clk), .rst_n(rst_n),
    .cfg_start(cfg_start), .cfg_groups(cfg_groups), .cfg_neurons(cfg_neurons),
    .cfg_pixels(cfg_pixels), .cfg_scale(cfg_scale), .cfg_shift(cfg_shift),
    .wt_valid(wtbuf_valid), .wt_ready(wtbuf_ready), .wt_data(wtbuf_data),
    .feat_valid(feat_valid), .feat_ready(feat_ready), .feat_data(feat_data),
    .out_valid(lay_valid), .out_ready(lay_ready), .out_data(lay_data), .out_last(lay_last),
    .busy(busy), .ev_stall(ev_stall), .ev_pixel(ev_pixel));

  // output path
  logic              ob_valid, ob_ready;
  logic [FEAT_W:0]   ob_data;
  logic [OUT_N-1:0][FEAT_W-1:0] pack_data;

  stream_fifo #(.W(FEAT_W + 1), .DEPTH(BUF_DEPTH)) u_output_buffer (
    .clk(clk), .rst_n(rst_n), .clear(1'b0),
    .in_valid(lay_valid), .in_ready(lay_ready), .in_data({lay_last, lay_data}),
    .out_valid(ob_valid), .out_ready(ob_ready), .out_data(ob_data),
    .level(outbuf_level));

  stream_upsizer #(.W(FEAT_W), .N(OUT_N)) u_out_pack (
    .clk(clk), .rst_n(rst_n), .clear(1'b0),
    .in_valid(ob_valid), .in_ready(ob_ready), .in_data(ob_data[FEAT_W-1:0]), .in_last(ob_data[FEAT_W]),
    .out_valid(m_axis_out_tvalid), .out_ready(m_axis_out_tready), .out_data(pack_data),
    .out_last(m_axis_out_tlast));

  assign m_axis_out_tdata = pack_data;

  // performance counters
  register_bank u_regs (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start), .busy(busy),
    .ev_in_beat(s_axis_in_tvalid && s_axis_in_tready),
    .ev_wt_beat(s_axis_wt_tvalid && s_axis_wt_tready),
    .ev_out_beat(m_axis_out_tvalid && m_axis_out_tready),
    .ev_stall(ev_stall), .ev_pixel(ev_pixel),
    .rd_en(reg_rd_en), .rd_addr(reg_addr), .rd_data(reg_rd_data));

endmodule
