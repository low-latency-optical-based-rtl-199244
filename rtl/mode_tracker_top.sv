// mode_tracker_top: the real-time MHD mode tracker that sits in the frame
// grabber's user-logic slot, between the pixel pre-processing stage and the
// DMA engine, and drives the coil-request serial outputs.
//
// Data path, in stream order:
//   stream_fork      copy of every packet: the original continues to the DMA
//                    / PCIe path untouched, the copy goes to the network
//   roi_crop         keeps the centre 32x32 of the 128x32 frame
//   stripe_reorder   puts the striped line order back into image order
//   cnn_core         CNN -> sine and cosine of the n=1 mode (ap_vld)
//   control_request  five coil requests -> 12-bit codes + 4 DAC control bits
//   rs422_serializer five serial lanes + sclk + cs_n at 10 MHz
//
// Interface. s_* is the pixel stream (8 x 12-bit pixels per packet with
// start/end of frame/line flags); dma_* is its unmodified copy towards the
// DMA engine. pwr writes network weights and biases, coef_wr_* the coil
// coefficients (host control/status path). pred_* exposes the network output.
// inference_on and writeout_on are the two probe outputs used to time the
// system: inference_on is high while a frame is inside the network,
// writeout_on while the serial words are shifted out. Status: nn_skips counts
// frames not admitted to the network because the reorder still held the
// previous one, nn_drops packets lost inside an admitted frame (none by
// construction), nn_overflow is set by either; reorder_stalls
// counts clocks the reorder waited on the network input, geom_error and
// frame_error flag malformed frames, serial_overruns counts dropped requests.
//
// Timing at 250 MHz and default sizes: the network input buffer is filled as
// the reorder drains (at most one packet per clock). When the reorder keeps up
// with the link, pred_vld follows the clock that accepts the last
// region-of-interest packet by 1987 clocks (7.9 us); two clocks later
// control_request starts 400 clocks (1.6 us) of serial writeout. A new frame
// can enter the network every 1480 clocks (5.9 us); a frame whose start
// arrives while the reorder still holds data is skipped for the network
// (nn_skips) but still goes to the DMA.
//
// The DMA copy (dma_valid, dma_data, dma_meta) and s_ready are wired straight
// through from the input and the DMA ready: forwarding the original stream
// untouched is the point of the fork, so these outputs carry no logic.
//
// The block partition and order follow the paper's firmware description.
// Everything the frame grabber itself provides (CoaXPress receiver, DRAM
// buffering, pre-processing, DMA, PCIe, GPIO controller) is outside this
// module and reached through its ports.
module mode_tracker_top
  import mt_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // pixel stream from pre-processing
  input  logic                  s_valid,
  output logic                  s_ready,
  input  pkt_t                  s_data,
  input  meta_t                 s_meta,
  // unmodified stream to DMA / PCIe
  output logic                  dma_valid,
  input  logic                  dma_ready,
  output pkt_t                  dma_data,
  output meta_t                 dma_meta,
  // host configuration
  input  param_wr_t             pwr,
  input  logic                  coef_wr_en,
  input  logic [3:0]            coef_wr_idx,
  input  logic [COEF_W-1:0]     coef_wr_data,
  // network output (ap_vld)
  output logic                  pred_vld,
  output logic [Y_W-1:0]        pred_sin,
  output logic [Y_W-1:0]        pred_cos,
  // coil requests
  output logic                  req_vld,
  output logic [DAC_W-1:0]      req_code [N_REQ],
  // RS422 / GPIO outputs
  output logic [N_REQ-1:0]      rs422_sdo,
  output logic                  rs422_sclk,
  output logic                  rs422_cs_n,
  output logic                  inference_on,
  output logic                  writeout_on,
  // status
  output logic                  nn_overflow,
  output logic [15:0]           nn_skips,
  output logic [15:0]           nn_drops,
  output logic [15:0]           reorder_stalls,
  output logic                  geom_error,
  output logic                  frame_error,
  output logic [7:0]            serial_overruns
);
  // fork -> crop
  logic  nn_valid, nn_ready;
  pkt_t  nn_data;
  meta_t nn_meta;
  // crop -> reorder
  logic  c_valid, c_ready, c_last;
  pkt_t  c_data;
  logic [$clog2(ROI_H)-1:0] c_line;
  // reorder -> cnn
  logic  r_valid, r_ready, r_last;
  pkt_t  r_data;
  logic  reorder_idle;
  // control request -> serializer
  logic [WORD_W-1:0] req_word [N_REQ];

  stream_fork u_fork (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_data, .s_meta,
    .dma_valid, .dma_ready, .dma_data, .dma_meta,
    .nn_valid, .nn_ready, .nn_frame_ok(reorder_idle), .nn_data, .nn_meta,
    .nn_overflow, .nn_skips, .nn_drops);

  roi_crop u_crop (
    .clk, .rst_n,
    .s_valid(nn_valid), .s_ready(nn_ready), .s_data(nn_data), .s_meta(nn_meta),
    .m_valid(c_valid), .m_ready(c_ready), .m_data(c_data), .m_line(c_line),
    .m_last(c_last), .geom_error);

  stripe_reorder u_reorder (
    .clk, .rst_n,
    .s_valid(c_valid), .s_ready(c_ready), .s_data(c_data), .s_line(c_line),
    .m_valid(r_valid), .m_ready(r_ready), .m_data(r_data), .m_last(r_last),
    .stalls(reorder_stalls), .idle(reorder_idle));

  cnn_core u_cnn (
    .clk, .rst_n, .pwr,
    .s_valid(r_valid), .s_ready(r_ready), .s_data(r_data), .s_last(r_last),
    .y_vld(pred_vld), .y_sin(pred_sin), .y_cos(pred_cos),
    .infer_active(inference_on), .frame_error);

  control_request u_req (
    .clk, .rst_n,
    .coef_wr_en, .coef_wr_idx, .coef_wr_data,
    .y_vld(pred_vld), .y_sin(pred_sin), .y_cos(pred_cos),
    .req_vld, .req_code, .req_word);

  rs422_serializer u_ser (
    .clk, .rst_n,
    .start(req_vld), .words(req_word),
    .busy(writeout_on), .sdo(rs422_sdo), .sclk(rs422_sclk), .cs_n(rs422_cs_n),
    .overruns(serial_overruns));

  // c_last is implied by the reorder's own packet count; it is kept on the
  // crop port for stand-alone use and not needed here.
  logic unused_c_last;
  assign unused_c_last = c_last;

endmodule
