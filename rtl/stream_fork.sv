// stream_fork: duplicates the frame grabber's pixel stream so that the image
// keeps flowing to the DMA / PCIe path while a copy feeds the network.
//
// The DMA branch is the master: the input is accepted whenever the DMA branch
// is ready, so acquisition is never held up by inference. The network branch
// gets whole frames or nothing. At the first packet of a frame (meta.sof) the
// frame is admitted to the network if nn_frame_ok is high (the reorder
// buffers are empty and can hold a whole region of interest); otherwise the
// entire frame is skipped for the network, nn_skips counts it and
// nn_overflow is set (sticky). Inside an admitted frame a packet that the
// network branch refuses is still lost to it and counted in nn_drops; with
// the admission rule this does not happen. Outputs are combinational copies
// of the input (no added latency); only the admission state is registered.
//
// Because of this, dma_* and nn_data/nn_meta are wires from the input, not
// logic: a fork only copies the stream.
//
// Duplicating the stream follows the paper; giving the DMA branch priority
// and the whole-frame admission rule are choices of this design.
module stream_fork
  import mt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from pixel pre-processing
  input  logic        s_valid,
  output logic        s_ready,
  input  pkt_t        s_data,
  input  meta_t       s_meta,
  // to DMA / PCIe
  output logic        dma_valid,
  input  logic        dma_ready,
  output pkt_t        dma_data,
  output meta_t       dma_meta,
  // to the network input path
  output logic        nn_valid,
  input  logic        nn_ready,
  input  logic        nn_frame_ok,
  output pkt_t        nn_data,
  output meta_t       nn_meta,
  // status
  output logic        nn_overflow,
  output logic [15:0] nn_skips,
  output logic [15:0] nn_drops
);
  logic frame_on_q, frame_on;

  assign frame_on  = s_meta.sof ? nn_frame_ok : frame_on_q;
  assign s_ready   = dma_ready;
  assign dma_valid = s_valid;
  assign dma_data  = s_data;
  assign dma_meta  = s_meta;
  assign nn_valid  = s_valid && dma_ready && frame_on;
  assign nn_data   = s_data;
  assign nn_meta   = s_meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_on_q  <= 1'b0;
      nn_overflow <= 1'b0;
      nn_skips    <= '0;
      nn_drops    <= '0;
    end else if (s_valid && dma_ready) begin
      frame_on_q <= frame_on;
      if (s_meta.sof && !nn_frame_ok) begin
        nn_overflow <= 1'b1;
        if (nn_skips != '1) nn_skips <= nn_skips + 1'b1;
      end
      if (frame_on && !nn_ready) begin
        nn_overflow <= 1'b1;
        if (nn_drops != '1) nn_drops <= nn_drops + 1'b1;
      end
    end
  end
endmodule
