// roi_crop: keeps only the packets of the centre region of interest that the
// network looks at.
//
// The camera cannot deliver frames narrower than 128 pixels, so it runs at
// 128x32 and the network uses the centre 32x32 pixels. Each packet carries
// eight pixels and positional metadata (start/end of frame, start/end of
// line). The block tracks the packet column inside the line and the line
// inside the frame from that metadata and passes a packet when its column
// lies in [ROI_X0, ROI_X0+ROI_W) and its line in [ROI_Y0, ROI_Y0+ROI_H).
// Lines are counted in arrival order: the stripe reorder after this block
// turns arrival order into image order.
//
// Interface. Valid/ready on both sides; a packet outside the ROI is always
// accepted and discarded. m_line is the ROI line index (arrival order) and
// m_last flags the last ROI packet of the frame. geom_error (sticky) is set
// when an end-of-line arrives at a column other than IMG_W/PPP-1, or an
// end-of-frame on a line other than the last.
// Purely combinational data path; only the position counters are registered.
// m_data is s_data unchanged (a crop only selects packets), so its 96 bits
// are wires from the input.
//
// The 128x32 frame, the centre 32x32 crop and the use of per-packet position
// metadata follow the paper; the metadata flag set is this design's choice.
module roi_crop
  import mt_pkg::*;
#(
  parameter int unsigned IMG_W_P  = IMG_W,
  parameter int unsigned IMG_H_P  = IMG_H,
  parameter int unsigned ROI_W_P  = ROI_W,
  parameter int unsigned ROI_H_P  = ROI_H,
  parameter int unsigned ROI_X0   = (IMG_W_P - ROI_W_P) / 2,
  parameter int unsigned ROI_Y0   = (IMG_H_P - ROI_H_P) / 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  pkt_t        s_data,
  input  meta_t       s_meta,
  output logic        m_valid,
  input  logic        m_ready,
  output pkt_t        m_data,
  output logic [$clog2(ROI_H_P)-1:0] m_line,
  output logic        m_last,
  output logic        geom_error
);
  localparam int unsigned PKT_PER_LINE = IMG_W_P / PPP;
  localparam int unsigned X0P = ROI_X0 / PPP;
  localparam int unsigned XNP = ROI_W_P / PPP;

  logic [$clog2(PKT_PER_LINE+1)-1:0] col_q;
  logic [$clog2(IMG_H_P+1)-1:0]      line_q;
  int unsigned col, line;
  logic in_roi;

  always_comb begin
    col    = s_meta.sol ? 0 : int'(col_q);
    line   = s_meta.sof ? 0 : int'(line_q);
    in_roi = (col >= X0P) && (col < X0P + XNP) && (line + 1 > ROI_Y0) && (line < ROI_Y0 + ROI_H_P);
  end

  assign m_valid = s_valid && in_roi;
  assign m_data  = s_data;
  assign m_line  = ($clog2(ROI_H_P))'(line - ROI_Y0);
  assign m_last  = (col == X0P + XNP - 1) && (line == ROI_Y0 + ROI_H_P - 1);
  assign s_ready = in_roi ? m_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q      <= '0;
      line_q     <= '0;
      geom_error <= 1'b0;
    end else if (s_valid && s_ready) begin
      if (s_meta.eol) begin
        col_q  <= '0;
        line_q <= ($clog2(IMG_H_P+1))'(line + 1);
        if (col != PKT_PER_LINE - 1) geom_error <= 1'b1;
        if (s_meta.eof && line != IMG_H_P - 1) geom_error <= 1'b1;
      end else begin
        col_q  <= ($clog2(PKT_PER_LINE+1))'(col + 1);
        line_q <= ($clog2(IMG_H_P+1))'(line);
      end
    end
  end
endmodule
