// stripe_reorder: turns the striped line order of the camera link into the
// natural top-to-bottom image order that the network expects.
//
// The CoaXPress stream does not deliver the lines of a frame top to bottom:
// it delivers them in N_STRIPES stripes of ROI_H/N_STRIPES lines, starting at
// the centre of the sensor and alternating outwards (above centre, below
// centre, next above, next below, ...), each stripe keeping its lines in
// top-to-bottom order. Raw stripe k therefore belongs at image stripe
// N/2-1-k/2 for even k and N/2+(k-1)/2 for odd k. A FIFO cannot be read out
// of order, so every raw stripe is written into its own FIFO (one stripe
// deep) and the FIFOs are emptied one after the other in image order.
//
// Interface. s_* carries ROI packets with their arrival line index; s_ready
// is low only if the target FIFO is full. m_* delivers packets in image order,
// m_last on the last packet of the frame. An image stripe is read as soon as
// its FIFO has data, so draining overlaps the arrival of later stripes.
// stalls counts clocks on which m_valid was high and m_ready low. idle is high
// when every FIFO is empty: a whole region of interest then fits, which is
// what the stream fork checks before it admits a new frame.
// Latency through an empty FIFO is one clock.
//
// The per-stripe FIFOs and natural-order draining follow the paper. The
// stripe count (eight) and the centre-out stripe order are read from the
// paper's reorder figure; the paper's text gives neither.
module stripe_reorder
  import mt_pkg::*;
#(
  parameter int unsigned ROI_W_P = ROI_W,
  parameter int unsigned ROI_H_P = ROI_H,
  parameter int unsigned NS      = N_STRIPES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  pkt_t        s_data,
  input  logic [$clog2(ROI_H_P)-1:0] s_line,
  output logic        m_valid,
  input  logic        m_ready,
  output pkt_t        m_data,
  output logic        m_last,
  output logic [15:0] stalls,
  output logic        idle
);
  localparam int unsigned LPS   = ROI_H_P / NS;          // lines per stripe
  localparam int unsigned DEPTH = LPS * ROI_W_P / PPP;   // packets per stripe

  // raw (arrival) stripe index that holds image stripe p
  function automatic int unsigned raw_of(int unsigned p);
    return (p < NS / 2) ? 2 * (NS / 2 - 1 - p) : 2 * (p - NS / 2) + 1;
  endfunction

  logic [NS-1:0] f_full, f_empty, f_wr, f_rd;
  pkt_t          f_q [NS];

  logic [$clog2(NS)-1:0] wsel, rsel;   // FIFO written / read
  assign wsel = ($clog2(NS))'(int'(s_line) / LPS);

  for (genvar k = 0; k < NS; k++) begin : g_fifo
    sync_fifo #(.W(PKT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(f_wr[k]), .wr_data(s_data), .full(f_full[k]),
      .rd_en(f_rd[k]), .rd_data(f_q[k]), .empty(f_empty[k]), .count());
  end

  logic [$clog2(NS)-1:0]    pos;   // image stripe being drained
  logic [$clog2(DEPTH)-1:0] pcnt;  // packets drained from it
  assign rsel = ($clog2(NS))'(raw_of(int'(pos)));

  always_comb begin
    s_ready = !f_full[wsel];
    f_wr    = '0;
    f_wr[wsel] = s_valid && s_ready;
    m_valid = !f_empty[rsel];
    m_data  = f_q[rsel];
    m_last  = (int'(pos) == NS - 1) && (int'(pcnt) == DEPTH - 1);
    f_rd    = '0;
    f_rd[rsel] = m_valid && m_ready;
  end

  assign idle = &f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos    <= '0;
      pcnt   <= '0;
      stalls <= '0;
    end else begin
      if (m_valid && !m_ready && stalls != '1) stalls <= stalls + 1'b1;
      if (m_valid && m_ready) begin
        if (int'(pcnt) == DEPTH - 1) begin
          pcnt <= '0;
          pos  <= (int'(pos) == NS - 1) ? '0 : pos + 1'b1;
        end else begin
          pcnt <= pcnt + 1'b1;
        end
      end
    end
  end
endmodule
