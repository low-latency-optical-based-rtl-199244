// cnn_conv_pool: one feature-extractor stage of the mode-tracking CNN, a
// 3x3 "valid" convolution followed by ReLU and 2x2 max pooling.
//
// How it works. The stage reads its input feature map from the previous
// stage's buffer through TP combinational read ports (channels-last, flat
// index ((y*W_IN)+x)*CIN+c) and writes its own pooled output buffer, a
// memory of HP*WP words of COUT values (one word per pooled pixel). Output pixels are produced one pooling window at a
// time: for each of the four conv positions of the window the K*K*CIN x COUT
// multiply-accumulates are spread over RF clocks (the reuse factor), TP terms
// by CP channels per clock, so the stage holds TP*CP multipliers. The four
// conv results are max-reduced, ReLU is applied (ReLU and max commute), the
// value is shifted right by SHIFT and saturated to OUT_W unsigned bits.
// Conv rows/columns that the pooling discards (odd conv sizes) are not
// computed.
//
// Interface. start (one-clock pulse, ignored while busy) launches one pass;
// done pulses for one clock when the output buffer holds the result, which
// then stays until the next pass. in_addr/in_data are the TP read ports into
// the previous buffer (data expected in the same clock); rd_addr/rd_data are
// NRD combinational read ports into this stage's output buffer (flat index
// ((py*WP)+px)*COUT+c), used by the next layer. Weights and biases live in register memories written
// through pwr when pwr.layer == LAYER_ID: weight address k selects row k/M,
// lane k%M (M = TP*CP); lane = tt*CP+cc holds the weight of term
// tblk*TP+tt for channel cblk*CP+cc, where row = tblk*(COUT/CP)+cblk.
//
// Timing. start to done is HP*WP*4*RF + 2 clocks (one clock accepts start,
// one registers done).
//
// The layer shape, the 3x3 kernel (it reproduces the paper's parameter
// counts), 7-bit weights and the reuse factors follow the paper; the
// fixed-point activation formats, the shift requantisation and the
// run-time-writable parameter memories are choices of this design.
module cnn_conv_pool
  import mt_pkg::*;
#(
  parameter int unsigned LAYER_ID = 0,
  parameter int unsigned H_IN  = 32,
  parameter int unsigned W_IN  = 32,
  parameter int unsigned CIN   = 1,
  parameter int unsigned COUT  = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned RF    = 1,
  parameter int unsigned IN_W  = 12,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned SHIFT = 10,
  parameter int unsigned NRD   = 1,
  localparam int unsigned TP   = calc_tp(K * K * CIN, COUT, RF),
  localparam int unsigned NI   = H_IN * W_IN * CIN,
  localparam int unsigned NO   = ((H_IN - K + 1) / 2) * ((W_IN - K + 1) / 2) * COUT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  param_wr_t           pwr,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [$clog2(NI)-1:0] in_addr [TP],
  input  logic [IN_W-1:0]       in_data [TP],
  input  logic [$clog2(NO)-1:0] rd_addr [NRD],
  output logic [OUT_W-1:0]      rd_data [NRD]
);
  localparam int unsigned HP   = (H_IN - K + 1) / 2;
  localparam int unsigned WP   = (W_IN - K + 1) / 2;
  localparam int unsigned NIN  = K * K * CIN;
  localparam int unsigned CP   = calc_cp(NIN, COUT, RF);
  localparam int unsigned M    = TP * CP;
  localparam int unsigned NTB  = NIN / TP;
  localparam int unsigned NCB  = COUT / CP;
  localparam int unsigned NROW = NTB * NCB;

  // ---- parameter memories ---------------------------------------------------
  logic [M-1:0][W_W-1:0] wmem [NROW];   // one packed row per block
  logic [COUT-1:0][B_W-1:0] bmem;   // biases, a register row

  always_ff @(posedge clk) begin
    if (pwr.en && pwr.layer == 3'(LAYER_ID)) begin
      if (pwr.bias) begin
        if (int'(pwr.addr) < COUT) bmem[int'(pwr.addr)] <= pwr.data[B_W-1:0];
      end else if (int'(pwr.addr) < NROW * M) begin
        wmem[int'(pwr.addr) / M][int'(pwr.addr) % M] <= pwr.data[W_W-1:0];
      end
    end
  end

  // ---- schedule counters --------------------------------------------------
  logic [$clog2(HP+1)-1:0]   py;
  logic [$clog2(WP+1)-1:0]   px;
  logic [1:0]                q;     // position inside the pooling window
  logic [clog2_min1(NTB)-1:0] tblk;
  logic [clog2_min1(NCB)-1:0] cblk;

  logic last_blk, last_q, last_px, last_py;
  assign last_blk = (int'(tblk) == NTB - 1) && (int'(cblk) == NCB - 1);
  assign last_q   = (q == 2'd3);
  assign last_px  = (int'(px) == WP - 1);
  assign last_py  = (int'(py) == HP - 1);

  // ---- datapath -------------------------------------------------------------
  logic [IN_W-1:0]         xt   [TP];
  logic signed [ACC_W-1:0] part [CP];
  logic signed [ACC_W-1:0] acc  [COUT];
  logic signed [ACC_W-1:0] mx   [COUT];
  logic signed [ACC_W-1:0] val  [COUT];
  logic signed [ACC_W-1:0] best [COUT];

  // input offset of term t = (ky*K+kx)*CIN+ci relative to the window corner:
  // a table of constants
  logic [$clog2(NI)-1:0] toff [NIN];
  for (genvar g = 0; g < NIN; g++) begin : g_off
    assign toff[g] = ($clog2(NI))'((((g / CIN) / K) * W_IN + (g / CIN) % K) * CIN + g % CIN);
  end

  // window corner of the current conv position, and the current weight row
  logic [$clog2(NI)-1:0]  base;
  logic [M-1:0][W_W-1:0]  wrow;
  assign base = ($clog2(NI))'(((2 * int'(py) + int'(q[1])) * W_IN + 2 * int'(px) + int'(q[0])) * CIN);
  assign wrow = wmem[int'(tblk) * NCB + int'(cblk)];

  always_comb begin
    for (int unsigned tt = 0; tt < TP; tt++) begin
      in_addr[tt] = base + toff[int'(tblk) * TP + tt];
      xt[tt]      = in_data[tt];
    end
    for (int unsigned cc = 0; cc < CP; cc++) begin
      part[cc] = '0;
      for (int unsigned tt = 0; tt < TP; tt++) begin
        part[cc] += ACC_W'($signed({1'b0, xt[tt]}) * $signed(wrow[tt * CP + cc]));
      end
    end
    // full conv value of every channel, valid in the last block of a position
    for (int unsigned co = 0; co < COUT; co++) begin
      val[co] = acc[co] + ACC_W'($signed(bmem[co]));
      if (co / CP == int'(cblk)) val[co] += part[co % CP];
      best[co] = (q == 2'd0 || val[co] > mx[co]) ? val[co] : mx[co];
    end
  end

  function automatic logic [OUT_W-1:0] requant(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    if (v <= 0) return '0;
    s = v >>> SHIFT;
    if (s > ACC_W'((1 << OUT_W) - 1)) return '1;
    return s[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      py   <= '0;
      px   <= '0;
      q    <= '0;
      tblk <= '0;
      cblk <= '0;
      for (int unsigned co = 0; co < COUT; co++) begin
        acc[co] <= '0;
        mx[co]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          py <= '0; px <= '0; q <= '0; tblk <= '0; cblk <= '0;
          for (int unsigned co = 0; co < COUT; co++) acc[co] <= '0;
        end
      end else begin
        // accumulate this block
        for (int unsigned cc = 0; cc < CP; cc++)
          acc[int'(cblk) * CP + cc] <= acc[int'(cblk) * CP + cc] + part[cc];
        // advance the block counters
        if (int'(cblk) == NCB - 1) begin
          cblk <= '0;
          if (int'(tblk) == NTB - 1) tblk <= '0;
          else tblk <= tblk + 1'b1;
        end else begin
          cblk <= cblk + 1'b1;
        end
        if (last_blk) begin
          for (int unsigned co = 0; co < COUT; co++) begin
            acc[co] <= '0;
            mx[co]  <= best[co];
          end
          q <= q + 2'd1;
          if (last_q) begin
            if (last_px) begin
              px <= '0;
              if (last_py) begin
                py   <= '0;
                busy <= 1'b0;
                done <= 1'b1;
              end else begin
                py <= py + 1'b1;
              end
            end else begin
              px <= px + 1'b1;
            end
          end
        end
      end
    end
  end

  // ---- output buffer ----------------------------------------------------------
  logic [COUT-1:0][OUT_W-1:0] obuf [HP*WP];
  logic [COUT-1:0][OUT_W-1:0] oword;

  always_comb
    for (int unsigned co = 0; co < COUT; co++) oword[co] = requant(best[co]);

  always_ff @(posedge clk) begin
    if (busy && last_blk && last_q) obuf[int'(py) * WP + int'(px)] <= oword;
  end

  always_comb
    for (int unsigned j = 0; j < NRD; j++)
      rd_data[j] = obuf[int'(rd_addr[j]) / COUT][int'(rd_addr[j]) % COUT];

  initial begin
    assert (NTB * NCB == RF)
      else $error("cnn_conv_pool: reuse factor %0d cannot partition %0dx%0d MACs", RF, NIN, COUT);
  end

endmodule
