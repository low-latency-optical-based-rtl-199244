// cnn_dense: one fully connected layer of the mode-tracking CNN.
//
// How it works. The NIN x NOUT multiply-accumulates are spread over RF
// clocks (the reuse factor): each clock one block of TP inputs by CP outputs
// is multiplied and added into the NOUT accumulators, so the layer holds
// TP*CP multipliers. After the last block the bias is added and the result
// is either passed through ReLU, shifted right by SHIFT and saturated to
// OUT_W unsigned bits (hidden layers, OUT_SIGNED=0), or shifted and saturated
// to OUT_W signed bits with no activation (output layer, OUT_SIGNED=1).
//
// Interface. start (pulse, ignored while busy) launches one pass; in_addr /
// in_data are the TP read ports into the previous layer's buffer (data
// expected in the same clock). done pulses for one clock when the output
// buffer holds the result; rd_addr/rd_data are NRD combinational read ports
// into it for the next layer. Parameter memories
// are written through pwr when pwr.layer == LAYER_ID; weight address k is
// row k/M, lane k%M with the same block layout as cnn_conv_pool (term index =
// input index, Keras flatten order).
//
// Timing. start to done is RF + 2 clocks (one clock accepts start, one
// registers done).
//
// in_addr[t] = block*TP + t, so with an even TP the lowest address bit of
// each port is a constant (0 for even lanes, 1 for odd ones); the read
// port keeps full addresses so that it matches the buffer it reads.
//
// Layer widths, 7-bit weights and reuse factors follow the paper; activation
// formats and requantisation are choices of this design.
module cnn_dense
  import mt_pkg::*;
#(
  parameter int unsigned LAYER_ID   = 3,
  parameter int unsigned NIN        = 96,
  parameter int unsigned NOUT       = 42,
  parameter int unsigned RF         = 48,
  parameter int unsigned IN_W       = 8,
  parameter int unsigned OUT_W      = 8,
  parameter int unsigned SHIFT      = 7,
  parameter bit          OUT_SIGNED = 1'b0,
  parameter int unsigned NRD        = 1,
  localparam int unsigned TP        = calc_tp(NIN, NOUT, RF)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  param_wr_t        pwr,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [clog2_min1(NIN)-1:0]  in_addr [TP],
  input  logic [IN_W-1:0]             in_data [TP],
  input  logic [clog2_min1(NOUT)-1:0] rd_addr [NRD],
  output logic [OUT_W-1:0]            rd_data [NRD]
);
  localparam int unsigned CP   = calc_cp(NIN, NOUT, RF);
  localparam int unsigned M    = TP * CP;
  localparam int unsigned NTB  = NIN / TP;
  localparam int unsigned NCB  = NOUT / CP;
  localparam int unsigned NROW = NTB * NCB;

  logic [M-1:0][W_W-1:0] wmem [NROW];   // one packed row per block
  logic [M-1:0][W_W-1:0] wrow;
  logic [NOUT-1:0][B_W-1:0] bmem;   // biases, a register row

  always_ff @(posedge clk) begin
    if (pwr.en && pwr.layer == 3'(LAYER_ID)) begin
      if (pwr.bias) begin
        if (int'(pwr.addr) < NOUT) bmem[int'(pwr.addr)] <= pwr.data[B_W-1:0];
      end else if (int'(pwr.addr) < NROW * M) begin
        wmem[int'(pwr.addr) / M][int'(pwr.addr) % M] <= pwr.data[W_W-1:0];
      end
    end
  end

  logic [clog2_min1(NTB)-1:0] tblk;
  logic [clog2_min1(NCB)-1:0] cblk;
  logic last_blk;
  assign last_blk = (int'(tblk) == NTB - 1) && (int'(cblk) == NCB - 1);

  logic signed [ACC_W-1:0] part [CP];
  logic signed [ACC_W-1:0] acc  [NOUT];
  logic signed [ACC_W-1:0] val  [NOUT];

  assign wrow = wmem[int'(tblk) * NCB + int'(cblk)];

  always_comb begin
    for (int unsigned tt = 0; tt < TP; tt++)
      in_addr[tt] = (clog2_min1(NIN))'(int'(tblk) * TP + tt);
    for (int unsigned cc = 0; cc < CP; cc++) begin
      part[cc] = '0;
      for (int unsigned tt = 0; tt < TP; tt++) begin
        part[cc] += ACC_W'($signed({1'b0, in_data[tt]}) *
                    $signed(wrow[tt * CP + cc]));
      end
    end
    for (int unsigned co = 0; co < NOUT; co++) begin
      val[co] = acc[co] + ACC_W'($signed(bmem[co]));
      if (co / CP == int'(cblk)) val[co] += part[co % CP];
    end
  end

  function automatic logic [OUT_W-1:0] requant(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> SHIFT;
    if (OUT_SIGNED) begin
      if (s > ACC_W'((1 << (OUT_W - 1)) - 1)) return {1'b0, {(OUT_W-1){1'b1}}};
      if (s < -ACC_W'(1 << (OUT_W - 1)))      return {1'b1, {(OUT_W-1){1'b0}}};
      return s[OUT_W-1:0];
    end else begin
      if (v <= 0) return '0;
      if (s > ACC_W'((1 << OUT_W) - 1)) return '1;
      return s[OUT_W-1:0];
    end
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      tblk <= '0;
      cblk <= '0;
      for (int unsigned co = 0; co < NOUT; co++) acc[co] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          tblk <= '0;
          cblk <= '0;
          for (int unsigned co = 0; co < NOUT; co++) acc[co] <= '0;
        end
      end else begin
        for (int unsigned cc = 0; cc < CP; cc++)
          acc[int'(cblk) * CP + cc] <= acc[int'(cblk) * CP + cc] + part[cc];
        if (int'(cblk) == NCB - 1) begin
          cblk <= '0;
          tblk <= tblk + 1'b1;
        end else begin
          cblk <= cblk + 1'b1;
        end
        if (last_blk) begin
          tblk <= '0;
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---- output buffer ----------------------------------------------------------
  logic [NOUT-1:0][OUT_W-1:0] obuf;   // a register row

  always_ff @(posedge clk) begin
    if (busy && last_blk)
      for (int unsigned co = 0; co < NOUT; co++) obuf[co] <= requant(val[co]);
  end

  always_comb
    for (int unsigned j = 0; j < NRD; j++) rd_data[j] = obuf[rd_addr[j]];

  initial begin
    assert (NTB * NCB == RF)
      else $error("cnn_dense: reuse factor %0d cannot partition %0dx%0d MACs", RF, NIN, NOUT);
  end

endmodule
