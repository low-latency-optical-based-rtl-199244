// cnn_core: the mode-tracking convolutional network. It takes one 32x32
// 12-bit image and predicts the sine and cosine components of the n=1 MHD
// mode.
//
// How it works. Packets of eight pixels (natural order, top-left first) fill
// an input frame buffer (one word per packet). Six layer engines follow, each
// owning its output buffer and reading its input through combinational read
// ports into the previous buffer:
//   conv0 3x3x1->16,  ReLU, pool  32x32 -> 15x15   reuse factor 1
//   conv1 3x3x16->16, ReLU, pool  15x15 -> 6x6     reuse factor 4
//   conv2 3x3x16->24, ReLU, pool  6x6   -> 2x2     reuse factor 16
//   dense0 96->42 ReLU                              reuse factor 48
//   dense1 42->64 ReLU                              reuse factor 64
//   dense2 64->2  (sine, cosine)                    reuse factor 128
// Every buffer has a full flag. A layer starts when its input buffer is full
// and its output buffer is empty; when it finishes it marks its output full
// and releases its input. Layers therefore run as a dataflow pipeline: a new
// frame can enter conv0 while later layers still work on the previous one,
// and the initiation interval is set by the slowest layer (conv0).
//
// Interface. s_valid/s_ready/s_data/s_last load the input frame (s_ready is
// low while the input buffer still holds a frame conv0 has not finished);
// s_last marks the 128th packet and is checked against the packet count.
// The result leaves on an ap_vld style port: y_vld pulses one clock with
// y_sin, y_cos (11-bit signed). infer_active is high while at least one
// frame is inside the network (from conv0 start through the y_vld clock).
// Parameters are loaded through pwr (see cnn_conv_pool / cnn_dense for the
// memory layout).
//
// Timing. With the default reuse factors a frame takes 900+576+256+48+64+128
// compute clocks plus 2 clocks of hand-off per layer and 3 at the ends:
// y_vld rises 1985 clocks (7.9 us at 250 MHz) after the clock that accepts
// the last input packet. Every buffer is single and is released only when its
// consumer finishes, so conv0 can start a new frame only after conv1 has
// finished the previous one: back-to-back frames enter conv0 every
// 902 + 578 = 1480 clocks (5.9 us at 250 MHz).
//
// The layer list, widths and reuse factors follow the paper. The buffer /
// flag dataflow, the fixed-point formats and the shift values are choices of
// this design.
module cnn_core
  import mt_pkg::*;
#(
  parameter int unsigned SHIFT0 = 10,
  parameter int unsigned SHIFT1 = 8,
  parameter int unsigned SHIFT2 = 8,
  parameter int unsigned SHIFT3 = 7,
  parameter int unsigned SHIFT4 = 7,
  parameter int unsigned SHIFT5 = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  param_wr_t       pwr,
  // input image stream
  input  logic            s_valid,
  output logic            s_ready,
  input  pkt_t            s_data,
  input  logic            s_last,
  // prediction, ap_vld style
  output logic            y_vld,
  output logic [Y_W-1:0]  y_sin,
  output logic [Y_W-1:0]  y_cos,
  output logic            infer_active,
  output logic            frame_error   // s_last seen at a wrong packet count (sticky)
);
  localparam int unsigned NPKT = ROI_W * ROI_H / PPP;

  // ---- input frame buffer: one 96-bit word per packet --------------------------
  pkt_t ibuf [NPKT];
  logic [$clog2(NPKT)-1:0] wr_pkt;
  logic ibuf_full;

  assign s_ready = !ibuf_full;

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) ibuf[wr_pkt] <= s_data;
  end

  // ---- layers, each owning its output buffer -----------------------------------
  // read ports: a<i> are the addresses layer i drives into its input buffer,
  // d<i> the data returned
  logic [9:0]  a0 [9];   logic [PIX_W-1:0] d0 [9];
  logic [11:0] a1 [36];  logic [ACT_W-1:0] d1 [36];
  logic [9:0]  a2 [9];   logic [ACT_W-1:0] d2 [9];
  logic [6:0]  a3 [2];   logic [ACT_W-1:0] d3 [2];
  logic [5:0]  a4 [42];  logic [ACT_W-1:0] d4 [42];
  logic [5:0]  a5 [1];   logic [ACT_W-1:0] d5 [1];
  logic [0:0]  ay [2];   logic [Y_W-1:0]   dy [2];

  always_comb
    for (int unsigned t = 0; t < 9; t++)
      d0[t] = ibuf[int'(a0[t]) / PPP][(int'(a0[t]) % PPP) * PIX_W +: PIX_W];

  assign ay[0] = 1'b0;
  assign ay[1] = 1'b1;

  logic [5:0] start, busy, done;
  logic [4:0] full;   // output buffers of layers 0..4

  cnn_conv_pool #(.LAYER_ID(0), .H_IN(32), .W_IN(32), .CIN(1),  .COUT(16), .RF(1),
                  .IN_W(PIX_W), .OUT_W(ACT_W), .SHIFT(SHIFT0), .NRD(36)) u_conv0 (
    .clk, .rst_n, .pwr, .start(start[0]), .busy(busy[0]), .done(done[0]),
    .in_addr(a0), .in_data(d0), .rd_addr(a1), .rd_data(d1));
  cnn_conv_pool #(.LAYER_ID(1), .H_IN(15), .W_IN(15), .CIN(16), .COUT(16), .RF(4),
                  .IN_W(ACT_W), .OUT_W(ACT_W), .SHIFT(SHIFT1), .NRD(9)) u_conv1 (
    .clk, .rst_n, .pwr, .start(start[1]), .busy(busy[1]), .done(done[1]),
    .in_addr(a1), .in_data(d1), .rd_addr(a2), .rd_data(d2));
  cnn_conv_pool #(.LAYER_ID(2), .H_IN(6),  .W_IN(6),  .CIN(16), .COUT(24), .RF(16),
                  .IN_W(ACT_W), .OUT_W(ACT_W), .SHIFT(SHIFT2), .NRD(2)) u_conv2 (
    .clk, .rst_n, .pwr, .start(start[2]), .busy(busy[2]), .done(done[2]),
    .in_addr(a2), .in_data(d2), .rd_addr(a3), .rd_data(d3));
  cnn_dense #(.LAYER_ID(3), .NIN(96), .NOUT(42), .RF(48), .IN_W(ACT_W), .OUT_W(ACT_W),
              .SHIFT(SHIFT3), .OUT_SIGNED(1'b0), .NRD(42)) u_dense0 (
    .clk, .rst_n, .pwr, .start(start[3]), .busy(busy[3]), .done(done[3]),
    .in_addr(a3), .in_data(d3), .rd_addr(a4), .rd_data(d4));
  cnn_dense #(.LAYER_ID(4), .NIN(42), .NOUT(64), .RF(64), .IN_W(ACT_W), .OUT_W(ACT_W),
              .SHIFT(SHIFT4), .OUT_SIGNED(1'b0), .NRD(1)) u_dense1 (
    .clk, .rst_n, .pwr, .start(start[4]), .busy(busy[4]), .done(done[4]),
    .in_addr(a4), .in_data(d4), .rd_addr(a5), .rd_data(d5));
  cnn_dense #(.LAYER_ID(5), .NIN(64), .NOUT(2),  .RF(128), .IN_W(ACT_W), .OUT_W(Y_W),
              .SHIFT(SHIFT5), .OUT_SIGNED(1'b1), .NRD(2)) u_dense2 (
    .clk, .rst_n, .pwr, .start(start[5]), .busy(busy[5]), .done(done[5]),
    .in_addr(a5), .in_data(d5), .rd_addr(ay), .rd_data(dy));

  // ---- dataflow control -----------------------------------------------------
  // input-full flag of layer i: ibuf_full for 0, full[i-1] otherwise
  logic [5:0] in_full;
  logic [5:0] out_free;
  assign in_full  = {full, ibuf_full};
  assign out_free = {1'b1, ~full};   // the output layer writes an ap_vld port

  always_comb begin
    for (int i = 0; i < 6; i++)
      start[i] = in_full[i] && out_free[i] && !busy[i] && !done[i];
  end

  logic [2:0] in_flight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_pkt      <= '0;
      ibuf_full   <= 1'b0;
      full        <= '0;
      y_vld       <= 1'b0;
      y_sin       <= '0;
      y_cos       <= '0;
      in_flight   <= '0;
      frame_error <= 1'b0;
    end else begin
      // input buffer
      if (s_valid && s_ready) begin
        if (s_last != (int'(wr_pkt) == NPKT - 1)) frame_error <= 1'b1;
        if (int'(wr_pkt) == NPKT - 1) begin
          wr_pkt    <= '0;
          ibuf_full <= 1'b1;
        end else begin
          wr_pkt <= wr_pkt + 1'b1;
        end
      end
      if (done[0]) ibuf_full <= 1'b0;
      // layer buffers: set by the producer, cleared by the consumer
      for (int i = 0; i < 5; i++) begin
        if (done[i]) full[i] <= 1'b1;
        if (done[i+1]) full[i] <= 1'b0;
      end
      // output
      y_vld <= done[5];
      if (done[5]) begin
        y_sin <= dy[0];
        y_cos <= dy[1];
      end
      in_flight <= in_flight + 3'(start[0]) - 3'(y_vld);
    end
  end

  assign infer_active = (in_flight != 0);

  // a producer never overwrites a buffer its consumer has not released
  for (genvar i = 0; i < 5; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) done[i] |-> !full[i] || done[i+1])
      else $error("cnn_core: layer %0d overwrote a full buffer", i);
  end

endmodule
