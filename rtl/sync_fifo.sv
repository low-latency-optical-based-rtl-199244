// sync_fifo: single-clock first-word-fall-through FIFO, used for the stripe
// buffers of the line reorder.
//
// A register array with write and read pointers one bit wider than the
// address, so full and empty are told apart by the top bit. rd_data shows the
// oldest word whenever empty is low; rd_en pops it. A write while full and a
// read while empty are ignored (the caller checks full/empty). count gives
// the number of stored words. All outputs change on the rising clock edge;
// reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned W     = 96,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= (int'(wp[AW-1:0]) == DEPTH - 1) ? {~wp[AW], {AW{1'b0}}} : wp + 1'b1;
      if (do_rd) rp <= (int'(rp[AW-1:0]) == DEPTH - 1) ? {~rp[AW], {AW{1'b0}}} : rp + 1'b1;
    end
  end

  assign empty   = (wp == rp);
  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_data = mem[rp[AW-1:0]];
  assign count   = (wp[AW] == rp[AW]) ? ($clog2(DEPTH+1))'(wp[AW-1:0] - rp[AW-1:0])
                                      : ($clog2(DEPTH+1))'(DEPTH - int'(rp[AW-1:0]) + int'(wp[AW-1:0]));

  // a write into a full FIFO or a read from an empty one is a caller error
  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("sync_fifo: read while empty");

endmodule
