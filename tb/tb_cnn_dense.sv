// tb_cnn_dense: self-checking test of the fully connected layer.
//
// Three instances cover the three ways a reuse factor splits the MAC work:
//   A: 12 -> 6, RF 4,  ReLU       (3 inputs x 6 outputs per clock)
//   B: 8 -> 2,  RF 16, signed out (1 input x 1 output per clock)
//   C: 10 -> 8, RF 8,  ReLU       (10 inputs x 1 output per clock)
// Random weights, biases and inputs; the expected vector is computed here.
// start-to-done must be RF + 2 clocks.
module tb_cnn_dense;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  param_wr_t pwr;
  int checks = 0, failures = 0;

  // ---- instance A -----------------------------------------------------------
  logic sa, ba, da;
  logic [7:0] ia [12];
  logic [7:0] oa [6];
  logic [$clog2(12)-1:0] aa [3];
  logic [7:0] xa [3];
  logic [$clog2(6)-1:0] ra [6];
  always_comb for (int t = 0; t < 3; t++) xa[t] = ia[aa[t]];
  always_comb for (int i = 0; i < 6; i++) ra[i] = ($clog2(6))'(i);
  cnn_dense #(.LAYER_ID(3), .NIN(12), .NOUT(6), .RF(4), .IN_W(8), .OUT_W(8), .SHIFT(4),
              .OUT_SIGNED(1'b0), .NRD(6)) dut_a (.clk, .rst_n, .pwr, .start(sa), .busy(ba), .done(da),
              .in_addr(aa), .in_data(xa), .rd_addr(ra), .rd_data(oa));
  // ---- instance B -----------------------------------------------------------
  logic sb, bb, db;
  logic [7:0]  ib [8];
  logic [10:0] ob [2];
  logic [$clog2(8)-1:0] ab [1];
  logic [7:0] xb [1];
  logic [$clog2(2)-1:0] rb [2];
  always_comb for (int t = 0; t < 1; t++) xb[t] = ib[ab[t]];
  always_comb for (int i = 0; i < 2; i++) rb[i] = ($clog2(2))'(i);
  cnn_dense #(.LAYER_ID(5), .NIN(8), .NOUT(2), .RF(16), .IN_W(8), .OUT_W(11), .SHIFT(2),
              .OUT_SIGNED(1'b1), .NRD(2)) dut_b (.clk, .rst_n, .pwr, .start(sb), .busy(bb), .done(db),
              .in_addr(ab), .in_data(xb), .rd_addr(rb), .rd_data(ob));
  // ---- instance C -----------------------------------------------------------
  logic sc, bc, dc;
  logic [7:0] ic [10];
  logic [7:0] oc [8];
  logic [$clog2(10)-1:0] ac [10];
  logic [7:0] xc [10];
  logic [$clog2(8)-1:0] rc [8];
  always_comb for (int t = 0; t < 10; t++) xc[t] = ic[ac[t]];
  always_comb for (int i = 0; i < 8; i++) rc[i] = ($clog2(8))'(i);
  cnn_dense #(.LAYER_ID(4), .NIN(10), .NOUT(8), .RF(8), .IN_W(8), .OUT_W(8), .SHIFT(3),
              .OUT_SIGNED(1'b0), .NRD(8)) dut_c (.clk, .rst_n, .pwr, .start(sc), .busy(bc), .done(dc),
              .in_addr(ac), .in_data(xc), .rd_addr(rc), .rd_data(oc));

  int wt [16][8];
  int bs [8];
  int x  [16];

  task automatic wr(input int layer, input bit b, input int addr, input int data);
    pwr.en = 1; pwr.layer = 3'(layer); pwr.bias = b; pwr.addr = 16'(addr); pwr.data = 16'(data);
    @(posedge clk); #0;
    pwr.en = 0;
  endtask

  // tp/cp: block shape of the instance, worked out by hand
  task automatic load(input int layer, input int nin, input int nout, input int tp,
                      input int cp, input int boff);
    for (int t = 0; t < nin; t++)
      for (int c = 0; c < nout; c++) begin
        wt[t][c] = int'($urandom_range(0, 127)) - 64;
        wr(layer, 1'b0, (((t / tp) * (nout / cp) + c / cp) * tp * cp) + (t % tp) * cp + c % cp,
           wt[t][c]);
      end
    for (int c = 0; c < nout; c++) begin
      bs[c] = int'($urandom_range(0, 2000)) - 1000 + boff;
      wr(layer, 1'b1, c, bs[c]);
    end
  endtask

  function automatic int ref_out(int nin, int c, int shift, bit sgn, int ow);
    int v;
    v = bs[c];
    for (int t = 0; t < nin; t++) v += x[t] * wt[t][c];
    if (sgn) begin
      v = v >>> shift;
      if (v > (1 << (ow-1)) - 1) v = (1 << (ow-1)) - 1;
      if (v < -(1 << (ow-1))) v = -(1 << (ow-1));
      return v;
    end
    if (v <= 0) return 0;
    v = v >>> shift;
    return (v > (1 << ow) - 1) ? (1 << ow) - 1 : v;
  endfunction

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wait_done(ref logic d, input int rf);
    int cyc;
    cyc = 1;
    while (!d) begin @(posedge clk); #0; cyc++; end
    check(cyc, rf + 2, "latency");
  endtask

  initial begin
    pwr = '0; sa = 0; sb = 0; sc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #0;
    for (int trial = 0; trial < 4; trial++) begin
      int boff;
      boff = (trial == 3) ? 20000 : 0;
      // A
      load(3, 12, 6, 3, 6, boff);
      for (int t = 0; t < 12; t++) begin x[t] = int'($urandom_range(0, 255)); ia[t] = 8'(x[t]); end
      sa = 1; @(posedge clk); #0; sa = 0;
      wait_done(da, 4);
      for (int c = 0; c < 6; c++) check(int'(oa[c]), ref_out(12, c, 4, 0, 8), "A");
      // B
      load(5, 8, 2, 1, 1, (trial == 3) ? -30000 : 0);
      for (int t = 0; t < 8; t++) begin x[t] = int'($urandom_range(0, 255)); ib[t] = 8'(x[t]); end
      sb = 1; @(posedge clk); #0; sb = 0;
      wait_done(db, 16);
      for (int c = 0; c < 2; c++) check(int'($signed(ob[c])), ref_out(8, c, 2, 1, 11), "B");
      // C
      load(4, 10, 8, 10, 1, boff);
      for (int t = 0; t < 10; t++) begin x[t] = int'($urandom_range(0, 255)); ic[t] = 8'(x[t]); end
      sc = 1; @(posedge clk); #0; sc = 0;
      wait_done(dc, 8);
      for (int c = 0; c < 8; c++) check(int'(oc[c]), ref_out(10, c, 3, 0, 8), "C");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
