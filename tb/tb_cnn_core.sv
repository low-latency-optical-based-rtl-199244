// tb_cnn_core: end-to-end check of the full-size network (default sizes and
// reuse factors) against a behavioural model computed in this testbench.
//
// Random 7-bit weights and small biases are loaded through the parameter
// port, then four random 32x32 frames are streamed in, the first three back
// to back so that layers of different frames overlap. Every prediction must
// equal the model's, the latency from the last input packet to y_vld must be
// 1985 clocks, frames must come out in order, and the input must stall
// (s_ready low) while conv0 still holds the previous frame.
module tb_cnn_core;
  import mt_pkg::*;

  localparam int NF = 4;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  param_wr_t pwr;
  logic s_valid, s_ready, s_last;
  pkt_t s_data;
  logic y_vld, infer_active, frame_error;
  logic [Y_W-1:0] y_sin, y_cos;

  cnn_core dut (.*);

  int checks = 0, failures = 0;

  // ---- model parameters ---------------------------------------------------
  // layer shapes: nin (terms per output), nout
  int NIN [6]  = '{9, 144, 144, 96, 42, 64};
  int NOUT[6]  = '{16, 16, 24, 42, 64, 2};
  int SH  [6]  = '{10, 8, 8, 7, 7, 6};
  // block shapes worked out by hand from the reuse factors {1,4,16,48,64,128}
  int TP  [6]  = '{9, 36, 9, 2, 42, 1};
  int CP  [6]  = '{16, 16, 24, 42, 1, 1};

  int w0 [9][16];    int b0 [16];
  int w1 [144][16];  int b1 [16];
  int w2 [144][24];  int b2 [24];
  int w3 [96][42];   int b3 [42];
  int w4 [42][64];   int b4 [64];
  int w5 [64][2];    int b5 [2];

  int img [NF][32*32];
  int exp_s [NF], exp_c [NF];

  task automatic wr(input int layer, input bit b, input int addr, input int data);
    pwr.en = 1; pwr.layer = 3'(layer); pwr.bias = b; pwr.addr = 16'(addr); pwr.data = 16'(data);
    @(posedge clk); #0;
    pwr.en = 0;
  endtask

  function automatic int waddr(int l, int t, int c);
    return (((t / TP[l]) * (NOUT[l] / CP[l]) + c / CP[l]) * TP[l] * CP[l]) +
           (t % TP[l]) * CP[l] + c % CP[l];
  endfunction

  function automatic int rw(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  task automatic load_all();
    for (int t = 0; t < 9; t++)   for (int c = 0; c < 16; c++) begin w0[t][c] = rw(-40, 63); wr(0, 0, waddr(0, t, c), w0[t][c]); end
    for (int t = 0; t < 144; t++) for (int c = 0; c < 16; c++) begin w1[t][c] = rw(-30, 34); wr(1, 0, waddr(1, t, c), w1[t][c]); end
    for (int t = 0; t < 144; t++) for (int c = 0; c < 24; c++) begin w2[t][c] = rw(-30, 34); wr(2, 0, waddr(2, t, c), w2[t][c]); end
    for (int t = 0; t < 96; t++)  for (int c = 0; c < 42; c++) begin w3[t][c] = rw(-30, 34); wr(3, 0, waddr(3, t, c), w3[t][c]); end
    for (int t = 0; t < 42; t++)  for (int c = 0; c < 64; c++) begin w4[t][c] = rw(-30, 34); wr(4, 0, waddr(4, t, c), w4[t][c]); end
    for (int t = 0; t < 64; t++)  for (int c = 0; c < 2; c++)  begin w5[t][c] = rw(-64, 63); wr(5, 0, waddr(5, t, c), w5[t][c]); end
    for (int c = 0; c < 16; c++) begin b0[c] = rw(-3000, 3000); wr(0, 1, c, b0[c]); end
    for (int c = 0; c < 16; c++) begin b1[c] = rw(-3000, 3000); wr(1, 1, c, b1[c]); end
    for (int c = 0; c < 24; c++) begin b2[c] = rw(-3000, 3000); wr(2, 1, c, b2[c]); end
    for (int c = 0; c < 42; c++) begin b3[c] = rw(-2000, 2000); wr(3, 1, c, b3[c]); end
    for (int c = 0; c < 64; c++) begin b4[c] = rw(-2000, 2000); wr(4, 1, c, b4[c]); end
    for (int c = 0; c < 2; c++)  begin b5[c] = rw(-2000, 2000); wr(5, 1, c, b5[c]); end
  endtask

  function automatic int act(int v, int sh);
    if (v <= 0) return 0;
    v = v >>> sh;
    return (v > 255) ? 255 : v;
  endfunction

  // conv (valid) + ReLU + 2x2 max pool, channels-last buffers
  task automatic conv_pool(input int l, input int h, input int wd, input int cin, input int cout,
                           input int x[], output int y[]);
    int hp, wp, v, best;
    hp = (h - 2) / 2; wp = (wd - 2) / 2;
    y = new[hp * wp * cout];
    for (int py = 0; py < hp; py++)
      for (int px = 0; px < wp; px++)
        for (int co = 0; co < cout; co++) begin
          best = 0;
          for (int q = 0; q < 4; q++) begin
            v = (l == 0) ? b0[co] : (l == 1) ? b1[co] : b2[co];
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                for (int ci = 0; ci < cin; ci++) begin
                  int t, xv, wv;
                  t  = (ky * 3 + kx) * cin + ci;
                  xv = x[((2*py + q/2 + ky) * wd + 2*px + q%2 + kx) * cin + ci];
                  wv = (l == 0) ? w0[t][co] : (l == 1) ? w1[t][co] : w2[t][co];
                  v += xv * wv;
                end
            if (q == 0 || v > best) best = v;
          end
          y[(py * wp + px) * cout + co] = act(best, SH[l]);
        end
  endtask

  task automatic model(input int f);
    int a0[], a1[], a2[], a3[], a4[], x[];
    int v;
    x = new[1024];
    for (int i = 0; i < 1024; i++) x[i] = img[f][i];
    conv_pool(0, 32, 32, 1, 16, x, a0);
    conv_pool(1, 15, 15, 16, 16, a0, a1);
    conv_pool(2, 6, 6, 16, 24, a1, a2);
    a3 = new[42];
    for (int c = 0; c < 42; c++) begin
      v = b3[c]; for (int t = 0; t < 96; t++) v += a2[t] * w3[t][c]; a3[c] = act(v, SH[3]);
    end
    a4 = new[64];
    for (int c = 0; c < 64; c++) begin
      v = b4[c]; for (int t = 0; t < 42; t++) v += a3[t] * w4[t][c]; a4[c] = act(v, SH[4]);
    end
    for (int c = 0; c < 2; c++) begin
      v = b5[c]; for (int t = 0; t < 64; t++) v += a4[t] * w5[t][c];
      v = v >>> SH[5];
      if (v > 1023) v = 1023;
      if (v < -1024) v = -1024;
      if (c == 0) exp_s[f] = v; else exp_c[f] = v;
    end
  endtask

  // ---- stimulus ---------------------------------------------------------------
  int last_in_cycle [NF];
  int cycle = 0;
  int stall_cycles = 0;
  always @(posedge clk) cycle++;
  always @(posedge clk) if (s_valid && !s_ready) stall_cycles++;

  task automatic send_frame(input int f, input bit gaps);
    for (int p = 0; p < 128; p++) begin
      s_valid = 1;
      s_last  = (p == 127);
      for (int k = 0; k < 8; k++) s_data[k*12 +: 12] = 12'(img[f][p*8 + k]);
      do @(posedge clk); while (!s_ready);
      #0;
      if (p == 127) last_in_cycle[f] = cycle;
      s_valid = 0; s_last = 0;
      if (gaps && $urandom_range(0, 3) == 0) begin @(posedge clk); #0; end
    end
  endtask

  // ---- output monitor ---------------------------------------------------------
  int nout = 0;
  always @(posedge clk) begin
    if (y_vld) begin
      #0;
      checks += 3;
      if (int'($signed(y_sin)) !== exp_s[nout] || int'($signed(y_cos)) !== exp_c[nout]) begin
        failures++;
        $display("frame %0d: got (%0d,%0d) expected (%0d,%0d)", nout,
                 $signed(y_sin), $signed(y_cos), exp_s[nout], exp_c[nout]);
      end else
        $display("frame %0d: sin %0d cos %0d ok", nout, $signed(y_sin), $signed(y_cos));
      if (cycle - last_in_cycle[nout] !== 1985 && nout !== 2) begin
        failures++;
        $display("frame %0d latency %0d, expected 1985", nout, cycle - last_in_cycle[nout]);
      end
      if (!infer_active) begin
        failures++; $display("infer_active low while output produced");
      end
      nout++;
    end
  end

  initial begin
    pwr = '0; s_valid = 0; s_last = 0; s_data = '0;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < 1024; i++) img[f][i] = int'($urandom_range(0, 4095));
    repeat (3) @(posedge clk);
    rst_n = 1; #0;
    load_all();
    for (int f = 0; f < NF; f++) model(f);
    checks++;
    if (infer_active) begin failures++; $display("infer_active high when idle"); end
    send_frame(0, 0);
    wait (nout == 1);
    send_frame(1, 0);
    send_frame(2, 1);      // arrives while frame 1 is still in conv0: stalls
    wait (nout == 3);
    repeat (10) @(posedge clk);
    #0;
    send_frame(3, 1);
    wait (nout == 4);
    repeat (5) @(posedge clk);
    checks += 3;
    if (stall_cycles == 0) begin failures++; $display("input never stalled"); end
    if (infer_active) begin failures++; $display("infer_active stuck high"); end
    if (frame_error) begin failures++; $display("frame_error set"); end
    $display("input stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
