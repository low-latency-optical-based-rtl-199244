// tb_mode_tracker_top: end-to-end test of the mode tracker at its default
// (full) size.
//
// A camera model sends 128x32 frames of random 12-bit pixels, eight pixels
// per packet, in the camera link's striped line order (eight stripes of four
// lines, centre-out). Random weights are loaded into the network first. The
// test then runs:
//   * paced frames at 100 kframes/s (2500 clocks of 4 ns), the readout of
//     each frame spread over about 1300 clocks, so that the readout of one
//     frame overlaps the inference of the previous one;
//   * a burst of three frames at full link rate with the DMA always ready:
//     the second frame is skipped (the reorder still holds the first) and the
//     third makes the reorder wait on the network input;
//   * three more paced frames at 120 kframes/s (2083 clocks apart), none of
//     which may be skipped;
//   * random DMA back-pressure outside the burst.
// Checked: the DMA copy equals the input stream; every admitted frame gives
// the prediction of a behavioural model of the network computed here; each
// prediction becomes five DAC codes (Eq. v = A*s + B*c with the reset
// coefficients) that are decoded back from the serial lanes; the latency from
// the last region-of-interest packet of a paced frame to pred_vld is 1987
// clocks and the writeout lasts 400 clocks. Each mechanism (DMA back-pressure,
// reorder stall, frame skip, pipelined overlap, serial writeout) is counted
// and must occur at least once.
module tb_mode_tracker_top;
  import mt_pkg::*;

  localparam int NFRAMES = 9;   // 3 paced, 3 burst, 3 paced

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic s_valid, s_ready, dma_valid, dma_ready;
  pkt_t s_data, dma_data;
  meta_t s_meta, dma_meta;
  param_wr_t pwr;
  logic coef_wr_en;
  logic [3:0] coef_wr_idx;
  logic [COEF_W-1:0] coef_wr_data;
  logic pred_vld, req_vld;
  logic [Y_W-1:0] pred_sin, pred_cos;
  logic [DAC_W-1:0] req_code [N_REQ];
  logic [N_REQ-1:0] rs422_sdo;
  logic rs422_sclk, rs422_cs_n, inference_on, writeout_on;
  logic nn_overflow, geom_error, frame_error;
  logic [15:0] nn_skips, nn_drops, reorder_stalls;
  logic [7:0] serial_overruns;

  mode_tracker_top dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- network model (same arithmetic as the RTL's fixed-point choices) ----
  int NOUT[6] = '{16, 16, 24, 42, 64, 2};
  int SH  [6] = '{10, 8, 8, 7, 7, 6};
  int TP  [6] = '{9, 36, 9, 2, 42, 1};
  int CP  [6] = '{16, 16, 24, 42, 1, 1};
  int w0 [9][16];    int b0 [16];
  int w1 [144][16];  int b1 [16];
  int w2 [144][24];  int b2 [24];
  int w3 [96][42];   int b3 [42];
  int w4 [42][64];   int b4 [64];
  int w5 [64][2];    int b5 [2];

  task automatic wr(input int layer, input bit b, input int addr, input int data);
    @(negedge clk);
    pwr.en = 1; pwr.layer = 3'(layer); pwr.bias = b; pwr.addr = 16'(addr); pwr.data = 16'(data);
    @(negedge clk);
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

  // frames: full 128x32 images
  int img [NFRAMES][32][128];
  int exp_s [NFRAMES], exp_c [NFRAMES];

  task automatic model(input int f);
    int a0[], a1[], a2[], a3[], a4[], x[];
    int v;
    x = new[1024];
    for (int r = 0; r < 32; r++)
      for (int c = 0; c < 32; c++) x[r * 32 + c] = img[f][r][48 + c];
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

  // reset coil coefficients, recomputed here: round(16384*sin/cos(36 deg * i))
  int ca [5], cb [5];
  function automatic int code_of(int s, int c, int i);
    int v;
    v = ((ca[i] * s + cb[i] * c) >>> 14) + 2048;
    return (v < 0) ? 0 : (v > 4095) ? 4095 : v;
  endfunction

  // ---- camera model --------------------------------------------------------
  int cycle = 0;
  always @(posedge clk) cycle++;

  int admitted [$];            // frame numbers admitted to the network
  int last_roi_cycle [NFRAMES];
  pkt_t dma_q [$];
  int n_dma_bp = 0, n_overlap = 0;

  function automatic int image_line(int a);
    int k;
    k = a / 4;
    return ((k % 2 == 0) ? 3 - k / 2 : 4 + (k - 1) / 2) * 4 + a % 4;
  endfunction

  task automatic send_frame(input int f, input bit paced);
    int skips_before;
    skips_before = int'(nn_skips);
    for (int a = 0; a < 32; a++)
      for (int c = 0; c < 16; c++) begin
        int l;
        l = image_line(a);
        @(negedge clk);
        if (paced) while ($urandom_range(0, 99) >= 40) begin s_valid = 0; @(negedge clk); end
        s_valid = 1;
        for (int k = 0; k < 8; k++) s_data[k*12 +: 12] = 12'(img[f][l][c*8 + k]);
        s_meta.sof = (a == 0 && c == 0);
        s_meta.sol = (c == 0);
        s_meta.eol = (c == 15);
        s_meta.eof = (a == 31 && c == 15);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        dma_q.push_back(s_data);
        if (inference_on) n_overlap++;
        if (a == 31 && c == 9) last_roi_cycle[f] = cycle;
        if (a == 0 && c == 0) begin
          #1;
          if (int'(nn_skips) == skips_before) admitted.push_back(f);
          else $display("frame %0d skipped by the network path", f);
        end
      end
    @(negedge clk);
    s_valid = 0;
  endtask

  // DMA side: random back-pressure, data must match the input stream
  bit bp_on = 1;
  int skips_120k;
  always @(negedge clk) dma_ready = rst_n && (!bp_on || $urandom_range(0, 9) !== 0);
  always @(posedge clk) begin
    if (rst_n && s_valid && !dma_ready) n_dma_bp++;
    if (rst_n && dma_valid && dma_ready) begin
      pkt_t e;
      e = dma_q.pop_front();
      checks++;
      if (dma_data !== e) begin failures++; $display("DMA data mismatch"); end
    end
  end

  // ---- prediction and serial monitors -----------------------------------------
  int npred = 0, nwrite = 0;
  int pred_frame [$];
  always @(posedge clk) begin
    if (rst_n && pred_vld) begin
      int f;
      f = admitted[npred];
      checks += 2;
      if (int'($signed(pred_sin)) !== exp_s[f] || int'($signed(pred_cos)) !== exp_c[f]) begin
        failures++;
        $display("frame %0d: got (%0d,%0d) expected (%0d,%0d)", f, $signed(pred_sin),
                 $signed(pred_cos), exp_s[f], exp_c[f]);
      end else
        $display("frame %0d: sin %0d cos %0d ok, latency %0d", f, $signed(pred_sin),
                 $signed(pred_cos), cycle - last_roi_cycle[f]);
      if (f < 3 || f > 5) begin
        checks++;
        if (cycle - last_roi_cycle[f] !== 1987) begin
          failures++;
          $display("frame %0d latency %0d, expected 1987", f, cycle - last_roi_cycle[f]);
        end
      end
      pred_frame.push_back(f);
      npred++;
    end
  end

  logic [15:0] rx [5];
  int nbits = 0, wo_len = 0;
  logic sclk_d = 0, cs_d = 1;
  always @(posedge clk) if (rst_n) begin
    if (writeout_on) wo_len++;
    if (!rs422_cs_n && rs422_sclk && !sclk_d) begin
      for (int l = 0; l < 5; l++) rx[l] = {rx[l][14:0], rs422_sdo[l]};
      nbits++;
    end
    if (rs422_cs_n && !cs_d) begin
      int f;
      f = pred_frame[nwrite];
      checks += 7;
      if (nbits !== 16) begin failures++; $display("writeout bits %0d", nbits); end
      if (wo_len !== 400) begin failures++; $display("writeout length %0d", wo_len); end
      for (int l = 0; l < 5; l++)
        if (rx[l] !== {12'(code_of(exp_s[f], exp_c[f], l)), 4'b0000}) begin
          failures++;
          $display("frame %0d lane %0d: word %h expected code %0d", f, l, rx[l],
                   code_of(exp_s[f], exp_c[f], l));
        end
      nbits = 0; wo_len = 0;
      nwrite++;
    end
    sclk_d = rs422_sclk; cs_d = rs422_cs_n;
  end

  initial begin
    s_valid = 0; s_data = '0; s_meta = '0; pwr = '0;
    coef_wr_en = 0; coef_wr_idx = 0; coef_wr_data = 0;
    for (int i = 0; i < 5; i++) begin
      ca[i] = int'($floor(16384.0 * $sin(3.14159265358979 * 36.0 * i / 180.0) + 0.5));
      cb[i] = int'($floor(16384.0 * $cos(3.14159265358979 * 36.0 * i / 180.0) + 0.5));
    end
    for (int f = 0; f < NFRAMES; f++)
      for (int r = 0; r < 32; r++)
        for (int c = 0; c < 128; c++) img[f][r][c] = int'($urandom_range(0, 4095));
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    for (int f = 0; f < NFRAMES; f++) model(f);
    // paced frames, 2500 clocks apart
    for (int f = 0; f < 3; f++) begin
      int t0;
      t0 = cycle;
      send_frame(f, 1);
      while (cycle - t0 < 2500) @(posedge clk);
    end
    // burst at full rate, DMA always ready
    bp_on = 0;
    for (int f = 3; f < 6; f++) send_frame(f, 0);
    bp_on = 1;
    repeat (6000) @(posedge clk);
    // paced frames at 120 kframes/s, 2083 clocks (8.3 us) apart: every one
    // must reach the network
    skips_120k = int'(nn_skips);
    for (int f = 6; f < NFRAMES; f++) begin
      int t0;
      t0 = cycle;
      send_frame(f, 1);
      while (cycle - t0 < 2083) @(posedge clk);
    end
    skips_120k = int'(nn_skips) - skips_120k;
    repeat (3000) @(posedge clk);
    // mechanism coverage
    $display("DMA back-pressure cycles %0d, reorder stalls %0d, frames skipped %0d,",
             n_dma_bp, reorder_stalls, nn_skips);
    $display("packets read out during inference %0d, predictions %0d, writeouts %0d",
             n_overlap, npred, nwrite);
    check(n_dma_bp > 0, "DMA back-pressure happened");
    check(reorder_stalls > 0, "reorder stall happened");
    check(nn_skips > 0 && nn_overflow, "frame skip happened");
    check(n_overlap > 0, "readout overlapped inference");
    check(skips_120k == 0, "no frame skipped at 120 kframes/s");
    check(npred == admitted.size() && npred > 0, "one prediction per admitted frame");
    check(nwrite == npred, "one writeout per prediction");
    check(dma_q.size() == 0, "all packets reached DMA");
    check(!geom_error && !frame_error && nn_drops == 0 && serial_overruns == 0, "no errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
