// tb_cnn_conv_pool: self-checking test of one conv + ReLU + max-pool stage.
//
// A 9x9x4 -> 3x3x6 stage with reuse factor 4 (9 terms x 6 channels per clock)
// is loaded with random 7-bit weights and 16-bit biases and run on several
// random feature maps. The expected output is computed here from the full
// convolution map (every position, then pooling, ReLU, shift and saturate).
// The start-to-done time must equal 3*3*4*RF clocks plus one clock to accept start and one to register done.
module tb_cnn_conv_pool;
  import mt_pkg::*;

  localparam int H = 9, W = 9, CIN = 4, COUT = 6, K = 3, RF = 4;
  localparam int IN_W = 8, OUT_W = 8, SHIFT = 6;
  localparam int HC = H - K + 1, WC = W - K + 1, HP = HC / 2, WP = WC / 2;
  localparam int NIN = K * K * CIN;
  // block layout worked out by hand: 36 terms / RF 4 = 9 terms, all 6 channels
  localparam int TP = 9, CP = 6, NCB = COUT / CP;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  param_wr_t pwr;
  logic start, busy, done;
  logic [IN_W-1:0]  in_fm  [H*W*CIN];
  logic [OUT_W-1:0] out_fm [HP*WP*COUT];
  // read ports: the input map answers the stage's addresses, and one output
  // read port per output value exposes the whole output buffer
  logic [$clog2(H*W*CIN)-1:0]    in_addr [TP];
  logic [IN_W-1:0]               in_data [TP];
  logic [$clog2(HP*WP*COUT)-1:0] rd_addr [HP*WP*COUT];
  always_comb for (int t = 0; t < TP; t++) in_data[t] = in_fm[in_addr[t]];
  always_comb for (int i = 0; i < HP*WP*COUT; i++) rd_addr[i] = ($clog2(HP*WP*COUT))'(i);

  cnn_conv_pool #(.LAYER_ID(2), .H_IN(H), .W_IN(W), .CIN(CIN), .COUT(COUT), .K(K),
                  .RF(RF), .IN_W(IN_W), .OUT_W(OUT_W), .SHIFT(SHIFT), .NRD(HP*WP*COUT)) dut (
                  .clk, .rst_n, .pwr, .start, .busy, .done, .in_addr, .in_data, .rd_addr,
                  .rd_data(out_fm));

  int checks = 0, failures = 0;
  int wt [NIN][COUT];
  int bs [COUT];

  task automatic wr(input bit b, input int addr, input int data);
    pwr.en = 1; pwr.layer = 3'd2; pwr.bias = b; pwr.addr = 16'(addr); pwr.data = 16'(data);
    @(posedge clk); #0;
    pwr.en = 0;
  endtask

  task automatic load_params(input int bias_off);
    for (int t = 0; t < NIN; t++)
      for (int c = 0; c < COUT; c++) wt[t][c] = int'($urandom_range(0, 127)) - 64;
    for (int c = 0; c < COUT; c++) bs[c] = int'($urandom_range(0, 4000)) - 2000 + bias_off;
    for (int t = 0; t < NIN; t++)
      for (int c = 0; c < COUT; c++) begin
        int row, lane;
        row  = (t / TP) * NCB + c / CP;
        lane = (t % TP) * CP + c % CP;
        wr(1'b0, row * TP * CP + lane, wt[t][c]);
      end
    for (int c = 0; c < COUT; c++) wr(1'b1, c, bs[c]);
    // a write to another layer must be ignored
    pwr.en = 1; pwr.layer = 3'd1; pwr.bias = 1; pwr.addr = 0; pwr.data = 16'h7fff;
    @(posedge clk); #0; pwr.en = 0;
  endtask

  function automatic int expect_out(int py, int px, int co);
    int best, v;
    best = 0;
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++) begin
        v = bs[co];
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int ci = 0; ci < CIN; ci++)
              v += int'(in_fm[((2*py+dy+ky)*W + 2*px+dx+kx)*CIN + ci]) *
                   wt[(ky*K+kx)*CIN+ci][co];
        if ((dy == 0 && dx == 0) || v > best) best = v;
      end
    if (best <= 0) return 0;
    best = best >>> SHIFT;
    return (best > 255) ? 255 : best;
  endfunction

  task automatic run_one(input int maxpix);
    int cyc, e, nz;
    for (int i = 0; i < H*W*CIN; i++) in_fm[i] = IN_W'($urandom_range(0, maxpix));
    start = 1; @(posedge clk); #0; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #0; cyc++; end
    checks++;
    if (cyc !== HP*WP*4*RF + 2) begin
      failures++; $display("latency %0d, expected %0d", cyc, HP*WP*4*RF + 2);
    end
    nz = 0;
    for (int py = 0; py < HP; py++)
      for (int px = 0; px < WP; px++)
        for (int co = 0; co < COUT; co++) begin
          e = expect_out(py, px, co);
          checks++;
          if (e !== 0) nz++;
          if (int'(out_fm[(py*WP+px)*COUT+co]) !== e) begin
            failures++;
            $display("mismatch (%0d,%0d,%0d): got %0d exp %0d", py, px, co,
                     out_fm[(py*WP+px)*COUT+co], e);
          end
        end
    $display("pass done, %0d nonzero outputs", nz);
  endtask

  initial begin
    pwr = '0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #0;
    load_params(0);
    run_one(255);
    run_one(40);
    load_params(30000);   // large biases: saturation path
    run_one(255);
    load_params(-30000);  // negative: ReLU clamps everything
    run_one(255);
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
