// tb_stripe_reorder: checks that striped line order is restored.
//
// The camera link delivers eight stripes of four lines, centre-out: arrival
// stripe k holds image lines of stripe 3-k/2 (k even) or 4+(k-1)/2 (k odd).
// Each ROI packet carries its image line and packet column in its data. Three
// frames are sent in that arrival order with random gaps while the consumer
// applies random back-pressure; the output must be the 128 packets of each
// frame in image order with m_last on the last one, and the stall counter
// must match the clocks on which the output waited.
module tb_stripe_reorder;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic s_valid, s_ready, m_valid, m_ready, m_last;
  pkt_t s_data, m_data;
  logic [4:0] s_line;
  logic [15:0] stalls;
  logic idle;

  stripe_reorder dut (.*);

  int checks = 0, failures = 0;
  int got = 0, stall_ref = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int image_stripe(int k);
    return (k % 2 == 0) ? 3 - k / 2 : 4 + (k - 1) / 2;
  endfunction

  always @(posedge clk) begin
    if (rst_n && m_valid && !m_ready) stall_ref++;
    if (rst_n && m_valid && m_ready) begin
      int idx, line, col;
      idx  = got % 128;
      line = int'(m_data[15:8]);
      col  = int'(m_data[7:0]);
      check(line == idx / 4 && col == idx % 4,
            $sformatf("out %0d: line %0d col %0d", got, line, col));
      check(m_last == (idx == 127), "m_last");
      check(int'(m_data[23:16]) == got / 128, "frame tag");
      got++;
    end
  end

  always @(negedge clk) m_ready = ($urandom_range(0, 2) !== 0);

  initial begin
    s_valid = 0; s_data = '0; s_line = '0; m_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle, "idle after reset");
    for (int f = 0; f < 3; f++)
      for (int a = 0; a < 32; a++)          // arrival line
        for (int c = 0; c < 4; c++) begin
          int img_line;
          img_line = image_stripe(a / 4) * 4 + a % 4;
          @(negedge clk);
          while ($urandom_range(0, 5) == 0) begin s_valid = 0; @(negedge clk); end
          s_valid = 1;
          s_line  = 5'(a);
          s_data  = '0;
          s_data[23:16] = 8'(f);
          s_data[15:8]  = 8'(img_line);
          s_data[7:0]   = 8'(c);
          @(posedge clk);
          while (!s_ready) @(posedge clk);
        end
    @(negedge clk);
    s_valid = 0;
    wait (got == 3 * 128);
    repeat (2) @(negedge clk);
    check(got == 3 * 128, "all packets out");
    check(idle, "idle when drained");
    check(int'(stalls) == stall_ref && stall_ref > 0, $sformatf("stalls %0d vs %0d", stalls, stall_ref));
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
