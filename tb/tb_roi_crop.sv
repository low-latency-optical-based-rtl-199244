// tb_roi_crop: checks the centre 32x32 crop of a 128x32 frame.
//
// Each packet carries its own (line, column) in its data. Two frames are
// streamed with random gaps and random back-pressure; exactly the packets of
// columns 6..9 (pixels 48..79) of every line must come out, in order, with
// the right line index and with m_last on the final one. A third frame with
// a short line must raise geom_error.
module tb_roi_crop;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic s_valid, s_ready, m_valid, m_ready, m_last, geom_error;
  pkt_t s_data, m_data;
  meta_t s_meta;
  logic [4:0] m_line;

  roi_crop dut (.*);

  int checks = 0, failures = 0;
  int exp_idx = 0, lasts = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // output monitor
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      int line, col, el, ec;
      line = int'(m_data[15:8]);
      col  = int'(m_data[7:0]);
      el = (exp_idx / 4) % 32;
      ec = 6 + exp_idx % 4;
      check(line == el && col == ec, $sformatf("packet (%0d,%0d) expected (%0d,%0d)", line, col, el, ec));
      check(int'(m_line) == el, "m_line");
      check(m_last == (el == 31 && ec == 9), "m_last");
      if (m_last) lasts++;
      exp_idx++;
    end
  end

  always @(negedge clk) m_ready = ($urandom_range(0, 3) !== 0);

  task automatic send_frame(input int short_line);
    for (int l = 0; l < 32; l++) begin
      int n;
      n = (l == short_line) ? 15 : 16;
      for (int c = 0; c < n; c++) begin
        @(negedge clk);
        while ($urandom_range(0, 4) == 0) begin s_valid = 0; @(negedge clk); end
        s_valid = 1;
        s_data  = '0;
        s_data[15:8] = 8'(l);
        s_data[7:0]  = 8'(c);
        s_meta.sof = (l == 0 && c == 0);
        s_meta.sol = (c == 0);
        s_meta.eol = (c == n - 1);
        s_meta.eof = (l == 31 && c == n - 1);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    end
    @(negedge clk);
    s_valid = 0;
  endtask

  initial begin
    s_valid = 0; s_data = '0; s_meta = '0; m_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    send_frame(-1);
    send_frame(-1);
    repeat (4) @(negedge clk);
    check(exp_idx == 2 * 128, $sformatf("ROI packets %0d", exp_idx));
    check(lasts == 2, "two frame ends");
    check(!geom_error, "no geometry error on good frames");
    send_frame(7);
    repeat (4) @(negedge clk);
    check(geom_error, "geometry error on a short line");
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
