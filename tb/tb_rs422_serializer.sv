// tb_rs422_serializer: checks the serial writeout.
//
// A receiver model samples the five data lanes on every rising sclk edge
// while cs_n is low and rebuilds the 16-bit words (MSB first). Checked: the
// words, 16 sclk rising edges per transfer, an sclk period of 25 clocks
// (10 MHz at 250 MHz), busy/cs_n low for exactly 400 clocks (1.6 us), a
// request arriving during a transfer being sent right after it, and a third
// one in the same transfer being counted as an overrun.
module tb_rs422_serializer;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic start, busy, sclk, cs_n;
  logic [15:0] words [5];
  logic [4:0] sdo;
  logic [7:0] overruns;

  rs422_serializer dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // receiver
  logic [15:0] rx [5];
  int nbits = 0, cyc = 0, last_rise = -1, busy_len = 0, transfers = 0;
  logic [15:0] expq [$];
  logic sclk_d = 0, cs_d = 1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (busy) busy_len++;
    if (!cs_n && sclk && !sclk_d) begin
      if (last_rise >= 0 && nbits > 0) check(cyc - last_rise == 25, "sclk period");
      last_rise = cyc;
      for (int l = 0; l < 5; l++) rx[l] = {rx[l][14:0], sdo[l]};
      nbits++;
    end
    if (cs_n && !cs_d) begin
      transfers++;
      check(nbits == 16, $sformatf("bits per transfer %0d", nbits));
      check(busy_len == 400, $sformatf("transfer length %0d", busy_len));
      for (int l = 0; l < 5; l++) begin
        logic [15:0] e;
        e = expq.pop_front();
        check(rx[l] == e, $sformatf("lane %0d got %h exp %h", l, rx[l], e));
      end
      nbits = 0; busy_len = 0; last_rise = -1;
    end
    sclk_d = sclk; cs_d = cs_n;
  end

  task automatic request(input bit expect_sent);
    @(negedge clk);
    for (int l = 0; l < 5; l++) begin
      words[l] = 16'($urandom);
      if (expect_sent) expq.push_back(words[l]);
    end
    start = 1;
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    start = 0;
    for (int l = 0; l < 5; l++) words[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(cs_n && !busy, "idle after reset");
    request(1);
    wait (cs_n); repeat (20) @(negedge clk);
    request(1);
    repeat (100) @(negedge clk);
    request(1);                 // held while the first is sent
    repeat (50) @(negedge clk);
    request(0);                 // dropped: one already pending
    wait (transfers == 3);
    repeat (10) @(negedge clk);
    check(overruns == 1, $sformatf("overruns %0d", overruns));
    check(transfers == 3, "three transfers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
