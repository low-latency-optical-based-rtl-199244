// tb_control_request: checks the coil-request arithmetic.
//
// With the reset coefficients (g = 1, phases 36 deg * i) the expected code of
// coil i is clamp(floor((A_i*s + B_i*c) / 2^14) + 2048, 0, 4095), where the
// coefficients are recomputed here with $sin/$cos. Random predictions,
// the extreme values, a host-written gain of ~1.9 on coil 2 (to reach the
// clamp) and the output latency of two clocks are checked, as is the 16-bit
// word {code, 4'b0000}.
module tb_control_request;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic coef_wr_en;
  logic [3:0] coef_wr_idx;
  logic [15:0] coef_wr_data;
  logic y_vld, req_vld;
  logic [10:0] y_sin, y_cos;
  logic [11:0] req_code [5];
  logic [15:0] req_word [5];

  control_request dut (.*);

  int checks = 0, failures = 0, clamps = 0;
  int ca [5], cb [5];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic apply(input int s, input int c);
    int v, e;
    @(negedge clk);
    y_vld = 1; y_sin = 11'(s); y_cos = 11'(c);
    @(negedge clk);
    y_vld = 0;
    check(!req_vld, "no output after one clock");
    @(negedge clk);
    check(req_vld, "output after two clocks");
    for (int i = 0; i < 5; i++) begin
      v = ca[i] * s + cb[i] * c;
      e = (v >>> 14) + 2048;
      if (e < 0) begin e = 0; clamps++; end
      if (e > 4095) begin e = 4095; clamps++; end
      check(int'(req_code[i]) == e, $sformatf("coil %0d s=%0d c=%0d: got %0d exp %0d",
                                             i, s, c, req_code[i], e));
      check(req_word[i] == {12'(e), 4'b0000}, "word layout");
    end
    @(negedge clk);
    check(!req_vld, "single-clock valid");
  endtask

  initial begin
    coef_wr_en = 0; coef_wr_idx = 0; coef_wr_data = 0; y_vld = 0; y_sin = 0; y_cos = 0;
    for (int i = 0; i < 5; i++) begin
      ca[i] = int'($floor(16384.0 * $sin(3.14159265358979 * 36.0 * i / 180.0) + 0.5));
      cb[i] = int'($floor(16384.0 * $cos(3.14159265358979 * 36.0 * i / 180.0) + 0.5));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    apply(0, 0);
    apply(1023, 0);
    apply(0, -1024);
    apply(-1024, -1024);
    for (int k = 0; k < 50; k++) apply(int'($urandom_range(0, 2047)) - 1024, int'($urandom_range(0, 2047)) - 1024);
    // host writes a larger gain for coil 2 (A_2 and B_2)
    @(negedge clk);
    coef_wr_en = 1; coef_wr_idx = 2;     coef_wr_data = 16'(30000); ca[2] = 30000;
    @(negedge clk);
    coef_wr_idx = 7; coef_wr_data = 16'(-20000); cb[2] = -20000;
    @(negedge clk);
    coef_wr_en = 0;
    apply(1023, -1024);
    apply(-1024, 1023);
    for (int k = 0; k < 20; k++) apply(int'($urandom_range(0, 2047)) - 1024, int'($urandom_range(0, 2047)) - 1024);
    check(clamps > 0, "clamp exercised");
    $display("clamped codes: %0d", clamps);
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
