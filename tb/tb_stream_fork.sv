// tb_stream_fork: checks the stream duplication and frame admission.
//
// Random frames of random length are sent with random DMA back-pressure. The
// DMA branch must always equal the input and set s_ready. A frame whose first
// packet sees nn_frame_ok low must not reach the network branch at all and
// must be counted as skipped; an admitted frame must reach it completely,
// and packets the network branch refuses inside an admitted frame must be
// counted as drops.
module tb_stream_fork;
  import mt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic s_valid, s_ready, dma_valid, dma_ready, nn_valid, nn_ready, nn_frame_ok, nn_overflow;
  pkt_t s_data, dma_data, nn_data;
  meta_t s_meta, dma_meta, nn_meta;
  logic [15:0] nn_skips, nn_drops;

  stream_fork dut (.*);

  int checks = 0, failures = 0;
  int skips = 0, drops = 0, admitted = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    s_valid = 0; dma_ready = 0; nn_ready = 1; nn_frame_ok = 1; s_data = '0; s_meta = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      int len;
      bit adm;
      len = int'($urandom_range(1, 40));
      adm = 0;
      for (int p = 0; p < len; p++) begin
        bit acc;
        acc = 0;
        while (!acc) begin
          @(negedge clk);
          s_valid     = ($urandom_range(0, 3) !== 0);
          dma_ready   = ($urandom_range(0, 4) !== 0);
          nn_frame_ok = ($urandom_range(0, 2) !== 0);
          nn_ready    = (f < 30) ? 1'b1 : ($urandom_range(0, 9) !== 0);
          s_data      = {$urandom, $urandom, $urandom};
          s_meta      = '0;
          s_meta.sof  = (p == 0);
          s_meta.eof  = (p == len - 1);
          #1;
          check(dma_valid == s_valid && dma_data == s_data && dma_meta == s_meta, "dma copy");
          check(s_ready == dma_ready, "ready follows dma");
          acc = s_valid && dma_ready;
          if (acc && p == 0) begin
            adm = nn_frame_ok;
            if (!adm) skips++; else admitted++;
          end
          check(nn_valid == (acc && adm) && (!nn_valid || nn_data == s_data), "nn branch");
          if (acc && adm && !nn_ready) drops++;
        end
      end
    end
    @(negedge clk);
    s_valid = 0;
    @(negedge clk);
    check(int'(nn_skips) == skips, $sformatf("skip count %0d vs %0d", nn_skips, skips));
    check(int'(nn_drops) == drops, $sformatf("drop count %0d vs %0d", nn_drops, drops));
    check(nn_overflow == (skips + drops > 0), "overflow flag");
    check(skips > 0 && admitted > 0 && drops > 0, "all outcomes exercised");
    $display("frames admitted %0d, skipped %0d, packets dropped %0d", admitted, skips, drops);
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
