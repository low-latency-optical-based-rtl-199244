// rs422_serializer: writes the five DAC words out of the frame grabber's
// RS422 outputs, one differential pair per request, with a shared serial
// clock and chip select.
//
// On start the five WORD_W-bit words are latched and chip select (cs_n) goes
// low. Each bit lasts BIT_CLKS system clocks (25 at 250 MHz = 10 MHz, the
// top speed of the RS422 outputs): the data bit is driven at the start of the
// bit time with sclk low and sclk rises half way through, so the receiver
// samples on the rising edge. Words go out MSB first, all five lanes in
// parallel. After the last bit cs_n returns high. A start that arrives while
// a transfer is running is held (one deep) and sent next; a further one is
// dropped and counted in overruns.
//
// Timing. busy (the "writeout" probe signal) is high for WORD_W*BIT_CLKS
// clocks: 400 clocks = 1.6 us at the defaults, matching the measured
// writeout time. The first bit appears one clock after start.
//
// Serial transfer of 16-bit words over one pair per request at up to 10 MHz
// with a supplied clock and chip select follows the paper; the clock phase,
// bit order and the pending-request buffer are choices of this design.
module rs422_serializer
  import mt_pkg::*;
#(
  parameter int unsigned NL       = N_REQ,
  parameter int unsigned WW       = WORD_W,
  parameter int unsigned BIT_CLKS = 25
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [WW-1:0] words [NL],
  output logic          busy,
  output logic [NL-1:0] sdo,
  output logic          sclk,
  output logic          cs_n,
  output logic [7:0]    overruns
);
  logic [WW-1:0] sh   [NL];
  logic [WW-1:0] pend [NL];
  logic          pend_vld;
  logic [$clog2(BIT_CLKS)-1:0] tick;
  logic [$clog2(WW)-1:0]       bitn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cs_n     <= 1'b1;
      sclk     <= 1'b0;
      sdo      <= '0;
      tick     <= '0;
      bitn     <= '0;
      pend_vld <= 1'b0;
      overruns <= '0;
      for (int l = 0; l < NL; l++) begin
        sh[l]   <= '0;
        pend[l] <= '0;
      end
    end else begin
      if (!busy) begin
        if (start || pend_vld) begin
          busy <= 1'b1;
          cs_n <= 1'b0;
          sclk <= 1'b0;
          tick <= '0;
          bitn <= '0;
          for (int l = 0; l < NL; l++) begin
            sh[l]  <= pend_vld ? pend[l] : words[l];
            sdo[l] <= pend_vld ? pend[l][WW-1] : words[l][WW-1];
          end
          if (pend_vld && start) begin
            for (int l = 0; l < NL; l++) pend[l] <= words[l];
          end else begin
            pend_vld <= 1'b0;
          end
        end
      end else begin
        if (start) begin
          if (pend_vld) begin
            if (overruns != '1) overruns <= overruns + 1'b1;
          end else begin
            pend_vld <= 1'b1;
            for (int l = 0; l < NL; l++) pend[l] <= words[l];
          end
        end
        if (int'(tick) == BIT_CLKS / 2 - 1) sclk <= 1'b1;
        if (int'(tick) == BIT_CLKS - 1) begin
          tick <= '0;
          sclk <= 1'b0;
          if (int'(bitn) == WW - 1) begin
            busy <= 1'b0;
            cs_n <= 1'b1;
            sdo  <= '0;
          end else begin
            bitn <= bitn + 1'b1;
            for (int l = 0; l < NL; l++) begin
              sh[l]  <= sh[l] << 1;
              sdo[l] <= sh[l][WW-2];
            end
          end
        end else begin
          tick <= tick + 1'b1;
        end
      end
    end
  end

  // chip select is low exactly while a word is being shifted
  assert property (@(posedge clk) disable iff (!rst_n) busy == !cs_n)
    else $error("rs422_serializer: cs_n out of step with busy");
endmodule
