// control_request: turns the network's mode estimate into five coil requests
// for the DAC chain.
//
// For coil i the request is
//     v_i = g * [ s * sin(m*theta_i + n*phi_i + gamma) + c * cos(m*theta_i + n*phi_i + gamma) ]
// with s, c the predicted sine and cosine components of the n=1 mode. Gain,
// phase shift and coil angles are folded into two coefficients per coil,
// A_i = g*sin(.) and B_i = g*cos(.) (signed Q1.14), so the block computes
// v_i = (A_i*s + B_i*c) >>> 14: one small matrix-vector product. Each v_i is
// offset by 2048 and clamped into the 12-bit unsigned DAC range, and four DAC
// control bits are appended below it to form a 16-bit word {code, ctl}.
//
// Five requests cover half of one toroidal array of ten coils (phi_i =
// 36 deg * i); a breakout board maps them onto all 40 coils. The reset
// coefficients are g = 1, gamma + m*theta = 0, n = 1:
//     A = {0, 9630, 15582, 15582, 9630},  B = {16384, 13255, 5063, -5063, -13255}
// i.e. round(16384*sin(36 deg*i)) and round(16384*cos(36 deg*i)). The host
// can overwrite them between discharges through coef_wr_* (index 0..4 for
// A_0..A_4, 5..9 for B_0..B_4).
//
// Interface and timing. y_vld/y_sin/y_cos arrive ap_vld style; two register
// stages later req_vld pulses with req_code (12-bit codes) and req_word
// (16-bit DAC words).
// The four control bits of every word are the constant DAC_CTL: no control
// mode is switched at run time, so those 20 output bits are fixed.
//
// The equation, the five requests, the 12-bit unsigned range and the four
// appended control bits follow the paper. The Q1.14 coefficient format, the
// offset-binary mapping, the default angles and the control-bit value
// (DAC_CTL) are choices of this design.
module control_request
  import mt_pkg::*;
#(
  parameter logic [DAC_CTL_W-1:0] DAC_CTL = 4'b0000,
  parameter logic signed [COEF_W-1:0] A_INIT [N_REQ] = '{16'sd0, 16'sd9630, 16'sd15582, 16'sd15582, 16'sd9630},
  parameter logic signed [COEF_W-1:0] B_INIT [N_REQ] = '{16'sd16384, 16'sd13255, 16'sd5063, -16'sd5063, -16'sd13255}
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  coef_wr_en,
  input  logic [3:0]            coef_wr_idx,
  input  logic [COEF_W-1:0]     coef_wr_data,
  input  logic                  y_vld,
  input  logic [Y_W-1:0]        y_sin,
  input  logic [Y_W-1:0]        y_cos,
  output logic                  req_vld,
  output logic [DAC_W-1:0]      req_code [N_REQ],
  output logic [WORD_W-1:0]     req_word [N_REQ]
);
  localparam int unsigned V_W = Y_W + COEF_W + 1;

  logic signed [COEF_W-1:0] a [N_REQ];
  logic signed [COEF_W-1:0] b [N_REQ];
  logic signed [V_W-1:0]    v [N_REQ];
  logic                     v_vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REQ; i++) begin
        a[i] <= A_INIT[i];
        b[i] <= B_INIT[i];
      end
    end else if (coef_wr_en) begin
      for (int i = 0; i < N_REQ; i++) begin
        if (int'(coef_wr_idx) == i)         a[i] <= coef_wr_data;
        if (int'(coef_wr_idx) == i + N_REQ) b[i] <= coef_wr_data;
      end
    end
  end

  function automatic logic [DAC_W-1:0] to_code(logic signed [V_W-1:0] x);
    logic signed [V_W-1:0] u;
    u = (x >>> COEF_FRAC) + V_W'(1 << (DAC_W - 1));
    if (u < 0) return '0;
    if (u > V_W'((1 << DAC_W) - 1)) return '1;
    return u[DAC_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_vld   <= 1'b0;
      req_vld <= 1'b0;
      for (int i = 0; i < N_REQ; i++) begin
        v[i]        <= '0;
        req_code[i] <= '0;
        req_word[i] <= '0;
      end
    end else begin
      v_vld   <= y_vld;
      req_vld <= v_vld;
      if (y_vld)
        for (int i = 0; i < N_REQ; i++)
          v[i] <= V_W'($signed(y_sin) * a[i]) + V_W'($signed(y_cos) * b[i]);
      if (v_vld)
        for (int i = 0; i < N_REQ; i++) begin
          req_code[i] <= to_code(v[i]);
          req_word[i] <= {to_code(v[i]), DAC_CTL};
        end
    end
  end
endmodule
