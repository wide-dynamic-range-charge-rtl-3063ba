// pid_controller: discrete-time PID controller of the rf-reflectometry loop.
//
// Implements the difference equations obtained from the continuous PID law by the
// bilinear transform, with a first-order filtered derivative:
//     u_P(n) = G_P e(n)
//     u_I(n) = G_I [e(n) + e(n-1)] + u_I(n-1)
//     u_D(n) = G_D [e(n) - e(n-1)] - D u_D(n-1)
//     u(n)   = u_P(n) + u_I(n) + u_D(n) + u(n-1)
// with G_I = K_I T_S/2, G_D = 2 K_D/(T_S + 2 T_F), D = (T_S - 2 T_F)/(T_S + 2 T_F),
// all computed by the host and written as signed fixed-point settings with
// COEF_FRAC fraction bits. The u(n-1) term follows the published u(n) equation,
// which accumulates the three terms (the transfer function H(z) given beside it
// has no such term); with it the loop holds the correction it has built up once
// the error returns to zero, which is how the measured control signal behaves.
//
// The three terms are computed in parallel. Internal state keeps COEF_FRAC
// fraction bits. u, u_I and u_D saturate at the DAC full scale, which bounds the
// tracking range of u (+-1.5 V) and stops wind-up. u_out is u rounded to codes.
//
// Timing: a sample accepted with in_valid produces out_valid two clocks later
// (stage 1: the three terms and their state; stage 2: the accumulated u). A new
// sample may be accepted every clock. en = 0 (PID off) clears all state and holds
// u_out at 0; the loop restarts from zero when en returns to 1.
// Synchronous active-low reset.
module pid_controller #(
  parameter int unsigned ERR_W     = 17,
  parameter int unsigned OUT_W     = 16,
  parameter int unsigned COEF_W    = 24,
  parameter int unsigned COEF_FRAC = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [COEF_W-1:0] gp,
  input  logic signed [COEF_W-1:0] gi,
  input  logic signed [COEF_W-1:0] gd,
  input  logic signed [COEF_W-1:0] d,
  input  logic                     in_valid,
  input  logic signed [ERR_W-1:0]  err,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  u_out,
  output logic                     u_sat
);

  // Accumulator width: u range plus headroom for one product of every term.
  localparam int unsigned ACC_W  = OUT_W + COEF_FRAC + 2;
  localparam int unsigned PROD_W = ERR_W + 1 + COEF_W;
  localparam int unsigned DP_W   = ACC_W + COEF_W;
  localparam int unsigned WIDE_W = (PROD_W > DP_W ? PROD_W : DP_W) + 2;

  // Saturation limit: DAC full scale in accumulator units.
  localparam logic signed [WIDE_W-1:0] LIM =
      WIDE_W'((2 ** (OUT_W - 1)) - 1) <<< COEF_FRAC;

  function automatic logic signed [ACC_W-1:0] clamp(input logic signed [WIDE_W-1:0] v);
    if (v > LIM)       return ACC_W'(LIM);
    else if (v < -LIM) return ACC_W'(-LIM);
    else               return ACC_W'(v);
  endfunction

  logic signed [ERR_W-1:0]  e1_q;                 // e(n-1)
  logic signed [ACC_W-1:0]  up_q, ui_q, ud_q;     // u_P(n), u_I(n), u_D(n)
  logic signed [ACC_W-1:0]  u_q;                  // u(n)
  logic                     s1_valid;

  logic signed [ERR_W:0]    e_sum, e_dif;
  logic signed [WIDE_W-1:0] p_raw, i_raw, d_raw, u_raw;

  // Stage 1: the three terms in parallel.
  always_comb begin
    e_sum = (ERR_W+1)'(err) + (ERR_W+1)'(e1_q);
    e_dif = (ERR_W+1)'(err) - (ERR_W+1)'(e1_q);
    p_raw = WIDE_W'(gp) * WIDE_W'(err);
    i_raw = WIDE_W'(gi) * WIDE_W'(e_sum) + WIDE_W'(ui_q);
    d_raw = WIDE_W'(gd) * WIDE_W'(e_dif)
          - ((WIDE_W'(d) * WIDE_W'(ud_q)) >>> COEF_FRAC);
  end

  // Stage 2: accumulate onto u(n-1).
  always_comb begin
    u_raw = WIDE_W'(up_q) + WIDE_W'(ui_q) + WIDE_W'(ud_q) + WIDE_W'(u_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      e1_q      <= '0;
      up_q      <= '0;
      ui_q      <= '0;
      ud_q      <= '0;
      u_q       <= '0;
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
      u_out     <= '0;
      u_sat     <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
      if (in_valid) begin
        e1_q <= err;
        up_q <= clamp(p_raw);
        ui_q <= clamp(i_raw);
        ud_q <= clamp(d_raw);
      end
      if (s1_valid) begin
        u_q   <= clamp(u_raw);
        u_out <= OUT_W'((clamp(u_raw) + ACC_W'(2 ** (COEF_FRAC - 1))) >>> COEF_FRAC);
        u_sat <= (u_raw > LIM) || (u_raw < -LIM);
      end
    end
  end

  // A result leaves exactly two clocks after the sample it belongs to.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n || !en)
                              out_valid |-> $past(in_valid, 2));

endmodule
