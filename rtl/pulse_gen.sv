// pulse_gen: synthesizes the step disturbance V_n inside the FPGA.
//
// To measure the loop's step response the disturbance is generated next to the
// controller and added to its output, and the traces are averaged over many
// repeated trials. This block repeats a rectangular pulse: a free-running counter
// spans `period` clocks (one trial); from count `delay` for `width` clocks the
// output is `amp`, otherwise 0. With a long width it is the step of the
// step-response measurement (e.g. amp = -10 mV, a step down). trial_start pulses
// at count 0 of every trial, as the trigger for trace averaging.
//
// Interface: en = 0 holds the counter at 0 and the output at 0. All outputs are
// registered. period = 0 means a period of 2^CNT_W clocks. Synchronous
// active-low reset.
module pulse_gen #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned CNT_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] amp,
  input  logic [CNT_W-1:0]         delay,
  input  logic [CNT_W-1:0]         width,
  input  logic [CNT_W-1:0]         period,
  output logic signed [DATA_W-1:0] vn,
  output logic                     trial_start
);

  logic [CNT_W-1:0] cnt_q;
  logic [CNT_W:0]   stop;
  logic             active;
  logic             wrap;

  always_comb begin
    stop   = {1'b0, delay} + {1'b0, width};
    active = ({1'b0, cnt_q} >= {1'b0, delay}) && ({1'b0, cnt_q} < stop);
    wrap   = (period != '0) && (cnt_q >= period - CNT_W'(1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      cnt_q       <= '0;
      vn        <= '0;
      trial_start <= 1'b0;
    end else begin
      cnt_q       <= wrap ? '0 : cnt_q + CNT_W'(1);
      vn        <= active ? amp : '0;
      trial_start <= (cnt_q == '0);
    end
  end

endmodule
