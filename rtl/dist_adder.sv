// dist_adder: adds the synthesized disturbance to the PID control signal.
//
// In the loop's block diagram the pulse generator's disturbance and the control
// signal u(n) meet in a summing junction whose output drives the DAC. This block
// forms dac = u + disturbance every clock and saturates the sum to the DAC code
// range, so an overdriven sum clips instead of wrapping around.
//
// Interface: u and vn are levels (u is held between PID updates); dac_data is
// registered, one clock after its inputs. Synchronous active-low reset to 0.
module dist_adder #(
  parameter int unsigned DATA_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] u,
  input  logic signed [DATA_W-1:0] vn,
  output logic signed [DATA_W-1:0] dac_data,
  output logic                     clipped
);

  localparam logic signed [DATA_W:0] MAXV = (DATA_W+1)'((2 ** (DATA_W - 1)) - 1);
  localparam logic signed [DATA_W:0] MINV = -(DATA_W+1)'(2 ** (DATA_W - 1));

  logic signed [DATA_W:0] sum;

  always_comb sum = (DATA_W+1)'(u) + (DATA_W+1)'(vn);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac_data <= '0;
      clipped  <= 1'b0;
    end else begin
      clipped <= (sum > MAXV) || (sum < MINV);
      if (sum > MAXV)      dac_data <= DATA_W'(MAXV);
      else if (sum < MINV) dac_data <= DATA_W'(MINV);
      else                 dac_data <= DATA_W'(sum);
    end
  end

endmodule
