// err_junction: the set-point summing junction of the feedback loop.
//
// Forms the control error e(n) = V_s - V_rf(n) from the set point (+ input) and
// the averaged digitized reflectometry voltage (- input), as in the loop's block
// diagram. The result is one bit wider than the inputs, so it never overflows.
//
// Interface: in_valid/vrf in, out_valid/err one clock later (registered). The set
// point vs is sampled with each valid sample. Synchronous active-low reset.
module err_junction #(
  parameter int unsigned DATA_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] vrf,
  input  logic signed [DATA_W-1:0] vs,
  output logic                     out_valid,
  output logic signed [DATA_W:0]   err
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      err       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) err <= (DATA_W+1)'(vs) - (DATA_W+1)'(vrf);
    end
  end

endmodule
