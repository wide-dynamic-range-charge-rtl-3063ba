// plant_model: behavioural model (not synthesizable) of everything outside the
// FPGA logic in the feedback loop: DAC, the analog adder with the DC gate bias,
// the gate line low-pass, the GaN sensor read by rf reflectometry, demodulation
// and the ADC. Used only by the closed-loop testbenches.
//
// Gate-side voltages are in DAC codes (1 code = 1.5 V / 2^15, about 45.8 uV).
// The ADC converts V_rf with ADC_GAIN ADC codes per DAC code: 0.375 stands for
// a 4 V ADC full scale against the 1.5 V DAC full scale. The gate sees g = dac_data + vg_ext, where vg_ext is the external gate signal
// (the DC offset from the operating point plus any fluctuation the sensor should
// detect). The gate line is a single-pole low-pass with coefficient GATE_ALPHA
// per 10 ns clock (0.5 is about 11 MHz). The sensor response is the pinch-off
// step of the reflectometry signal, modelled as
//     V_rf = AMP * tanh(g_filtered / WIDTH)
// which saturates at +-AMP (20 mV = 437 codes) and has unit slope at g = 0.
// V_rf is then scaled by ADC_GAIN. LAT clocks of converter latency (100 ns) and optional uniform noise of
// +-NOISE codes are added. adc_data is updated every clock.
module plant_model #(
  parameter int  LAT        = 10,
  parameter real AMP        = 437.0,
  parameter real WIDTH      = 437.0,
  parameter real GATE_ALPHA = 0.5,
  parameter real ADC_GAIN   = 0.375,
  parameter int  NOISE      = 0
) (
  input  logic               clk,
  input  logic signed [15:0] dac_data,
  input  int                 vg_ext,
  output logic signed [15:0] adc_data
);

  real gate = 0.0;
  logic signed [15:0] pipe [LAT];

  initial foreach (pipe[i]) pipe[i] = '0;

  always @(posedge clk) begin
    real vrf;
    int  n;
    gate = gate + GATE_ALPHA * (real'(int'(dac_data) + vg_ext) - gate);
    vrf  = ADC_GAIN * AMP * $tanh(gate / WIDTH);
    n    = (NOISE > 0) ? ($urandom_range(0, 2 * NOISE) - NOISE) : 0;
    for (int i = LAT - 1; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= 16'($rtoi(vrf + (vrf >= 0.0 ? 0.5 : -0.5)) + n);
  end

  assign adc_data = pipe[LAT-1];

endmodule
