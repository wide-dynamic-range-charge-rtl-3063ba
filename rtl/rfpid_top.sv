// rfpid_top: FPGA feedback loop that holds an rf-reflectometry charge sensor at
// its operating point and reports the control signal as the sensor output.
//
// Signal path, one clock = one digitizer sample (100 MS/s):
//   ADC code V_rf -> lpf_iir (5 MHz low-pass) -> block_averager (avg_len samples,
//   sets T_S) -> err_junction (e = V_s - V_rf) -> pid_controller (u(n)) ->
//   dist_adder (u + V_n from pulse_gen) -> DAC code.
// The DAC output is added to the DC gate voltage outside the FPGA, so u moves the
// sensor's gate to cancel whatever shifted it; monitoring u then measures that
// shift over the full +-1.5 V DAC range while V_rf stays at the set point.
// The order of the filter, the averager and the error junction ahead of the PID
// and the monitor outputs are this design's choices; the rest follows the loop's
// block diagram.
//
// Interface: adc_valid/adc_data carry digitizer samples; cfg holds the runtime
// settings (rfpid_pkg::cfg_t), written by the host. dac_data is updated every
// clock. The monitor outputs give the averaged V_rf and the error at the PID rate
// and u with u_valid, for recording by the host, plus status flags.
// Latency from the sample that completes an average to the DAC code is 6 clocks
// (filter 1, averager 1, junction 1, PID 2, adder 1), within one T_S = 9 clocks.
// Synchronous active-low reset.
module rfpid_top
  import rfpid_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_t    cfg,
  input  logic    adc_valid,
  input  sample_t adc_data,
  output sample_t dac_data,
  output logic    dac_clipped,
  output logic    vrf_valid,
  output sample_t vrf_mon,
  output logic signed [ERR_W-1:0] err_mon,
  output logic    u_valid,
  output sample_t u_mon,
  output logic    u_sat,
  output sample_t vn_mon,
  output logic    trial_start
);

  logic    lpf_valid;
  sample_t lpf_data;
  logic    avg_valid;
  sample_t avg_data;
  logic    err_valid;
  logic signed [ERR_W-1:0] err;

  lpf_iir #(.DATA_W(DATA_W), .ALPHA_W(ALPHA_W), .FRAC(16)) u_lpf (
    .clk, .rst_n,
    .in_valid (adc_valid),
    .in_data  (adc_data),
    .alpha    (cfg.lpf_alpha),
    .out_valid(lpf_valid),
    .out_data (lpf_data)
  );

  block_averager #(.DATA_W(DATA_W), .LEN_W(AVG_LEN_W), .RECIP_W(RECIP_W)) u_avg (
    .clk, .rst_n,
    .in_valid (lpf_valid),
    .in_data  (lpf_data),
    .avg_len  (cfg.avg_len),
    .avg_recip(cfg.avg_recip),
    .out_valid(avg_valid),
    .out_data (avg_data)
  );

  err_junction #(.DATA_W(DATA_W)) u_err (
    .clk, .rst_n,
    .in_valid (avg_valid),
    .vrf      (avg_data),
    .vs       (cfg.vs),
    .out_valid(err_valid),
    .err      (err)
  );

  pid_controller #(.ERR_W(ERR_W), .OUT_W(DATA_W), .COEF_W(COEF_W),
                   .COEF_FRAC(COEF_FRAC)) u_pid (
    .clk, .rst_n,
    .en       (cfg.pid_en),
    .gp       (cfg.gp),
    .gi       (cfg.gi),
    .gd       (cfg.gd),
    .d        (cfg.d),
    .in_valid (err_valid),
    .err      (err),
    .out_valid(u_valid),
    .u_out    (u_mon),
    .u_sat    (u_sat)
  );

  pulse_gen #(.DATA_W(DATA_W), .CNT_W(CNT_W)) u_pulse (
    .clk, .rst_n,
    .en         (cfg.dist_en),
    .amp        (cfg.dist_amp),
    .delay      (cfg.dist_delay),
    .width      (cfg.dist_width),
    .period     (cfg.dist_period),
    .vn         (vn_mon),
    .trial_start(trial_start)
  );

  dist_adder #(.DATA_W(DATA_W)) u_out (
    .clk, .rst_n,
    .u       (u_mon),
    .vn      (vn_mon),
    .dac_data(dac_data),
    .clipped (dac_clipped)
  );

  assign vrf_valid = avg_valid;
  assign vrf_mon   = avg_data;
  assign err_mon   = err;

endmodule
