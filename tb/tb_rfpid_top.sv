// tb_rfpid_top: end-to-end test of the feedback loop at its default settings
// (the published PID coefficients, 5 MHz low-pass, 9-sample average) closed
// through the behavioural sensor model. It exercises, and counts:
//   * PID off: a -10 mV synthesized step shows up in V_rf, u stays 0;
//   * PID on: the same step is cancelled, V_rf returns to the set point and
//     u settles at +10 mV; the recovery time tau is measured and bounded;
//   * the u update rate: one PID update per 9 samples (T_S = 90 ns);
//   * a set-point change to V_s = 16 mV;
//   * a gate offset beyond the 1.5 V range of u: u saturates and the DAC clips;
//   * the trial trigger of the pulse generator.
module tb_rfpid_top;
  import rfpid_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  cfg_t    cfg;
  logic    adc_valid = 1'b1;
  sample_t adc_data;
  sample_t dac_data;
  logic    dac_clipped, vrf_valid, u_valid, u_sat, trial_start;
  sample_t vrf_mon, u_mon, vn_mon;
  logic signed [ERR_W-1:0] err_mon;
  int      vg_ext = 0;

  int checks = 0, failures = 0;
  int n_pid_off = 0, n_compensated = 0, n_setpoint = 0, n_u_sat = 0, n_clip = 0,
      n_trials = 0, n_rate_ok = 0;
  int last_u_valid = -1, cyc = 0;

  localparam int STEP = 218;          // 10 mV in codes
  localparam int VS16 = 131;          // 16 mV in ADC codes (4 V full scale)

  always #5 clk = ~clk;               // 100 MHz, one ADC sample per clock

  rfpid_top dut (.*);
  plant_model #(.NOISE(2)) plant (.clk, .dac_data, .vg_ext, .adc_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && trial_start) n_trials++;
    if (rst_n && u_valid && cfg.pid_en) begin
      if (last_u_valid >= 0) begin
        if (cyc - last_u_valid == int'(cfg.avg_len)) n_rate_ok++;
        else if (cyc - last_u_valid < 100) begin
          failures++; $display("FAIL u update interval %0d", cyc - last_u_valid);
        end
      end
      last_u_valid <= cyc;
    end
    if (rst_n && u_sat) n_u_sat++;
    if (rst_n && dac_clipped) n_clip++;
  end

  // Mean of the averaged V_rf (or u) over n of its updates.
  task automatic mean_vrf(input int n, output real m);
    m = 0.0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk iff vrf_valid);
      m += real'(vrf_mon);
    end
    m /= n;
  endtask

  // One trial of the step: returns the minimum V_rf during it and tau in ns.
  task automatic step_trial(output int vmin, output int tau_ns, output int u_end);
    int t_step, t_min, dev;
    bit returned;
    vmin = 32767; tau_ns = -1; returned = 1'b0; t_step = -1; t_min = 0;
    @(posedge clk iff trial_start);
    // the step starts dist_delay clocks after the trial trigger
    while (vn_mon == 0) @(posedge clk);
    t_step = cyc;
    while (vn_mon != 0) begin
      @(posedge clk);
      if (vrf_valid) begin
        if (int'(vrf_mon) < vmin) begin vmin = int'(vrf_mon); t_min = cyc; end
      end
      u_end = int'(u_mon);
    end
    // second pass over the stored trace is not needed: tau is the time from the
    // step to V_rf back within 10 % of the largest deviation; recompute on the
    // next trial with the known minimum.
    dev = int'(cfg.vs) - vmin;
    @(posedge clk iff trial_start);
    while (vn_mon == 0) @(posedge clk);
    t_step = cyc;
    while (vn_mon != 0) begin
      @(posedge clk);
      if (vrf_valid && cyc > t_step + 5 && !returned) begin
        if (int'(vrf_mon) <= int'(cfg.vs) - dev / 2) t_min = cyc;  // past the fall
        if (cyc > t_min && t_min > t_step &&
            int'(vrf_mon) >= int'(cfg.vs) - dev / 10) begin
          tau_ns = (cyc - t_step) * 10;
          returned = 1'b1;
        end
      end
    end
  endtask

  initial begin
    real m;
    int vmin, tau_ns, u_end;
    cfg = '0;
    cfg.pid_en      = 1'b0;
    cfg.vs          = '0;
    cfg.gp          = GP_DEFAULT;
    cfg.gi          = GI_DEFAULT;
    cfg.gd          = GD_DEFAULT;
    cfg.d           = D_DEFAULT;
    cfg.lpf_alpha   = LPF_ALPHA_DEFAULT;
    cfg.avg_len     = AVG_LEN_DEFAULT;
    cfg.avg_recip   = AVG_RECIP_DEFAULT;
    cfg.dist_en     = 1'b0;
    cfg.dist_amp    = -16'(STEP);
    cfg.dist_delay  = 32'd1000;       // 10 us after the trial trigger
    cfg.dist_width  = 32'd1500;       // 15 us of step
    cfg.dist_period = 32'd3000;       // 30 us per trial
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (500) @(posedge clk);
    mean_vrf(50, m);
    check(m > -5.0 && m < 5.0, $sformatf("idle V_rf %f", m));

    // PID off: the step appears in V_rf
    cfg.dist_en = 1'b1;
    step_trial(vmin, tau_ns, u_end);
    $display("PID off: V_rf minimum %0d codes, u %0d", vmin, u_end);
    check(vmin < -65 && vmin > -85, "uncompensated dip about -9 mV");
    check(u_end == 0, "u stays 0 with the PID off");
    if (vmin < -65 && u_end == 0) n_pid_off++;

    // PID on, V_s = 0
    cfg.pid_en = 1'b1;
    repeat (2) step_trial(vmin, tau_ns, u_end);
    $display("PID on: V_rf minimum %0d, tau %0d ns, u during step %0d", vmin, tau_ns, u_end);
    check(tau_ns > 0 && tau_ns < 10000, "step recovered within 10 us");
    check(u_end > STEP - 20 && u_end < STEP + 20, "u settles at +10 mV");
    @(posedge clk iff vn_mon != 0);
    repeat (1200) @(posedge clk);
    mean_vrf(20, m);
    check(m > -8.0 && m < 8.0, $sformatf("V_rf back at set point: %f", m));
    if (tau_ns > 0 && m > -8.0 && m < 8.0) n_compensated++;

    // set point 16 mV
    cfg.dist_en = 1'b0;
    cfg.vs = 16'(VS16);
    repeat (3000) @(posedge clk);
    mean_vrf(50, m);
    $display("V_s = 16 mV: V_rf mean %f codes, u %0d", m, int'(u_mon));
    check(m > VS16 - 8 && m < VS16 + 8, "V_rf at the new set point");
    if (m > VS16 - 8 && m < VS16 + 8) n_setpoint++;

    // gate offset beyond the range of u: u clamps at -1.5 V, DAC clips with V_n
    cfg.vs = '0;
    vg_ext = 40000;
    cfg.dist_en = 1'b1;
    repeat (30000) @(posedge clk);
    check(int'(u_mon) == -32767, $sformatf("u clamps at full scale: %0d", int'(u_mon)));
    vg_ext = 0;
    cfg.dist_en = 1'b0;
    repeat (40000) @(posedge clk);
    mean_vrf(20, m);
    check(m > -8.0 && m < 8.0, $sformatf("loop recovers after saturation: %f", m));

    $display("mechanisms: pid_off=%0d compensated=%0d setpoint=%0d u_sat=%0d dac_clip=%0d trials=%0d ts_rate=%0d",
             n_pid_off, n_compensated, n_setpoint, n_u_sat, n_clip, n_trials, n_rate_ok);
    check(n_pid_off > 0, "PID off exercised");
    check(n_compensated > 0, "compensation exercised");
    check(n_setpoint > 0, "set-point change exercised");
    check(n_u_sat > 0, "u saturation exercised");
    check(n_clip > 0, "DAC clipping exercised");
    check(n_trials > 0, "trial trigger exercised");
    check(n_rate_ok > 100, "T_S update rate exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
