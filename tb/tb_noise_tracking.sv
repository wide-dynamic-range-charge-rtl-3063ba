// tb_noise_tracking: low-frequency noise suppression and noise monitoring via u.
// A slow random gate fluctuation (a first-order Gauss-Markov process with a
// 1 ms correlation time, i.e. a noise corner near 160 Hz, well below the
// loop bandwidth) is applied to the sensor model together with its white
// readout noise. With the PID off the fluctuation appears in V_rf; with the PID
// on V_rf is held at V_s = 0, its standard deviation drops, and -u carries the
// fluctuation: its standard deviation matches that of the applied noise and the
// two are strongly correlated. This is the time-domain counterpart of comparing
// the noise spectra of V_rf (PID on and off) and of u.
module tb_noise_tracking;
  import rfpid_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  cfg_t    cfg;
  logic    adc_valid = 1'b1;
  sample_t adc_data, dac_data, vrf_mon, u_mon, vn_mon;
  logic    dac_clipped, vrf_valid, u_valid, u_sat, trial_start;
  logic signed [ERR_W-1:0] err_mon;
  int      vg_ext = 0;
  int      checks = 0, failures = 0;
  real     noise = 0.0;

  localparam real SIGMA = 30.0;       // stationary gate noise, DAC codes (1.4 mV)
  localparam real RHO   = 0.99999;    // exp(-10 ns / 1 ms) per clock: 1 ms correlation
  localparam int  N     = 300000;     // clocks per measurement (3 ms)

  always #5 clk = ~clk;

  // Gauss-Markov noise: x += (1-rho)(-x) + sigma*sqrt(1-rho^2)*gaussian
  always @(posedge clk) begin
    real g;
    g = 0.0;
    for (int i = 0; i < 12; i++) g += real'($urandom_range(0, 65535)) / 65536.0;
    g -= 6.0;                         // approximately unit-variance Gaussian
    noise = RHO * noise + SIGMA * $sqrt(1.0 - RHO * RHO) * g;
    vg_ext <= $rtoi(noise);
  end

  rfpid_top dut (.*);
  plant_model #(.NOISE(2)) plant (.clk, .dac_data, .vg_ext, .adc_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Standard deviations of V_rf, of u, of the applied noise, and corr(-u, noise).
  task automatic measure(output real s_vrf, output real s_u, output real s_n, output real corr);
    real sv, svv, su, suu, sn, snn, sun;
    int  nv, nu;
    sv = 0; svv = 0; su = 0; suu = 0; sn = 0; snn = 0; sun = 0; nv = 0; nu = 0;
    repeat (N) begin
      @(posedge clk);
      if (vrf_valid) begin
        nv++; sv += real'(vrf_mon); svv += real'(vrf_mon) * real'(vrf_mon);
      end
      if (u_valid) begin
        real x, y;
        x = -real'(u_mon); y = real'(vg_ext);
        nu++; su += x; suu += x * x; sn += y; snn += y * y; sun += x * y;
      end
    end
    s_vrf = $sqrt(svv / nv - (sv / nv) * (sv / nv));
    if (nu > 1) begin
      real vu, vn2, cov;
      vu  = suu / nu - (su / nu) * (su / nu);
      vn2 = snn / nu - (sn / nu) * (sn / nu);
      cov = sun / nu - (su / nu) * (sn / nu);
      s_u = $sqrt(vu); s_n = $sqrt(vn2);
      corr = (vu > 0.0 && vn2 > 0.0) ? cov / $sqrt(vu * vn2) : 0.0;
    end else begin
      s_u = 0.0; s_n = 0.0; corr = 0.0;
    end
  endtask

  // D from T_S = 90 ns and T_F = 5 ns, as the host computes it.
  function automatic real d_from(input real ts, input real tf);
    return (ts - 2.0 * tf) / (ts + 2.0 * tf);
  endfunction

  initial begin
    real s_vrf_off, s_vrf_on, s_u, s_n, corr, dummy;
    cfg = '0;
    cfg.gp = GP_DEFAULT; cfg.gi = GI_DEFAULT; cfg.gd = GD_DEFAULT; cfg.d = D_DEFAULT;
    cfg.lpf_alpha = LPF_ALPHA_DEFAULT;
    cfg.avg_len = AVG_LEN_DEFAULT; cfg.avg_recip = AVG_RECIP_DEFAULT;
    check($rtoi(d_from(90.0, 5.0) * 65536.0 + 0.5) == int'(D_DEFAULT), "default D matches T_S, T_F");
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    cfg.pid_en = 1'b0;
    repeat (20000) @(posedge clk);
    measure(s_vrf_off, s_u, s_n, dummy);
    $display("PID off: sigma V_rf %f ADC codes", s_vrf_off);
    check(u_mon == 0 && !u_valid, "u idle with the PID off");

    cfg.pid_en = 1'b1;
    repeat (20000) @(posedge clk);
    measure(s_vrf_on, s_u, s_n, corr);
    $display("PID on:  sigma V_rf %f, sigma u %f, applied sigma %f, corr(-u, noise) %f",
             s_vrf_on, s_u, s_n, corr);
    check(s_vrf_off > 3.0, "noise visible in V_rf with the PID off");
    check(s_vrf_on < 0.5 * s_vrf_off, "PID suppresses the slow noise in V_rf");
    check(s_u > 0.8 * s_n && s_u < 1.2 * s_n, "sigma of u matches the applied noise");
    check(corr > 0.95, "-u follows the noise");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
