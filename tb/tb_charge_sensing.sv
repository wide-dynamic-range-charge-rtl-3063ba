// tb_charge_sensing: wide-range charge sensing. A sinusoidal gate fluctuation of
// 70 mV amplitude (larger than the +-20 mV sensitive range of the sensor)
// stands in for a charge-state change. With the PID off, V_rf clips at the
// sensor's saturation levels for a large part of each period. With the PID on,
// V_rf stays near V_s = 0 and -u reproduces the fluctuation over its full range.
// The period is 500 us, scaled down from the slow sweep of the measurement so
// that it stays well above the loop's response time.
module tb_charge_sensing;
  import rfpid_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  cfg_t    cfg;
  logic    adc_valid = 1'b1;
  sample_t adc_data, dac_data, vrf_mon, u_mon, vn_mon;
  logic    dac_clipped, vrf_valid, u_valid, u_sat, trial_start;
  logic signed [ERR_W-1:0] err_mon;
  int      vg_ext = 0;
  int      checks = 0, failures = 0;
  longint  cyc = 0;

  localparam real AMPL   = 1529.0;   // 70 mV in DAC codes
  localparam int  PERIOD = 50000;    // clocks, 500 us
  localparam real PI     = 3.141592653589793;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    vg_ext <= $rtoi(AMPL * $sin(2.0 * PI * real'(cyc % longint'(PERIOD)) / real'(PERIOD)));
  end

  rfpid_top dut (.*);
  plant_model #(.NOISE(2)) plant (.clk, .dac_data, .vg_ext, .adc_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int n, n_clip, vmax, vmin, umax, umin, worst_track, worst_vrf;
    cfg = '0;
    cfg.gp = GP_DEFAULT; cfg.gi = GI_DEFAULT; cfg.gd = GD_DEFAULT; cfg.d = D_DEFAULT;
    cfg.lpf_alpha = LPF_ALPHA_DEFAULT;
    cfg.avg_len = AVG_LEN_DEFAULT; cfg.avg_recip = AVG_RECIP_DEFAULT;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // PID off: V_rf follows the sensor curve and clips
    cfg.pid_en = 1'b0;
    n = 0; n_clip = 0; vmax = -32768; vmin = 32767;
    repeat (2 * PERIOD) begin
      @(posedge clk);
      if (vrf_valid) begin
        n++;
        if (int'(vrf_mon) > vmax) vmax = int'(vrf_mon);
        if (int'(vrf_mon) < vmin) vmin = int'(vrf_mon);
        if (int'(vrf_mon) > 150 || int'(vrf_mon) < -150) n_clip++;
      end
    end
    $display("PID off: V_rf %0d..%0d codes, clipped %0d of %0d samples", vmin, vmax, n_clip, n);
    check(vmax <= 167 && vmax > 155 && vmin >= -167 && vmin < -155, "V_rf spans the sensor range only");
    check(n_clip > n / 3, "V_rf saturated for much of the period");

    // PID on: -u tracks the fluctuation, V_rf stays at the set point
    cfg.pid_en = 1'b1;
    repeat (PERIOD / 2) @(posedge clk);
    umax = -32768; umin = 32767; worst_track = 0; worst_vrf = 0;
    repeat (2 * PERIOD) begin
      @(posedge clk);
      if (u_valid) begin
        int d;
        d = int'(u_mon) + vg_ext;
        if (d < 0) d = -d;
        if (d > worst_track) worst_track = d;
        if (int'(u_mon) > umax) umax = int'(u_mon);
        if (int'(u_mon) < umin) umin = int'(u_mon);
      end
      if (vrf_valid) begin
        int v;
        v = (int'(vrf_mon) < 0) ? -int'(vrf_mon) : int'(vrf_mon);
        if (v > worst_vrf) worst_vrf = v;
      end
    end
    $display("PID on: u %0d..%0d, worst |u + V_n| %0d codes, worst |V_rf| %0d codes",
             umin, umax, worst_track, worst_vrf);
    check(umax > 1450 && umin < -1450, "u covers the full fluctuation");
    check(worst_track < 120, "-u tracks the fluctuation");
    check(worst_vrf < 60, "V_rf held near the set point");
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
