// tb_step_response: the step-response sweep of the loop. For set points V_s = 0
// and 16 mV and step amplitudes of 10, 20 and 30 mV, a synthesized step is
// applied through the pulse generator with the published PID setting, and the
// testbench checks that u takes over the step, that V_rf returns to V_s, and
// measures the recovery time tau (step to V_rf back within 10 % of its largest
// deviation). The sensor is the behavioural plant model, so the tau values
// depend on that model and are reported, not compared with measured ones.
module tb_step_response;
  import rfpid_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  cfg_t    cfg;
  logic    adc_valid = 1'b1;
  sample_t adc_data, dac_data, vrf_mon, u_mon, vn_mon;
  logic    dac_clipped, vrf_valid, u_valid, u_sat, trial_start;
  logic signed [ERR_W-1:0] err_mon;
  int      vg_ext = 0;
  int      checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  rfpid_top dut (.*);
  plant_model #(.NOISE(2)) plant (.clk, .dac_data, .vg_ext, .adc_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run one trial; return the extreme V_rf deviation, tau and u at step end.
  task automatic trial(input int dev_in, output int dev, output int tau_ns,
                       output int u_end, output int vrf_end);
    int t_step;
    bit fallen, returned;
    dev = 0; tau_ns = -1; fallen = 1'b0; returned = 1'b0;
    @(posedge clk iff trial_start);
    while (vn_mon == 0) @(posedge clk);
    t_step = cyc;
    while (vn_mon != 0) begin
      @(posedge clk);
      if (vrf_valid) begin
        if (int'(cfg.vs) - int'(vrf_mon) > dev) dev = int'(cfg.vs) - int'(vrf_mon);
        if (dev_in > 0 && !fallen && int'(cfg.vs) - int'(vrf_mon) >= dev_in / 2) fallen = 1'b1;
        if (fallen && !returned && int'(cfg.vs) - int'(vrf_mon) <= dev_in / 10) begin
          tau_ns = (cyc - t_step) * 10;
          returned = 1'b1;
        end
        vrf_end = int'(vrf_mon);
      end
      u_end = int'(u_mon);
    end
  endtask

  initial begin
    static int vs_list[2] = '{0, 131};            // 0 and 16 mV in ADC codes
    static int dv_list[3] = '{218, 437, 655};     // 10, 20, 30 mV in DAC codes
    int dev, tau_ns, u_end, vrf_end, u_before;
    cfg = '0;
    cfg.gp = GP_DEFAULT; cfg.gi = GI_DEFAULT; cfg.gd = GD_DEFAULT; cfg.d = D_DEFAULT;
    cfg.lpf_alpha = LPF_ALPHA_DEFAULT;
    cfg.avg_len = AVG_LEN_DEFAULT; cfg.avg_recip = AVG_RECIP_DEFAULT;
    cfg.dist_delay = 32'd1000; cfg.dist_width = 32'd3000; cfg.dist_period = 32'd5000;
    cfg.pid_en = 1'b1;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    foreach (vs_list[i]) begin
      cfg.vs = 16'(vs_list[i]);
      cfg.dist_en = 1'b0;
      repeat (5000) @(posedge clk);
      foreach (dv_list[j]) begin
        u_before = int'(u_mon);
        cfg.dist_amp = -16'(dv_list[j]);
        cfg.dist_en = 1'b1;
        trial(0, dev, tau_ns, u_end, vrf_end);          // finds the deviation
        trial(dev, dev, tau_ns, u_end, vrf_end);        // measures tau
        cfg.dist_en = 1'b0;
        $display("V_s=%0d codes  dV=%0d codes  max dev=%0d  tau=%0d ns  du=%0d",
                 vs_list[i], dv_list[j], dev, tau_ns, u_end - u_before);
        check(tau_ns > 0 && tau_ns < 25000, "recovered within the step");
        check(u_end - u_before > dv_list[j] - 30 && u_end - u_before < dv_list[j] + 30,
              "u takes over the step");
        check(vrf_end > vs_list[i] - 10 && vrf_end < vs_list[i] + 10, "V_rf back at V_s");
        repeat (3000) @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
