// tb_pid_controller: compares u(n) with a floating-point evaluation of the PID
// difference equations (u_P, u_I, u_D and the accumulated u) for random error
// sequences, with the published coefficients and with an integral term; checks
// the two-clock latency at the T_S rate and back to back, output saturation at
// the DAC full scale and that disabling the controller clears it.
module tb_pid_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0;
  logic signed [23:0] gp = '0, gi = '0, gd = '0, d = '0;
  logic in_valid = 1'b0;
  logic signed [16:0] err = '0;
  logic out_valid;
  logic signed [15:0] u_out;
  logic u_sat;
  int checks = 0, failures = 0;
  real r_gp, r_gi, r_gd, r_d;
  real e1, ui, ud, u;

  always #5 clk = ~clk;

  pid_controller dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic set_coef(input real a_gp, input real a_gi, input real a_gd, input real a_d);
    gp = 24'($rtoi(a_gp * 65536.0)); gi = 24'($rtoi(a_gi * 65536.0));
    gd = 24'($rtoi(a_gd * 65536.0)); d = 24'($rtoi(a_d * 65536.0));
    r_gp = real'(gp) / 65536.0; r_gi = real'(gi) / 65536.0;
    r_gd = real'(gd) / 65536.0; r_d = real'(d) / 65536.0;
  endtask

  task automatic clear_ref();
    e1 = 0.0; ui = 0.0; ud = 0.0; u = 0.0;
  endtask

  // One sample; `gap` idle clocks follow (8 gives the 90 ns T_S rhythm).
  task automatic sample(input int e, input int gap);
    real up, diff;
    up = r_gp * e;
    ui = r_gi * (e + e1) + ui;
    ud = r_gd * (e - e1) - r_d * ud;
    u  = up + ui + ud + u;
    e1 = e;
    @(negedge clk); err = 17'(e); in_valid = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    check(!out_valid, "no output after one clock");
    @(negedge clk);
    check(out_valid, "output two clocks after the sample");
    diff = real'(u_out) - u;
    check(diff <= 1.0 && diff >= -1.0, $sformatf("e=%0d u=%0d ref=%f", e, u_out, u));
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // published setting G_P=0.10, G_I=0, G_D=0.65, D=0.80 at T_S = 9 clocks
    set_coef(0.10, 0.0, 0.65, 0.80);
    clear_ref();
    en = 1'b1;
    sample(218, 7);             // an error step
    for (int i = 0; i < 20; i++) sample(218, 7);
    for (int i = 0; i < 100; i++) sample($urandom_range(0, 400) - 200, 7);
    // with an integral term, back to back samples (pipeline at one per clock)
    en = 1'b0; @(negedge clk);
    check(u_out == 0, "disabled output is 0");
    set_coef(0.25, 0.01, 0.4, -0.3);
    clear_ref();
    en = 1'b1;
    begin
      real up, diff;
      int es[64];
      foreach (es[i]) es[i] = $urandom_range(0, 600) - 300;
      // fire all samples back to back and compare as they come out
      fork
        begin
          foreach (es[i]) begin
            @(negedge clk); err = 17'(es[i]); in_valid = 1'b1;
          end
          @(negedge clk); in_valid = 1'b0;
        end
        begin
          @(negedge clk);
          @(negedge clk);
          foreach (es[i]) begin
            @(negedge clk);
            up = r_gp * es[i];
            ui = r_gi * (es[i] + e1) + ui;
            ud = r_gd * (es[i] - e1) - r_d * ud;
            u  = up + ui + ud + u;
            e1 = es[i];
            check(out_valid, "back-to-back output valid");
            diff = real'(u_out) - u;
            check(diff <= 1.0 && diff >= -1.0,
                  $sformatf("b2b e=%0d u=%0d ref=%f", es[i], u_out, u));
          end
        end
      join
    end
    // saturation: a large constant error drives u to full scale and stops there
    en = 1'b0; @(negedge clk); en = 1'b1;
    set_coef(2.0, 0.0, 0.0, 0.0);
    for (int i = 0; i < 12; i++) begin
      @(negedge clk); err = 17'sd30000; in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
      @(negedge clk);
    end
    check(u_out == 16'sd32767 && u_sat, $sformatf("positive limit u=%0d", u_out));
    // the clamped state unwinds at once when the error reverses
    @(negedge clk); err = -17'sd100; in_valid = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    @(negedge clk);
    check(u_out == 16'sd32567 && !u_sat, $sformatf("unwind u=%0d", u_out));
    for (int i = 0; i < 12; i++) begin
      @(negedge clk); err = -17'sd30000; in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
    end
    @(negedge clk);
    check(u_out == -16'sd32767 && u_sat, $sformatf("negative limit u=%0d", u_out));
    en = 1'b0; @(negedge clk); @(negedge clk);
    check(u_out == 0 && !out_valid, "PID off clears u");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
