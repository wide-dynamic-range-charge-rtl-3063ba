// tb_pulse_gen: runs the repeated step over several trials and compares every
// clock with a reference built from the clock count since enable; also checks
// the trial trigger, disable behaviour and a reconfiguration.
module tb_pulse_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0;
  logic signed [15:0] amp = '0;
  logic [31:0] delay = '0, width = '0, period = '0;
  logic signed [15:0] vn;
  logic trial_start;
  int checks = 0, failures = 0, trials = 0, steps = 0;

  always #5 clk = ~clk;

  pulse_gen dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run n_cycles clocks with the generator enabled and compare each clock.
  task automatic run(input int a_amp, input int a_delay, input int a_width,
                     input int a_period, input int n_cycles);
    int p;
    bit prev_on;
    @(negedge clk);
    en = 1'b0; amp = 16'(a_amp); delay = a_delay; width = a_width; period = a_period;
    @(negedge clk);
    check(vn == 0 && trial_start == 1'b0, "idle while disabled");
    en = 1'b1;
    prev_on = 1'b0;
    for (int t = 0; t < n_cycles; t++) begin
      @(negedge clk);
      p = t % a_period;
      check(int'(vn) == ((p >= a_delay && p < a_delay + a_width) ? a_amp : 0),
            $sformatf("t=%0d vn=%0d", t, vn));
      check(trial_start == (p == 0), $sformatf("t=%0d trial_start", t));
      if (trial_start) trials++;
      if (vn != 0 && !prev_on) steps++;
      prev_on = (vn != 0);
    end
    en = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 10 us before a -10 mV step lasting 10 us in a 25 us trial, in clocks at 100 MHz
    // would be long; the same shape is checked at 1/50 scale.
    run(-218, 20, 20, 50, 200);
    check(trials == 4 && steps == 4, $sformatf("trials=%0d steps=%0d", trials, steps));
    run(655, 3, 1, 7, 50);
    run(-32768, 0, 5, 8, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
