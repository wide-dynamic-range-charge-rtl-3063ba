// tb_lpf_iir: compares the filter with a floating-point single-pole model
// (tolerance one code), checks the pass-through setting, the step response time
// constant for the 5 MHz setting and the one-clock latency.
module tb_lpf_iir;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] in_data = '0;
  logic [16:0] alpha = 17'd65536;
  logic out_valid;
  logic signed [15:0] out_data;
  int checks = 0, failures = 0;
  real yref;

  always #5 clk = ~clk;

  lpf_iir dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Push one sample, advance the reference, compare after one clock.
  task automatic push(input int x);
    real a, diff;
    a = real'(alpha) / 65536.0;
    yref = yref + a * (real'(x) - yref);
    @(negedge clk); in_data = 16'(x); in_valid = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    check(out_valid, "valid one clock after input");
    diff = real'(out_data) - yref;
    check(diff <= 1.0 && diff >= -1.0,
          $sformatf("x=%0d out=%0d ref=%f", x, out_data, yref));
  endtask

  initial begin
    int n63;
    yref = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // bypass: output equals input exactly
    alpha = 17'd65536;
    for (int i = 0; i < 50; i++) begin
      int x;
      x = int'($signed(16'($urandom)));
      push(x);
      check(int'(out_data) == x, "bypass exact");
    end
    // 5 MHz setting at 100 MS/s: step of 1000 codes
    alpha = 17'd17668;
    for (int i = 0; i < 40; i++) push(0);
    n63 = -1;
    for (int i = 0; i < 40; i++) begin
      push(1000);
      if (n63 < 0 && out_data >= 632) n63 = i + 1;
    end
    // time constant 1/(2*pi*5 MHz) = 31.8 ns, about 3 samples (3.2 with this alpha)
    check(n63 >= 3 && n63 <= 4, $sformatf("63%% after %0d samples", n63));
    check(out_data >= 999 && out_data <= 1000, "settles to the step");
    // random data with gaps between samples
    for (int i = 0; i < 300; i++) begin
      push(int'($signed(16'($urandom))) / 4);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // extreme values
    alpha = 17'd40000;
    for (int i = 0; i < 30; i++) push(32767);
    for (int i = 0; i < 30; i++) push(-32768);
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
