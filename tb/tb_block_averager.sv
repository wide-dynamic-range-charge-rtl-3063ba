// tb_block_averager: feeds blocks of samples and compares each average with the
// exact mean (within half a code plus the reciprocal's rounding), checks that
// exactly one average leaves per avg_len inputs, one clock after the last one,
// and covers the T_S = 90 ns setting (9 samples), 4 samples and 1 sample.
module tb_block_averager;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] in_data = '0;
  logic [7:0] avg_len = 8'd9;
  logic [16:0] avg_recip = 17'd7282;
  logic out_valid;
  logic signed [15:0] out_data;
  int checks = 0, failures = 0, outputs = 0;

  always #5 clk = ~clk;

  block_averager dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && out_valid) outputs++;

  // One block of n samples with amplitude limit lim; gaps between samples.
  task automatic block(input int n, input int lim, input bit gaps);
    longint sum;
    real mean, diff, tol;
    int x;
    sum = 0;
    for (int i = 0; i < n; i++) begin
      x = int'($signed(16'($urandom))) % (lim + 1);
      sum += longint'(x);
      @(negedge clk); in_data = 16'(x); in_valid = 1'b1;
      @(negedge clk); in_valid = 1'b0;
      if (i < n - 1) check(!out_valid, "no output inside a block");
      if (gaps && i < n - 1) repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    check(out_valid, "output one clock after the last sample");
    mean = real'(sum) / real'(n);
    diff = real'(out_data) - mean;
    // the reciprocal round(65536/9) is 3e-5 too large: allow for it
    tol = 0.51 + (mean < 0.0 ? -mean : mean) * 3.1e-5;
    check(diff <= tol && diff >= -tol,
          $sformatf("n=%0d out=%0d mean=%f", n, out_data, mean));
  endtask

  initial begin
    int n_before;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    avg_len = 8'd9; avg_recip = 17'd7282;
    repeat (2) @(negedge clk);
    n_before = outputs;
    for (int b = 0; b < 60; b++) block(9, (b < 30) ? 500 : 32767, b[0]);
    repeat (2) @(negedge clk);
    check(outputs - n_before == 60, "one output per 9 samples");
    // constant input averages to itself
    for (int i = 0; i < 9; i++) begin
      @(negedge clk); in_data = -16'sd437; in_valid = 1'b1;
    end
    @(negedge clk); in_valid = 1'b0;
    check(out_data == -16'sd437 && out_valid, "constant -437");
    avg_len = 8'd4; avg_recip = 17'd16384;
    for (int b = 0; b < 40; b++) block(4, 32767, 1'b0);
    avg_len = 8'd1; avg_recip = 17'd65536;
    repeat (2) @(negedge clk);
    n_before = outputs;
    for (int b = 0; b < 40; b++) block(1, 32767, 1'b0);
    repeat (2) @(negedge clk);
    check(outputs - n_before == 40, "pass-through with one sample");
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
