// tb_dist_adder: checks dac = sat(u + V_n) against an integer reference for
// random and overflowing inputs, the clip flag and the one-clock latency.
module tb_dist_adder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [15:0] u = '0, vn = '0;
  logic signed [15:0] dac_data;
  logic clipped;
  int checks = 0, failures = 0, clips = 0;

  always #5 clk = ~clk;

  dist_adder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic apply(input int a_u, input int a_vn);
    int s, expect_d;
    bit expect_c;
    s = a_u + a_vn;
    expect_c = (s > 32767) || (s < -32768);
    expect_d = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
    @(negedge clk); u = 16'(a_u); vn = 16'(a_vn);
    @(negedge clk);
    check(int'(dac_data) == expect_d, $sformatf("u=%0d vn=%0d dac=%0d expected %0d",
                                                a_u, a_vn, dac_data, expect_d));
    check(clipped == expect_c, "clip flag");
    if (clipped) clips++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    check(dac_data == 0, "reset value");
    rst_n = 1'b1;
    apply(2183, -218);
    apply(32767, 1);
    apply(-32767, -218);
    apply(-32768, 0);
    repeat (300) apply(int'($signed(16'($urandom))), int'($signed(16'($urandom))));
    check(clips > 0, "saturation exercised");
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
