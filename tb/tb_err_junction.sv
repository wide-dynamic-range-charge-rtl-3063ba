// tb_err_junction: checks e = V_s - V_rf for random and extreme codes, the
// one-clock latency and that the output holds when no sample arrives.
module tb_err_junction;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] vrf = '0, vs = '0;
  logic out_valid;
  logic signed [16:0] err;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  err_junction dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic apply(input int a_vs, input int a_vrf);
    int expect_e;
    expect_e = a_vs - a_vrf;
    @(negedge clk); vs = 16'(a_vs); vrf = 16'(a_vrf); in_valid = 1'b1;
    @(negedge clk); in_valid = 1'b0;
    check(out_valid == 1'b1, "valid after one clock");
    check(int'(err) == expect_e, $sformatf("e=%0d expected %0d", err, expect_e));
    @(negedge clk);
    check(out_valid == 1'b0, "valid is a single pulse");
    check(int'(err) == expect_e, "error holds between samples");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    apply(0, 0);
    apply(349, 0);
    apply(0, -437);
    apply(32767, -32768);
    apply(-32768, 32767);
    repeat (200) apply(int'($signed(16'($urandom))), int'($signed(16'($urandom))));
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
