// tb_mac_benchmark: the DSP-block error test at reduced size (4 lanes, 50
// products, 3 runs). The testbench computes every lane's expected sum from
// its own copy of the operand generator and seed rule, then runs three tests:
// all expected values right (no errors), one lane wrong (one error per run)
// and two lanes wrong. It checks the error count, the failed-lane mask, the
// MAC count, the lane results and the test duration of
// NUM_RUNS * (ACC_LEN + 4) + 1 cycles.
module tb_mac_benchmark;
  localparam int NM = 4, AL = 50, NR = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic exp_we = 1'b0, start = 1'b0;
  logic [1:0]  exp_lane = '0;
  logic [47:0] exp_data = '0;
  logic busy, done;
  logic [15:0] err_count;
  logic [NM-1:0] lane_err;
  logic [31:0] mac_count;
  logic [47:0] lane_acc [NM];
  int checks = 0, failures = 0;
  logic [47:0] expv [NM];

  mac_benchmark #(.NUM_MAC(NM), .ACC_LEN(AL), .NUM_RUNS(NR)) dut (.*);
  always #5 clk = !clk;

  function automatic logic [31:0] step(input logic [31:0] v);
    v = v ^ (v << 13); v = v ^ (v >> 17); v = v ^ (v << 5);
    return v;
  endfunction

  function automatic logic [47:0] ref_sum(input int lane);
    logic [31:0] x = 32'h2545_F491 ^ (32'(lane + 1) * 32'h9E37_79B9);
    longint s = 0;
    for (int k = 0; k < AL; k++) begin
      s += longint'($signed(x[31:16])) * longint'($signed(x[15:0]));
      x = step(x);
    end
    return 48'(s);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write_exp(input int lane, input logic [47:0] v);
    @(negedge clk); exp_we = 1'b1; exp_lane = 2'(lane); exp_data = v;
    @(negedge clk); exp_we = 1'b0;
  endtask

  task automatic run_test(input logic [NM-1:0] bad);
    int cycles = 0;
    for (int i = 0; i < NM; i++) write_exp(i, bad[i] ? expv[i] ^ 48'h1 : expv[i]);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    check(cycles == NR * (AL + 4) + 1, $sformatf("duration %0d", cycles));
    check(err_count == 16'(NR * $countones(bad)), $sformatf("err_count %0d", err_count));
    check(lane_err == bad, $sformatf("lane_err %b", lane_err));
    check(mac_count == 32'(NM * AL * NR), $sformatf("mac_count %0d", mac_count));
    check(!busy, "busy after done");
    for (int i = 0; i < NM; i++) check(lane_acc[i] == expv[i], $sformatf("lane_acc[%0d]", i));
  endtask

  initial begin
    for (int i = 0; i < NM; i++) expv[i] = ref_sum(i);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run_test('0);
    run_test(4'b1000);
    run_test(4'b0101);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
