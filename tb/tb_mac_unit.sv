// tb_mac_unit: self-checking test of one multiply-accumulate lane.
// Random signed operand pairs, with random gaps and random accumulation
// restarts, are fed to mac_unit. A reference accumulator in the testbench
// predicts the result; it must appear exactly 3 cycles after the pair, with
// acc_valid, as the registered DSP-style pipeline promises.
module tb_mac_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0;
  logic signed [15:0] a = '0, b = '0;
  logic signed [47:0] acc;
  logic acc_valid;
  int checks = 0, failures = 0;

  mac_unit #(.OP_W(16), .ACC_W(48)) dut (.*);

  always #5 clk = !clk;

  // reference: expected accumulator and valid, delayed by the pipeline depth
  logic signed [47:0] ref_acc = '0;
  logic signed [47:0] exp_q [4];
  logic               expv_q [4];

  initial begin
    for (int i = 0; i < 4; i++) begin exp_q[i] = '0; expv_q[i] = 1'b0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 9) != 0);
      in_first = (n == 0) || ($urandom_range(0, 99) == 0);
      // include the extreme operands now and then
      a = ($urandom_range(0, 19) == 0) ? 16'sh8000 : 16'($urandom);
      b = ($urandom_range(0, 19) == 0) ? 16'sh8000 : 16'($urandom);
      if (in_valid) ref_acc = in_first ? 48'(a * b) : ref_acc + 48'(32'(a) * 32'(b));
      @(posedge clk);
      #1;
      // shift the reference pipeline after the clock edge
      for (int i = 3; i > 0; i--) begin exp_q[i] = exp_q[i-1]; expv_q[i] = expv_q[i-1]; end
      exp_q[0] = ref_acc; expv_q[0] = in_valid;
      // check the value presented 3 edges ago (index 2 after this shift)
      if (n >= 3) begin
        checks++;
        if (acc_valid !== expv_q[2]) begin
          failures++; $display("FAIL n=%0d acc_valid=%b exp=%b", n, acc_valid, expv_q[2]);
        end
        if (expv_q[2]) begin
          checks++;
          if (acc !== exp_q[2]) begin
            failures++; $display("FAIL n=%0d acc=%0d exp=%0d", n, acc, exp_q[2]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
