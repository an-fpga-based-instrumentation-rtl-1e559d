// tb_clock_gen: measures the derived timing. ser_tick must pulse for exactly
// one clock every SER_DIV clocks; ls_clk must be a square wave of period
// 2*LS_HALF clocks; ls_fall must be high exactly in the cycle before each
// falling edge of ls_clk.
module tb_clock_gen;
  localparam int SD = 7, LH = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ser_tick, ls_clk, ls_fall;
  int checks = 0, failures = 0;

  clock_gen #(.SER_DIV(SD), .LS_HALF(LH)) dut (.*);
  always #5 clk = !clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int last_tick = -1, last_rise = -1, last_fall = -1;
    logic prev_clk, prev_fall;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    prev_clk = ls_clk; prev_fall = ls_fall;
    for (int c = 0; c < 500; c++) begin
      @(posedge clk); #1;
      if (ser_tick) begin
        if (last_tick >= 0) check(c - last_tick == SD, $sformatf("tick period %0d", c - last_tick));
        last_tick = c;
      end
      if (ls_clk && !prev_clk) begin
        if (last_rise >= 0) check(c - last_rise == 2 * LH, "ls_clk period");
        if (last_fall >= 0) check(c - last_fall == LH, "ls_clk high/low time");
        last_rise = c;
      end
      if (!ls_clk && prev_clk) begin
        check(prev_fall, "ls_fall before falling edge");
        if (last_rise >= 0) check(c - last_rise == LH, "ls_clk high time");
        last_fall = c;
      end else begin
        check(!prev_fall, "ls_fall without falling edge");
      end
      prev_clk = ls_clk; prev_fall = ls_fall;
    end
    check(last_tick > 0 && last_rise > 0 && last_fall > 0, "all outputs toggled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
