// tb_operand_gen: checks the per-lane pseudo-random operand source against a
// testbench copy of xorshift32, including restart to the seed mid-sequence
// and holding when not advanced.
module tb_operand_gen;
  localparam logic [31:0] SEED = 32'hDEAD_BEEF;
  logic clk = 1'b0, rst_n = 1'b0, restart = 1'b0, advance = 1'b0;
  logic [15:0] a, b;
  int checks = 0, failures = 0;
  logic [31:0] x;

  operand_gen #(.SEED(SEED)) dut (.*);
  always #5 clk = !clk;

  function automatic logic [31:0] step(input logic [31:0] v);
    v = v ^ (v << 13);
    v = v ^ (v >> 17);
    v = v ^ (v << 5);
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    x = SEED;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks++;
      if ({a, b} !== x) begin failures++; $display("FAIL n=%0d got %h exp %h", n, {a, b}, x); end
      advance = ($urandom_range(0, 3) != 0);
      restart = ($urandom_range(0, 299) == 0);
      @(posedge clk); #1;
      if (restart) x = SEED; else if (advance) x = step(x);
    end
    // known first values of the sequence
    @(negedge clk); restart = 1'b1; advance = 1'b0; @(negedge clk); restart = 1'b0;
    checks++; if ({a, b} !== SEED) failures++;
    advance = 1'b1; @(negedge clk); advance = 1'b0;
    checks++; if ({a, b} !== step(SEED)) failures++;
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
