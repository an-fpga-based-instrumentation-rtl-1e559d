// clock_gen: derived timing for the serial link and the low-speed connectors.
//
// The instrument receives one clock over coax and, since the FPGA's PLLs do not
// work at 4 K, everything else is derived from it by counters. This block makes
//  * ser_tick: a one-cycle strobe every SER_DIV clocks, the 16x oversampling
//    tick of the serial receiver and transmitter;
//  * ls_clk:   the low-speed connector clock line, a square wave of period
//    2*LS_HALF clocks, registered so it is glitch-free;
//  * ls_fall:  a strobe in the cycle before ls_clk goes low, so logic in the
//    main clock domain can launch bus data on the falling edge.
// Internal logic runs on the input clock itself. Counter dividers and the
// default ratios (SER_DIV = 54: 115200 baud x16 at 100 MHz; LS_HALF = 4) are
// this design's choice.
module clock_gen #(
  parameter int SER_DIV = 54,
  parameter int LS_HALF = 4
) (
  input  logic clk,
  input  logic rst_n,
  output logic ser_tick,
  output logic ls_clk,
  output logic ls_fall
);

  logic [$clog2(SER_DIV)-1:0] ser_cnt;
  logic [$clog2(LS_HALF)-1:0] ls_cnt;
  logic                       ls_wrap;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ser_cnt  <= '0;
      ser_tick <= 1'b0;
    end else begin
      ser_tick <= (int'(ser_cnt) == SER_DIV - 1);
      ser_cnt  <= (int'(ser_cnt) == SER_DIV - 1) ? '0 : ser_cnt + 1'b1;
    end
  end

  assign ls_wrap = (int'(ls_cnt) == LS_HALF - 1);
  assign ls_fall = ls_wrap &&  ls_clk;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ls_cnt <= '0;
      ls_clk <= 1'b0;
    end else begin
      ls_cnt <= ls_wrap ? '0 : ls_cnt + 1'b1;
      if (ls_wrap) ls_clk <= !ls_clk;
    end
  end

  initial assert (SER_DIV >= 2 && LS_HALF >= 2) else $error("clock_gen: dividers must be >= 2");

endmodule
