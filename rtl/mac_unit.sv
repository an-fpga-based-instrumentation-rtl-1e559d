// mac_unit: one DSP-slice-style multiply-accumulate lane.
//
// Each valid cycle a signed OP_W x OP_W product is added to an ACC_W-bit
// accumulator; when in_first is set the product is loaded instead, starting a
// new accumulation. This is the operation the 16x16-bit DSP48E1 benchmark
// performs (48-bit accumulator as in the 7-series DSP slice).
//
// Timing: fully registered like a DSP48E1 with AREG/BREG, MREG and PREG set,
// so the accumulator shows the effect of an operand pair 3 cycles after it is
// presented (acc_valid pulses in that cycle). One pair is accepted per cycle.
// The pipeline depth and the synchronous active-low reset are this design's
// choice; signed operands are assumed.
module mac_unit #(
  parameter int OP_W  = 16,
  parameter int ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic signed [OP_W-1:0]  a,
  input  logic signed [OP_W-1:0]  b,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);

  logic signed [OP_W-1:0]   a_q, b_q;      // input registers
  logic signed [2*OP_W-1:0] m_q;           // product register
  logic                     v1, v2, f1, f2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0;
      a_q <= '0; b_q <= '0; m_q <= '0;
      acc <= '0; acc_valid <= 1'b0;
    end else begin
      // stage 1: operand registers
      v1  <= in_valid;
      f1  <= in_first;
      a_q <= a;
      b_q <= b;
      // stage 2: product register
      v2  <= v1;
      f2  <= f1;
      m_q <= a_q * b_q;
      // stage 3: accumulator
      acc_valid <= v2;
      if (v2) acc <= f2 ? ACC_W'(m_q) : acc + ACC_W'(m_q);
    end
  end

endmodule
