// cryo_pkg: constants and helper functions shared by the cryogenic FPGA
// instrument logic.
//
// The benchmark numbers follow the DSP-block test that was used to find the
// maximum clock rate of the cooled FPGA: 30 multiply-accumulate lanes, 16x16-bit
// products summed into a 48-bit accumulator, 1000 products per accumulation and
// 32 repeat runs (30 * 1000 * 32 = 960,000 MACs). The low-speed connector bus
// is 16 data lines wide. The pseudo-random operand generator (xorshift32) and
// its per-lane seeds are this design's own choice; the measurement only
// specifies "pre-generated random numbers".
package cryo_pkg;

  localparam int NUM_MAC_DEF  = 30;    // DSP slices used by the benchmark
  localparam int OP_W     = 16;    // multiplier operand width
  localparam int ACC_W    = 48;    // DSP accumulator width
  localparam int ACC_LEN_DEF  = 1000;  // products accumulated per run
  localparam int NUM_RUNS_DEF = 32;    // repeat runs per test
  localparam int LS_W     = 16;    // low-speed connector data lines
  localparam int MAC_LAT  = 3;     // mac_unit pipeline depth (A/B, M, P registers)

  // Host command opcodes of the serial link (own protocol).
  typedef enum logic [7:0] {
    OP_WR_EXPECTED = 8'h10,
    OP_RUN_BENCH   = 8'h20,
    OP_LS_PACKET   = 8'h30,
    OP_RD_STATUS   = 8'h40,
    OP_RD_ACC      = 8'h50,
    RSP_BENCH      = 8'hA0,
    RSP_LS_DONE    = 8'hB0,
    RSP_STATUS     = 8'hC0,
    RSP_ACC        = 8'hD0
  } host_op_e;

  // One step of the xorshift32 generator.
  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // Seed of benchmark lane `lane`: never zero, different for every lane.
  function automatic logic [31:0] lane_seed(input int unsigned lane);
    logic [31:0] s;
    s = 32'h2545_F491 ^ (32'(lane + 1) * 32'h9E37_79B9);
    return (s == 32'd0) ? 32'h1 : s;
  endfunction

endpackage
