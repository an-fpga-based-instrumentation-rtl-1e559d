// cryo_fpga_top: logic of the motherboard FPGA of the cryogenic instrument.
//
// The instrument sits on the 4-K stage of a dilution refrigerator. Three coax
// lines reach it: the clock, a serial input and a serial output. From the
// one clock, clock_gen derives the serial bit timing and the clock line of the
// low-speed daughterboard bus (the FPGA's PLLs do not work cold). host_cmd
// turns bytes from uart_rx into
//  * writes of expected results and runs of the 30-lane DSP-block benchmark
//    (mac_benchmark), whose error count, MAC count and lane results are
//    returned through uart_tx, and
//  * packets on the 18-line low-speed bus (lsbus_tx): clock, sync and 16 data
//    lines shared by the three low-speed connectors.
// The high-speed connectors (32 pairs each), the JTAG chain and the soft
// processor have no logic here. The external active-low reset is this design's
// choice. See the blocks' own headers for their timing.
module cryo_fpga_top
  import cryo_pkg::*;
#(
  parameter int SER_DIV   = 54,
  parameter int LS_HALF   = 4,
  parameter int NUM_MAC   = cryo_pkg::NUM_MAC_DEF,
  parameter int ACC_LEN   = cryo_pkg::ACC_LEN_DEF,
  parameter int NUM_RUNS  = cryo_pkg::NUM_RUNS_DEF,
  parameter int MAX_WORDS = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ser_in,
  output logic            ser_out,
  output logic            ls_clk,
  output logic            ls_sync,
  output logic [LS_W-1:0] ls_data
);

  localparam int LANE_W = (NUM_MAC > 1) ? $clog2(NUM_MAC) : 1;
  localparam int LEN_W  = $clog2(MAX_WORDS + 1);

  logic ser_tick, ls_fall;

  clock_gen #(.SER_DIV(SER_DIV), .LS_HALF(LS_HALF)) u_clk (
    .clk, .rst_n, .ser_tick, .ls_clk, .ls_fall
  );

  logic [7:0] rx_data, tx_data;
  logic       rx_valid, rx_ferr, tx_valid, tx_ready;

  uart_rx u_rx (.clk, .rst_n, .tick16(ser_tick), .rxd(ser_in),
                .data(rx_data), .valid(rx_valid), .frame_err(rx_ferr));
  uart_tx u_tx (.clk, .rst_n, .tick16(ser_tick), .data(tx_data), .valid(tx_valid),
                .ready(tx_ready), .txd(ser_out));

  logic               exp_we, bench_start, bench_busy, bench_done;
  logic [LANE_W-1:0]  exp_lane;
  logic [ACC_W-1:0]   exp_data;
  logic [15:0]        bench_err;
  logic [NUM_MAC-1:0] bench_lane_err;
  logic [31:0]        bench_macs;
  logic [ACC_W-1:0]   lane_acc [NUM_MAC];

  logic               ls_wr_en, ls_send, ls_busy;
  logic [LS_W-1:0]    ls_wr_data, ls_addr, ls_cmd;
  logic [LEN_W-1:0]   ls_len;

  host_cmd #(.NUM_MAC(NUM_MAC), .MAX_WORDS(MAX_WORDS)) u_host (
    .clk, .rst_n,
    .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .exp_we, .exp_lane, .exp_data, .bench_start, .bench_busy,
    .bench_done, .bench_err, .bench_lane_err, .bench_macs, .lane_acc, .rx_ferr,
    .ls_wr_en, .ls_wr_data, .ls_send, .ls_addr, .ls_cmd, .ls_len, .ls_busy
  );

  mac_benchmark #(.NUM_MAC(NUM_MAC), .ACC_LEN(ACC_LEN), .NUM_RUNS(NUM_RUNS)) u_bench (
    .clk, .rst_n, .exp_we, .exp_lane, .exp_data,
    .start(bench_start), .busy(bench_busy), .done(bench_done),
    .err_count(bench_err), .lane_err(bench_lane_err), .mac_count(bench_macs),
    .lane_acc
  );

  lsbus_tx #(.MAX_WORDS(MAX_WORDS)) u_ls (
    .clk, .rst_n, .ls_fall,
    .wr_en(ls_wr_en), .wr_data(ls_wr_data),
    .send(ls_send), .addr(ls_addr), .cmd(ls_cmd), .len(ls_len), .busy(ls_busy),
    .ls_sync, .ls_data
  );

endmodule
