// mac_benchmark: the DSP-block error-rate test of the cryogenic FPGA.
//
// NUM_MAC lanes (operand_gen + mac_unit each) run in parallel. One test is
// NUM_RUNS runs; in each run every lane restarts its pseudo-random operand
// sequence, accumulates ACC_LEN signed 16x16 products, and after the pipeline
// has drained its 48-bit result is compared with the lane's expected value.
// Every (run, lane) mismatch adds one to err_count and marks the lane in
// lane_err. At the default sizes a test is 30 * 1000 * 32 = 960,000 MACs, the
// count the measurement used to declare a clock frequency error-free.
//
// Expected values are written by the host into a NUM_MAC-entry table through
// exp_we/exp_lane/exp_data (reset clears it). Where the comparison happens is
// not stated for the original measurement; doing it on chip, the run timing
// and the counters are this design's choices.
//
// Timing: start is accepted in S_IDLE. Each run takes ACC_LEN + 4 cycles
// (1 restart, ACC_LEN issue, 2 drain, 1 compare), so done rises
// NUM_RUNS * (ACC_LEN + 4) + 1 cycles after the start cycle. The lanes accept
// one operand pair per cycle: NUM_MAC MACs per clock.
module mac_benchmark
  import cryo_pkg::*;
#(
  parameter int NUM_MAC  = cryo_pkg::NUM_MAC_DEF,
  parameter int ACC_LEN  = cryo_pkg::ACC_LEN_DEF,
  parameter int NUM_RUNS = cryo_pkg::NUM_RUNS_DEF,
  localparam int LANE_W  = (NUM_MAC > 1) ? $clog2(NUM_MAC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // expected-result table
  input  logic               exp_we,
  input  logic [LANE_W-1:0]  exp_lane,
  input  logic [ACC_W-1:0]   exp_data,
  // control and status
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [15:0]        err_count,
  output logic [NUM_MAC-1:0] lane_err,
  output logic [31:0]        mac_count,
  output logic [ACC_W-1:0]   lane_acc [NUM_MAC]
);

  typedef enum logic [2:0] {S_IDLE, S_RESTART, S_ISSUE, S_DRAIN, S_COMPARE} state_e;
  state_e state;

  logic [ACC_W-1:0] exp_tab [NUM_MAC];
  logic [$clog2(ACC_LEN+1)-1:0]  k;
  logic [$clog2(NUM_RUNS+1)-1:0] run;
  logic [1:0]                    drain;

  logic restart, issue, first;
  assign restart = (state == S_RESTART);
  assign issue   = (state == S_ISSUE);
  assign first   = issue && (k == '0);
  assign busy    = (state != S_IDLE);

  logic [NUM_MAC-1:0] mismatch, acc_valid;

  for (genvar i = 0; i < NUM_MAC; i++) begin : g_lane
    logic [15:0] a, b;
    operand_gen #(.SEED(lane_seed(i))) u_gen (
      .clk, .rst_n, .restart, .advance(issue), .a, .b
    );
    mac_unit #(.OP_W(OP_W), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .in_valid(issue), .in_first(first),
      .a(signed'(a)), .b(signed'(b)), .acc(lane_acc[i]), .acc_valid(acc_valid[i])
    );
    assign mismatch[i] = (lane_acc[i] != exp_tab[i]);
  end

  function automatic logic [15:0] popcount(input logic [NUM_MAC-1:0] v);
    logic [15:0] n = '0;
    for (int i = 0; i < NUM_MAC; i++) n += 16'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_MAC; i++) exp_tab[i] <= '0;
    end else if (exp_we && !busy && int'(exp_lane) < NUM_MAC) begin
      exp_tab[exp_lane] <= exp_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      k         <= '0;
      run       <= '0;
      drain     <= '0;
      done      <= 1'b0;
      err_count <= '0;
      lane_err  <= '0;
      mac_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_RESTART;
          run       <= '0;
          done      <= 1'b0;
          err_count <= '0;
          lane_err  <= '0;
          mac_count <= '0;
        end
        S_RESTART: begin
          k     <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          k         <= k + 1'b1;
          mac_count <= mac_count + 32'(NUM_MAC);
          if (int'(k) == ACC_LEN - 1) begin
            drain <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (int'(drain) == MAC_LAT - 2) state <= S_COMPARE;
        end
        S_COMPARE: begin
          err_count <= err_count + popcount(mismatch);
          lane_err  <= lane_err | mismatch;
          run       <= run + 1'b1;
          if (int'(run) == NUM_RUNS - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RESTART;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The comparison must see every lane's final accumulator.
  a_compare_valid: assert property (@(posedge clk) disable iff (!rst_n) (state == S_COMPARE) |-> &acc_valid)
    else $error("mac_benchmark: compare before the pipeline drained");

  // The table must not change while a test reads it.
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) !(exp_we && busy))
    else $warning("mac_benchmark: expected-table write ignored while busy");

endmodule
