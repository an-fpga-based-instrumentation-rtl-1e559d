// host_cmd: command decoder between the serial link and the instrument logic.
//
// Room-temperature equipment drives the instrument through one serial input
// and one serial output. The byte protocol below is this design's own (the
// instrument's host protocol is not documented); multi-byte fields are
// big-endian:
//   0x10 lane e5 e4 e3 e2 e1 e0   write the 48-bit expected result of a lane
//   0x20                          run the MAC benchmark; when it ends reply
//                                 0xA0 err_hi err_lo lanes_failed
//   0x40                          read status: reply 0xC0 m3 m2 m1 m0 flags,
//                                 m = MACs of the last test, flags bit0 = test
//                                 done, bit1 = a serial framing error was seen
//   0x50 lane                     read a lane's accumulator: 0xD0 a5 .. a0
//   0x30 ah al ch cl n d0h d0l .. send a low-speed bus packet: address,
//                                 command and n data words (n is clipped to
//                                 MAX_WORDS); reply 0xB0 when it has been sent
// Unknown opcodes are dropped. rx bytes arrive as one-cycle strobes; reply
// bytes leave over a valid/ready handshake. Bytes that arrive while a command
// is executing are ignored.
module host_cmd
  import cryo_pkg::*;
#(
  parameter int NUM_MAC   = cryo_pkg::NUM_MAC_DEF,
  parameter int MAX_WORDS = 64,
  localparam int LANE_W   = (NUM_MAC > 1) ? $clog2(NUM_MAC) : 1,
  localparam int LEN_W    = $clog2(MAX_WORDS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // serial byte streams
  input  logic [7:0]         rx_data,
  input  logic               rx_valid,
  output logic [7:0]         tx_data,
  output logic               tx_valid,
  input  logic               tx_ready,
  // MAC benchmark
  output logic               exp_we,
  output logic [LANE_W-1:0]  exp_lane,
  output logic [ACC_W-1:0]   exp_data,
  output logic               bench_start,
  input  logic               bench_busy,
  input  logic               bench_done,
  input  logic [15:0]        bench_err,
  input  logic [NUM_MAC-1:0] bench_lane_err,
  input  logic [31:0]        bench_macs,
  input  logic [ACC_W-1:0]   lane_acc [NUM_MAC],
  input  logic               rx_ferr,
  // low-speed bus
  output logic               ls_wr_en,
  output logic [LS_W-1:0]    ls_wr_data,
  output logic               ls_send,
  output logic [LS_W-1:0]    ls_addr,
  output logic [LS_W-1:0]    ls_cmd,
  output logic [LEN_W-1:0]   ls_len,
  input  logic               ls_busy
);

  typedef enum logic [2:0] {H_OP, H_ARGS, H_LSDATA, H_BENCH, H_LSWAIT, H_REPLY} hstate_e;
  hstate_e st;

  host_op_e   op;
  logic [3:0] nargs;           // argument bytes still to come
  logic [47:0] args;           // argument shift register
  logic [8:0]  nbytes;         // data bytes still to come (0x30)
  logic        hi_half;        // next data byte is a high byte
  logic [7:0]  hi_byte;
  logic        seen_busy;
  logic [55:0] reply;          // reply bytes, sent from the top byte down
  logic [2:0]  nreply;
  logic        ferr_seen;

  function automatic logic [7:0] count_ones(input logic [NUM_MAC-1:0] v);
    logic [7:0] n = '0;
    for (int i = 0; i < NUM_MAC; i++) n += 8'(v[i]);
    return n;
  endfunction

  assign tx_data  = reply[55:48];
  assign tx_valid = (st == H_REPLY);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= H_OP; op <= OP_RUN_BENCH; nargs <= '0; args <= '0; nbytes <= '0;
      hi_half <= 1'b1; hi_byte <= '0; seen_busy <= 1'b0; reply <= '0; nreply <= '0; ferr_seen <= 1'b0;
      exp_we <= 1'b0; exp_lane <= '0; exp_data <= '0; bench_start <= 1'b0;
      ls_wr_en <= 1'b0; ls_wr_data <= '0; ls_send <= 1'b0;
      ls_addr <= '0; ls_cmd <= '0; ls_len <= '0;
    end else begin
      exp_we      <= 1'b0;
      bench_start <= 1'b0;
      ls_wr_en    <= 1'b0;
      ls_send     <= 1'b0;
      if (rx_ferr) ferr_seen <= 1'b1;
      unique case (st)
        H_OP: if (rx_valid) begin
          case (rx_data)
            OP_WR_EXPECTED: begin op <= OP_WR_EXPECTED; nargs <= 4'd7; st <= H_ARGS; end
            OP_LS_PACKET:   begin op <= OP_LS_PACKET;   nargs <= 4'd5; st <= H_ARGS; end
            OP_RD_ACC:      begin op <= OP_RD_ACC;      nargs <= 4'd1; st <= H_ARGS; end
            OP_RD_STATUS: begin
              reply  <= {RSP_STATUS, bench_macs, 6'd0, ferr_seen, bench_done, 8'h00};
              nreply <= 3'd6;
              st     <= H_REPLY;
            end
            OP_RUN_BENCH: begin
              bench_start <= 1'b1;
              seen_busy   <= 1'b0;
              st          <= H_BENCH;
            end
            default: ;                       // unknown opcode: drop
          endcase
        end
        H_ARGS: if (rx_valid) begin
          args  <= {args[39:0], rx_data};
          nargs <= nargs - 1'b1;
          if (nargs == 4'd1) begin
            if (op == OP_WR_EXPECTED) begin
              exp_we   <= 1'b1;
              exp_lane <= LANE_W'(args[47:40]);
              exp_data <= {args[39:0], rx_data};
              st       <= H_OP;
            end else if (op == OP_RD_ACC) begin
              reply  <= {RSP_ACC, (int'(rx_data) < NUM_MAC) ? lane_acc[LANE_W'(rx_data)] : '0};
              nreply <= 3'd7;
              st     <= H_REPLY;
            end else begin
              ls_addr <= args[31:16];
              ls_cmd  <= args[15:0];
              ls_len  <= (int'(rx_data) > MAX_WORDS) ? LEN_W'(MAX_WORDS) : LEN_W'(rx_data);
              nbytes  <= (int'(rx_data) > MAX_WORDS) ? 9'(2 * MAX_WORDS) : {rx_data, 1'b0};
              hi_half <= 1'b1;
              seen_busy <= 1'b0;
              st      <= (rx_data == 8'd0) ? H_LSWAIT : H_LSDATA;
              if (rx_data == 8'd0) ls_send <= 1'b1;
            end
          end
        end
        H_LSDATA: if (rx_valid) begin
          hi_half <= !hi_half;
          nbytes  <= nbytes - 1'b1;
          if (hi_half) hi_byte <= rx_data;
          else begin
            ls_wr_en   <= 1'b1;
            ls_wr_data <= {hi_byte, rx_data};
          end
          if (nbytes == 9'd1) st <= H_LSWAIT;
        end
        H_LSWAIT: begin
          // the last data word is written in this state's first cycle; send after it
          if (!ls_wr_en && !seen_busy && !ls_busy && !ls_send) ls_send <= 1'b1;
          if (ls_busy) seen_busy <= 1'b1;
          if (seen_busy && !ls_busy) begin
            reply  <= {RSP_LS_DONE, 48'h0};
            nreply <= 3'd1;
            st     <= H_REPLY;
          end
        end
        H_BENCH: begin
          if (bench_busy) seen_busy <= 1'b1;
          if (seen_busy && !bench_busy) begin
            reply  <= {RSP_BENCH, bench_err, count_ones(bench_lane_err), 24'h0};
            nreply <= 3'd4;
            st     <= H_REPLY;
          end
        end
        H_REPLY: if (tx_ready) begin
          reply  <= {reply[47:0], 8'h00};
          nreply <= nreply - 1'b1;
          if (nreply == 3'd1) st <= H_OP;
        end
        default: st <= H_OP;
      endcase
    end
  end

endmodule
