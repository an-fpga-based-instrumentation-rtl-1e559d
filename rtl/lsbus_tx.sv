// lsbus_tx: master of the shared low-speed daughterboard bus.
//
// The three low-speed connectors share 18 single-ended lines: a clock line, a
// sync line and 16 data lines. A packet is a two-word header, the address word
// and then the command word, followed by a variable number (0..MAX_WORDS) of
// 16-bit data words. That much is the instrument's documented use of the bus;
// the rest is this design's choice:
//  * sync is high for every word of a packet and low between packets, so a
//    receiver finds both ends of a packet from the sync line alone;
//  * a new word is driven on the falling edge of ls_clk (on the ls_fall strobe
//    from clock_gen) and is stable for the receiver's rising-edge sample;
//  * data words are first written into a MAX_WORDS-word buffer (wr_en/wr_data)
//    and `send` then starts the packet with addr, cmd and len. Writes while busy
//    are ignored. The buffer is emptied when the packet ends.
// Timing: the address word appears at the first ls_fall after send, one word
// per ls_clk period follows, and busy drops with sync at the (len+3)-th ls_fall.
module lsbus_tx
  import cryo_pkg::*;
#(
  parameter int MAX_WORDS = 64,
  localparam int LEN_W    = $clog2(MAX_WORDS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ls_fall,
  // packet buffer fill
  input  logic            wr_en,
  input  logic [LS_W-1:0] wr_data,
  // packet start
  input  logic            send,
  input  logic [LS_W-1:0] addr,
  input  logic [LS_W-1:0] cmd,
  input  logic [LEN_W-1:0] len,
  output logic            busy,
  // bus lines (ls_clk comes from clock_gen)
  output logic            ls_sync,
  output logic [LS_W-1:0] ls_data
);

  typedef enum logic [2:0] {T_IDLE, T_WAIT, T_ADDR, T_CMD, T_DATA} tstate_e;
  tstate_e st;

  logic [LS_W-1:0]  buffer [MAX_WORDS];
  logic [LS_W-1:0]  addr_q, cmd_q;
  logic [LEN_W-1:0] len_q, idx;
  logic [LEN_W-1:0] fill;          // words written into the buffer

  assign busy = (st != T_IDLE);

  always_ff @(posedge clk) begin
    if (wr_en && !busy && int'(fill) < MAX_WORDS) buffer[fill[LEN_W-2:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= T_IDLE;
      fill    <= '0;
      addr_q  <= '0;
      cmd_q   <= '0;
      len_q   <= '0;
      idx     <= '0;
      ls_sync <= 1'b0;
      ls_data <= '0;
    end else begin
      unique case (st)
        T_IDLE: begin
          if (wr_en && int'(fill) < MAX_WORDS) fill <= fill + 1'b1;
          if (send) begin
            addr_q <= addr;
            cmd_q  <= cmd;
            len_q  <= (len > fill) ? fill : len;   // never send unwritten words
            st     <= T_WAIT;
          end
        end
        T_WAIT: if (ls_fall) begin
          ls_sync <= 1'b1;
          ls_data <= addr_q;
          st      <= T_ADDR;
        end
        T_ADDR: if (ls_fall) begin
          ls_data <= cmd_q;
          idx     <= '0;
          st      <= T_CMD;
        end
        T_CMD, T_DATA: if (ls_fall) begin
          if (idx == len_q) begin
            ls_sync <= 1'b0;
            ls_data <= '0;
            fill    <= '0;
            st      <= T_IDLE;
          end else begin
            ls_data <= buffer[idx[LEN_W-2:0]];
            idx     <= idx + 1'b1;
            st      <= T_DATA;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  initial assert (MAX_WORDS >= 2 && (MAX_WORDS & (MAX_WORDS - 1)) == 0)
    else $error("lsbus_tx: MAX_WORDS must be a power of two");

endmodule
