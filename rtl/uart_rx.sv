// uart_rx: receiver for the serial input coax ("Comm. In").
//
// The instrument is commanded over a single serial line from room
// temperature. Its framing is not documented, so this receiver uses plain
// asynchronous 8N1: idle high, one start bit, 8 data bits LSB first, one stop
// bit. rxd passes a two-flop synchroniser; with tick16 at 16x the bit rate the
// start bit is confirmed at its middle (8 ticks) and each following bit is
// sampled 16 ticks later. `valid` pulses for one clock with `data` when a
// frame with a good stop bit has been received; a bad stop bit drops the
// frame and pulses frame_err.
module uart_rx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick16,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} rstate_e;
  rstate_e    st;
  logic [1:0] sync;
  logic [3:0] tcnt;
  logic [2:0] bcnt;
  logic [7:0] shreg;
  logic       rx;

  assign rx = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      st        <= R_IDLE;
      tcnt      <= '0;
      bcnt      <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (tick16) begin
        unique case (st)
          R_IDLE: if (!rx) begin
            st   <= R_START;
            tcnt <= '0;
          end
          R_START: begin
            if (tcnt == 4'd7) begin
              tcnt <= '0;
              if (!rx) begin st <= R_DATA; bcnt <= '0; end
              else     st <= R_IDLE;           // glitch, not a start bit
            end else tcnt <= tcnt + 1'b1;
          end
          R_DATA: begin
            if (tcnt == 4'd15) begin
              tcnt  <= '0;
              shreg <= {rx, shreg[7:1]};
              bcnt  <= bcnt + 1'b1;
              if (bcnt == 3'd7) st <= R_STOP;
            end else tcnt <= tcnt + 1'b1;
          end
          R_STOP: begin
            if (tcnt == 4'd15) begin
              tcnt <= '0;
              st   <= R_IDLE;
              if (rx) begin data <= shreg; valid <= 1'b1; end
              else    frame_err <= 1'b1;
            end else tcnt <= tcnt + 1'b1;
          end
          default: st <= R_IDLE;
        endcase
      end
    end
  end

endmodule
