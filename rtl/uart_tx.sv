// uart_tx: transmitter for the serial output coax ("Comm. Out").
//
// Sends one byte as asynchronous 8N1 (start bit, 8 data bits LSB first, stop
// bit, idle high), each bit lasting 16 ticks of tick16. A byte is taken when
// valid && ready; ready is high only while the line is idle. Bits are timed
// from the free-running tick, so the start bit can be up to one tick (1/16 of
// a bit) short; every later bit is exactly 16 ticks. The format is this
// design's choice: the serial protocol of the instrument is not documented.
module uart_tx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick16,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);

  logic       active;
  logic [9:0] frame;   // {stop, data[7:0], start}, shifted out LSB first
  logic [3:0] tcnt;
  logic [3:0] bcnt;

  assign ready = !active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      frame  <= '1;
      tcnt   <= '0;
      bcnt   <= '0;
      txd    <= 1'b1;
    end else if (!active) begin
      txd <= 1'b1;
      if (valid) begin
        active <= 1'b1;
        frame  <= {1'b1, data, 1'b0};
        tcnt   <= '0;
        bcnt   <= '0;
      end
    end else begin
      txd <= frame[0];
      if (tick16) begin
        if (tcnt == 4'd15) begin
          tcnt  <= '0;
          frame <= {1'b1, frame[9:1]};
          bcnt  <= bcnt + 1'b1;
          if (bcnt == 4'd9) active <= 1'b0;
        end else tcnt <= tcnt + 1'b1;
      end
    end
  end

endmodule
