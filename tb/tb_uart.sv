// tb_uart: checks uart_rx and uart_tx against a bit-level serial model.
// The testbench makes the 16x tick itself (every D clocks, one bit = 16*D
// clocks). It sends random 8N1 frames to uart_rx (with small rate error) and
// one frame with a bad stop bit, and samples uart_tx's line in the middle of
// each bit to rebuild the bytes it sends, checking start and stop bits.
module tb_uart;
  localparam int D = 4, BIT = 16 * D;
  logic clk = 1'b0, rst_n = 1'b0, tick16 = 1'b0;
  logic rxd = 1'b1;
  logic [7:0] rx_data, tx_data = '0;
  logic rx_valid, frame_err, tx_valid = 1'b0, tx_ready, txd;
  int checks = 0, failures = 0;
  logic [7:0] rx_q [$];
  int ferr_seen = 0;

  uart_rx u_rx (.clk, .rst_n, .tick16, .rxd, .data(rx_data), .valid(rx_valid), .frame_err);
  uart_tx u_tx (.clk, .rst_n, .tick16, .data(tx_data), .valid(tx_valid), .ready(tx_ready), .txd);

  always #5 clk = !clk;
  int tcnt = 0;
  always @(posedge clk) begin
    tcnt   <= (tcnt == D - 1) ? 0 : tcnt + 1;
    tick16 <= (tcnt == D - 1);
  end
  always @(posedge clk) begin
    if (rx_valid) rx_q.push_back(rx_data);
    if (frame_err) ferr_seen++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send_rx(input logic [7:0] v, input int bitlen, input bit stop);
    rxd = 1'b0; repeat (bitlen) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = v[i]; repeat (bitlen) @(posedge clk); end
    rxd = stop; repeat (bitlen) @(posedge clk);
    rxd = 1'b1; repeat (bitlen) @(posedge clk);
  endtask

  task automatic recv_tx(output logic [7:0] v);
    while (txd) @(posedge clk);
    repeat (BIT / 2) @(posedge clk);
    check(!txd, "tx start bit");
    for (int i = 0; i < 8; i++) begin repeat (BIT) @(posedge clk); v[i] = txd; end
    repeat (BIT) @(posedge clk);
    check(txd, "tx stop bit");
  endtask

  initial begin
    logic [7:0] sent [$];
    logic [7:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (BIT) @(posedge clk);
    // receiver
    for (int n = 0; n < 20; n++) begin
      v = 8'($urandom);
      sent.push_back(v);
      send_rx(v, BIT + $urandom_range(0, 2) - 1, 1'b1);
    end
    repeat (BIT) @(posedge clk);
    check(rx_q.size() == 20, $sformatf("rx count %0d", rx_q.size()));
    for (int n = 0; n < 20 && n < rx_q.size(); n++)
      check(rx_q[n] == sent[n], $sformatf("rx byte %0d: %h vs %h", n, rx_q[n], sent[n]));
    send_rx(8'h5A, BIT, 1'b0);            // broken stop bit
    repeat (2 * BIT) @(posedge clk);
    check(ferr_seen == 1, "frame error flagged");
    check(rx_q.size() == 20, "bad frame dropped");
    // transmitter
    for (int n = 0; n < 10; n++) begin
      logic [7:0] got, want;
      want = 8'($urandom);
      @(negedge clk);
      check(tx_ready, "tx ready when idle");
      tx_data = want; tx_valid = 1'b1;
      @(negedge clk); tx_valid = 1'b0;
      check(!tx_ready, "tx busy after accept");
      recv_tx(got);
      check(got == want, $sformatf("tx byte %h vs %h", got, want));
      repeat (BIT) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
