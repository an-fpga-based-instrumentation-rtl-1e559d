// tb_lsbus_tx: sends packets of 0, 1, 5 and MAX_WORDS data words, and one
// whose len exceeds the words written, over the low-speed bus. The testbench
// makes ls_clk and the ls_fall strobe itself and decodes the lines with the
// behavioural daughterboard receiver. Checks: address, command and data words,
// packet lengths, one word per ls_clk period (sync high for exactly len+2
// rising edges), data stable at each rising edge, and busy timing.
module tb_lsbus_tx;
  localparam int MW = 8, LH = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ls_clk = 1'b0, ls_fall;
  logic wr_en = 1'b0, send = 1'b0, busy, ls_sync;
  logic [15:0] wr_data = '0, addr = '0, cmd = '0, ls_data;
  logic [3:0] len = '0;
  int checks = 0, failures = 0;
  int cnt = 0;
  logic [15:0] exp_words [$];
  int sync_edges = 0;

  lsbus_tx #(.MAX_WORDS(MW)) dut (.*);
  lsbus_daughter_model u_dev (.ls_clk, .ls_sync, .ls_data);

  always #5 clk = !clk;
  // own ls_clk divider: period 2*LH clocks, ls_fall in the cycle before it falls
  assign ls_fall = (cnt == LH - 1) && ls_clk;
  always @(posedge clk) begin
    cnt <= (cnt == LH - 1) ? 0 : cnt + 1;
    if (cnt == LH - 1) ls_clk <= !ls_clk;
  end
  always @(posedge ls_clk) if (ls_sync) sync_edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic packet(input int nwr, input int n, input logic [15:0] a, input logic [15:0] c);
    int p0 = u_dev.packets, e0 = sync_edges, sent, wait_cyc = 0;
    sent = (n > nwr) ? nwr : n;
    for (int i = 0; i < nwr; i++) begin
      @(negedge clk); wr_en = 1'b1; wr_data = 16'($urandom);
      if (i < sent) exp_words.push_back(wr_data);
    end
    @(negedge clk); wr_en = 1'b0;
    send = 1'b1; addr = a; cmd = c; len = 4'(n);
    @(negedge clk); send = 1'b0;
    check(busy, "busy after send");
    while (busy) begin @(negedge clk); wait_cyc++; end
    check(wait_cyc <= (sent + 4) * 2 * LH, $sformatf("packet took %0d cycles", wait_cyc));
    repeat (4 * LH) @(negedge clk);
    check(u_dev.packets == p0 + 1, "one packet received");
    check(sync_edges - e0 == sent + 2, $sformatf("sync high for %0d edges", sync_edges - e0));
    check(u_dev.pkt_addr[p0] == a, "address word");
    check(u_dev.pkt_cmd[p0] == c, "command word");
    check(u_dev.pkt_len[p0] == sent, $sformatf("length %0d vs %0d", u_dev.pkt_len[p0], sent));
  endtask

  // data must not change within LH/2 clocks of a rising edge
  logic [16:0] last_lines;
  int since_change = 100;
  always @(posedge clk) begin
    if ({ls_sync, ls_data} != last_lines) since_change <= 0; else since_change <= since_change + 1;
    last_lines <= {ls_sync, ls_data};
  end
  always @(posedge ls_clk) if (rst_n) begin
    checks++;
    if (since_change < 1) begin failures++; $display("FAIL lines changed at ls_clk rise"); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (10) @(posedge clk);
    check(!ls_sync, "sync low when idle");
    packet(0, 0, 16'h1234, 16'hA001);
    packet(1, 1, 16'h0002, 16'hA002);
    packet(5, 5, 16'hFFFF, 16'h0000);
    packet(MW, MW, 16'h8001, 16'h7FFE);
    packet(3, 6, 16'h0F0F, 16'hF0F0);    // len above the words written: clipped to 3
    check(u_dev.data_words.size() == exp_words.size(), "data word count");
    for (int i = 0; i < exp_words.size() && i < u_dev.data_words.size(); i++)
      check(u_dev.data_words[i] == exp_words[i], $sformatf("data word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
