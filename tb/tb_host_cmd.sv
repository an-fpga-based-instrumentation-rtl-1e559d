// tb_host_cmd: feeds command bytes to the decoder and checks what it does.
// Simple testbench stubs stand in for the benchmark (busy for a while after
// start) and the low-speed bus (busy for a while after send); the serial
// output accepts a reply byte only every few cycles. Checked: expected-table
// writes (lane and 48-bit value), benchmark start and the 0xA0 reply, status
// and accumulator read-back, low-speed packets with 0 and 3 words and the
// 0xB0 reply, clipping of n to MAX_WORDS, and that unknown opcodes are dropped.
module tb_host_cmd;
  localparam int NM = 4, MW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] rx_data = '0, tx_data;
  logic rx_valid = 1'b0, tx_valid, tx_ready = 1'b0;
  logic exp_we, bench_start, bench_busy = 1'b0, bench_done = 1'b0, rx_ferr = 1'b0;
  logic [1:0] exp_lane;
  logic [47:0] exp_data;
  logic [15:0] bench_err = 16'h0123;
  logic [NM-1:0] bench_lane_err = 4'b1011;
  logic [31:0] bench_macs = 32'hCAFE_F00D;
  logic [47:0] lane_acc [NM];
  logic ls_wr_en, ls_send, ls_busy = 1'b0;
  logic [15:0] ls_wr_data, ls_addr, ls_cmd;
  logic [2:0] ls_len;
  int checks = 0, failures = 0;
  logic [7:0] replies [$];
  logic [15:0] words [$];
  int starts = 0, sends = 0, writes = 0;
  logic [1:0] last_lane; logic [47:0] last_exp;

  host_cmd #(.NUM_MAC(NM), .MAX_WORDS(MW)) dut (.*);
  always #5 clk = !clk;

  // stubs
  int bcnt = 0, lcnt = 0, tcnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (bench_start) begin starts++; bench_busy <= 1'b1; bcnt <= 40; end
    else if (bcnt > 0) begin bcnt <= bcnt - 1; if (bcnt == 1) begin bench_busy <= 1'b0; bench_done <= 1'b1; end end
    if (ls_send) begin sends++; ls_busy <= 1'b1; lcnt <= 25; end
    else if (lcnt > 0) begin lcnt <= lcnt - 1; if (lcnt == 1) ls_busy <= 1'b0; end
    if (ls_wr_en) words.push_back(ls_wr_data);
    if (exp_we) begin writes++; last_lane <= exp_lane; last_exp <= exp_data; end
    tcnt <= (tcnt == 4) ? 0 : tcnt + 1;
    tx_ready <= (tcnt == 4);
    if (tx_valid && tx_ready) replies.push_back(tx_data);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(input logic [7:0] v);
    @(negedge clk); rx_data = v; rx_valid = 1'b1;
    @(negedge clk); rx_valid = 1'b0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  task automatic expect_reply(input logic [7:0] want [$]);
    int t = 0;
    while (replies.size() < want.size() && t < 2000) begin @(negedge clk); t++; end
    repeat (20) @(negedge clk);
    check(replies.size() == want.size(), $sformatf("reply length %0d vs %0d", replies.size(), want.size()));
    for (int i = 0; i < want.size() && i < replies.size(); i++)
      check(replies[i] == want[i], $sformatf("reply byte %0d: %h vs %h", i, replies[i], want[i]));
    replies.delete();
  endtask

  initial begin
    for (int i = 0; i < NM; i++) lane_acc[i] = {16'(i), 32'h1111_0000 + 32'(i)};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // expected-table write
    put(8'h10); put(8'h02); put(8'hAB); put(8'hCD); put(8'hEF); put(8'h01); put(8'h23); put(8'h45);
    repeat (3) @(negedge clk);
    check(writes == 1 && last_lane == 2'd2 && last_exp == 48'hABCD_EF01_2345, "expected write");
    // unknown opcode is dropped, then a benchmark run
    put(8'h77);
    put(8'h20);
    expect_reply('{8'hA0, 8'h01, 8'h23, 8'h03});
    check(starts == 1, "one benchmark start");
    // status
    rx_ferr = 1'b1; @(negedge clk); rx_ferr = 1'b0;
    put(8'h40);
    expect_reply('{8'hC0, 8'hCA, 8'hFE, 8'hF0, 8'h0D, 8'h03});
    // accumulator of lane 3
    put(8'h50); put(8'h03);
    expect_reply('{8'hD0, 8'h00, 8'h03, 8'h11, 8'h11, 8'h00, 8'h03});
    // packet with no data words
    put(8'h30); put(8'h12); put(8'h34); put(8'h56); put(8'h78); put(8'h00);
    expect_reply('{8'hB0});
    check(sends == 1 && ls_addr == 16'h1234 && ls_cmd == 16'h5678 && ls_len == 3'd0, "empty packet");
    // packet with 3 words
    put(8'h30); put(8'h00); put(8'h01); put(8'h00); put(8'h02); put(8'h03);
    put(8'hDE); put(8'hAD); put(8'hBE); put(8'hEF); put(8'h00); put(8'h07);
    expect_reply('{8'hB0});
    check(sends == 2 && ls_len == 3'd3, "3-word packet");
    check(words.size() == 3, "3 words written");
    if (words.size() == 3) check(words[0] == 16'hDEAD && words[1] == 16'hBEEF && words[2] == 16'h0007, "word values");
    // n above MAX_WORDS is clipped
    words.delete();
    put(8'h30); put(8'h00); put(8'h01); put(8'h00); put(8'h02); put(8'h09);
    for (int i = 0; i < 2 * MW; i++) put(8'(i));
    expect_reply('{8'hB0});
    check(sends == 3 && ls_len == 3'(MW) && words.size() == MW, "clipped packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
