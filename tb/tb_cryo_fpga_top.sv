// tb_cryo_fpga_top: end-to-end test of the instrument logic at its default
// sizes (30 MAC lanes, 1000 products, 32 runs, 115200-baud-equivalent serial
// timing at SER_DIV = 54, 64-word bus packets).
//
// A room-temperature host model talks to the chip over the serial input and
// output lines only; a behavioural daughterboard listens on the low-speed bus.
// The host computes each lane's expected result from its own copy of the
// operand generator, then:
//   1. reads the status (nothing run yet),
//   2. writes all 30 expected values and runs the benchmark: 0 errors,
//   3. reads the status (960,000 MACs, done) and one lane's accumulator,
//   4. corrupts one expected value and reruns: 32 errors in 1 lane,
//   5. sends a 3-word and a 0-word packet to the daughterboard,
//   6. sends a frame with a broken stop bit and sees the error flag.
// Each mechanism is counted; one that never happens is a failure. The
// benchmark's busy time is checked against NUM_RUNS * (ACC_LEN + 4) cycles.
module tb_cryo_fpga_top;
  localparam int NM = 30, AL = 1000, NR = 32;
  localparam int BIT = 16 * 54;
  logic clk = 1'b0, rst_n = 1'b0, ser_in = 1'b1;
  logic ser_out, ls_clk, ls_sync;
  logic [15:0] ls_data;
  int checks = 0, failures = 0;
  int n_pass = 0, n_err_detect = 0, n_pkt_data = 0, n_pkt_empty = 0, n_ferr = 0, n_readback = 0;
  logic [47:0] expv [NM];
  logic [7:0] rx_bytes [$];

  cryo_fpga_top dut (.*);
  lsbus_daughter_model u_dev (.ls_clk, .ls_sync, .ls_data);

  always #5 clk = !clk;

  function automatic logic [31:0] step(input logic [31:0] v);
    v = v ^ (v << 13); v = v ^ (v >> 17); v = v ^ (v << 5);
    return v;
  endfunction

  function automatic logic [47:0] ref_sum(input int lane);
    logic [31:0] x = 32'h2545_F491 ^ (32'(lane + 1) * 32'h9E37_79B9);
    longint s = 0;
    for (int k = 0; k < AL; k++) begin
      s += longint'($signed(x[31:16])) * longint'($signed(x[15:0]));
      x = step(x);
    end
    return 48'(s);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // host serial transmitter (8N1)
  task automatic put(input logic [7:0] v, input bit stop = 1'b1);
    ser_in = 1'b0; repeat (BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin ser_in = v[i]; repeat (BIT) @(posedge clk); end
    ser_in = stop; repeat (BIT) @(posedge clk);
    ser_in = 1'b1; repeat (BIT / 4) @(posedge clk);
  endtask

  // host serial receiver, always listening
  initial begin
    logic [7:0] v;
    forever begin
      @(negedge ser_out);
      repeat (BIT / 2) @(posedge clk);
      if (!ser_out) begin
        for (int i = 0; i < 8; i++) begin repeat (BIT) @(posedge clk); v[i] = ser_out; end
        repeat (BIT) @(posedge clk);
        if (ser_out) rx_bytes.push_back(v);
      end
    end
  end

  task automatic get_reply(input int n, output logic [7:0] r [$], input int max_cycles);
    int t = 0;
    while (rx_bytes.size() < n && t < max_cycles + 12 * n * BIT) begin @(posedge clk); t++; end
    repeat (2 * BIT) @(posedge clk);
    check(rx_bytes.size() == n, $sformatf("reply of %0d bytes, got %0d", n, rx_bytes.size()));
    r = rx_bytes;
    rx_bytes.delete();
  endtask

  task automatic write_exp(input int lane, input logic [47:0] v);
    put(8'h10); put(8'(lane));
    for (int i = 5; i >= 0; i--) put(v[8*i +: 8]);
  endtask

  // benchmark busy time
  int busy_cycles = 0, last_busy = 0;
  always @(posedge clk) begin
    if (dut.u_bench.busy) busy_cycles <= busy_cycles + 1;
    else if (busy_cycles != 0) begin last_busy <= busy_cycles; busy_cycles <= 0; end
  end

  initial begin
    logic [7:0] r [$];
    for (int i = 0; i < NM; i++) expv[i] = ref_sum(i);
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (BIT) @(posedge clk);

    // 1. status before any test
    put(8'h40);
    get_reply(6, r, 40 * BIT);
    if (r.size() == 6) check(r[0] == 8'hC0 && {r[1], r[2], r[3], r[4]} == 32'd0 && r[5] == 8'h00, "initial status");

    // 2. correct expected values: no errors
    for (int i = 0; i < NM; i++) write_exp(i, expv[i]);
    put(8'h20);
    get_reply(4, r, NR * (AL + 4) + 60 * BIT);
    if (r.size() == 4) begin
      check(r[0] == 8'hA0 && r[1] == 8'h00 && r[2] == 8'h00 && r[3] == 8'h00,
            $sformatf("clean run reply %h %h %h %h", r[0], r[1], r[2], r[3]));
      if ({r[1], r[2]} == 16'd0) n_pass++;
    end
    check(last_busy == NR * (AL + 4), $sformatf("benchmark busy %0d cycles", last_busy));

    // 3. status and one accumulator
    put(8'h40);
    get_reply(6, r, 80 * BIT);
    if (r.size() == 6) check(r[0] == 8'hC0 && {r[1], r[2], r[3], r[4]} == 32'(NM * AL * NR) && r[5] == 8'h01,
                             "status after test: 960000 MACs, done");
    put(8'h50); put(8'd17);
    get_reply(7, r, 80 * BIT);
    if (r.size() == 7) begin
      check(r[0] == 8'hD0 && {r[1], r[2], r[3], r[4], r[5], r[6]} == expv[17], "lane 17 accumulator");
      n_readback++;
    end

    // 4. one wrong expected value: one error per run
    write_exp(5, expv[5] + 48'd1);
    put(8'h20);
    get_reply(4, r, NR * (AL + 4) + 60 * BIT);
    if (r.size() == 4) begin
      check(r[0] == 8'hA0 && {r[1], r[2]} == 16'(NR) && r[3] == 8'd1,
            $sformatf("faulty run reply %h %h %h %h", r[0], r[1], r[2], r[3]));
      if ({r[1], r[2]} == 16'(NR)) n_err_detect++;
    end

    // 5. low-speed bus packets
    put(8'h30); put(8'hC0); put(8'h01); put(8'h00); put(8'h2A); put(8'h03);
    put(8'h12); put(8'h34); put(8'h80); put(8'h00); put(8'hFF); put(8'hFF);
    get_reply(1, r, 80 * BIT);
    if (r.size() == 1) check(r[0] == 8'hB0, "packet reply");
    put(8'h30); put(8'h00); put(8'h07); put(8'h55); put(8'hAA); put(8'h00);
    get_reply(1, r, 80 * BIT);
    if (r.size() == 1) check(r[0] == 8'hB0, "empty packet reply");
    repeat (100) @(posedge clk);
    check(u_dev.packets == 2, $sformatf("daughterboard saw %0d packets", u_dev.packets));
    if (u_dev.packets == 2) begin
      check(u_dev.pkt_addr[0] == 16'hC001 && u_dev.pkt_cmd[0] == 16'h002A && u_dev.pkt_len[0] == 3, "packet 0 header");
      check(u_dev.data_words.size() == 3, "packet 0 data count");
      if (u_dev.data_words.size() == 3 && u_dev.data_words[0] == 16'h1234 &&
          u_dev.data_words[1] == 16'h8000 && u_dev.data_words[2] == 16'hFFFF) n_pkt_data++;
      check(u_dev.pkt_addr[1] == 16'h0007 && u_dev.pkt_cmd[1] == 16'h55AA && u_dev.pkt_len[1] == 0, "packet 1 header");
      if (u_dev.pkt_len[1] == 0) n_pkt_empty++;
    end

    // 6. broken frame, then the error flag in the status
    put(8'h99, 1'b0);
    repeat (2 * BIT) @(posedge clk);
    put(8'h40);
    get_reply(6, r, 80 * BIT);
    if (r.size() == 6 && r[5][1]) n_ferr++;

    check(n_pass > 0, "mechanism: benchmark run without errors");
    check(n_err_detect > 0, "mechanism: benchmark error detection");
    check(n_readback > 0, "mechanism: accumulator read-back");
    check(n_pkt_data > 0, "mechanism: bus packet with data");
    check(n_pkt_empty > 0, "mechanism: bus packet without data");
    check(n_ferr > 0, "mechanism: serial framing error");
    $display("mechanisms: pass=%0d err_detect=%0d readback=%0d pkt_data=%0d pkt_empty=%0d frame_err=%0d",
             n_pass, n_err_detect, n_readback, n_pkt_data, n_pkt_empty, n_ferr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
