// lsbus_daughter_model: behavioural daughterboard end of the low-speed bus,
// for testbenches only. On each rising edge of ls_clk it samples sync and the
// 16 data lines. While sync is high it collects the address word, the command
// word and then the data words; when sync falls the packet is complete and is
// pushed to the queues below, which a testbench reads hierarchically.
module lsbus_daughter_model (
  input logic        ls_clk,
  input logic        ls_sync,
  input logic [15:0] ls_data
);
  logic [15:0] cur [$];
  logic [15:0] pkt_addr [$];
  logic [15:0] pkt_cmd [$];
  int          pkt_len [$];
  logic [15:0] data_words [$];   // data words of all packets, in order
  int          packets = 0;
  bit          in_pkt = 1'b0;

  always @(posedge ls_clk) begin
    if (ls_sync) begin
      cur.push_back(ls_data);
      in_pkt = 1'b1;
    end else if (in_pkt) begin
      in_pkt = 1'b0;
      if (cur.size() >= 2) begin
        pkt_addr.push_back(cur[0]);
        pkt_cmd.push_back(cur[1]);
        pkt_len.push_back(cur.size() - 2);
        for (int i = 2; i < cur.size(); i++) data_words.push_back(cur[i]);
      end else begin
        pkt_len.push_back(-1);            // runt packet
        pkt_addr.push_back('0);
        pkt_cmd.push_back('0);
      end
      packets++;
      cur.delete();
    end
  end
endmodule
