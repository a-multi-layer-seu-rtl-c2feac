// packet_builder_tb: random slots carry a data packet or nothing. The 20-bit
// words on the transmitter side are reassembled into 30-bit packets; the
// sequence must be exactly one packet per core clock since reset: the data
// packet where one was given, otherwise the ID packet (header 1100, payload
// {18'b0, router_id}). The buffer must never run dry and id_count must count
// the ID packets.
`timescale 1ps/1ps
module packet_builder_tb;
  import router_pkg::*;
  logic clk = 0, clk_tx = 0, rst = 1, rst_tx = 1;
  logic in_valid = 0;
  pkt_t in_pkt = '0;
  logic [7:0] router_id = 8'hA7;
  logic [31:0] id_count;
  logic [19:0] tx_data;
  logic underflow;
  int checks = 0, failures = 0;

  packet_builder dut (.clk, .rst, .in_valid, .in_pkt, .router_id, .id_count, .clk_tx, .rst_tx, .tx_data, .underflow);

  always #3000 clk    = ~clk;
  always #2000 clk_tx = ~clk_tx;

  pkt_t exp_q[$];
  int   n_id = 0;

  initial begin
    #40000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reassemble the transmitter words
  logic [59:0] acc;
  int          nw = 0, got = 0;
  bit          started = 0;
  always @(posedge clk_tx) if (!rst_tx) begin
    if (!started && tx_data != 0) started = 1;
    if (started) begin
      acc = {acc[39:0], tx_data};
      nw++;
      if (nw == 3) begin
        pkt_t a, b;
        nw = 0;
        a = acc[59:30]; b = acc[29:0];
        for (int j = 0; j < 2; j++) begin
          pkt_t p;
          p = (j == 0) ? a : b;
          checks++;
          if (exp_q.size() == 0 || p !== exp_q[0]) begin
            failures++; $display("FAIL tx packet %0d got %h exp %h", got, p, exp_q.size() ? exp_q[0] : '0);
          end
          if (exp_q.size()) void'(exp_q.pop_front());
          got++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0; rst_tx = 0;
    for (int n = 0; n < 3000; n++) begin
      in_valid = ($urandom % 3) == 0;
      in_pkt   = {HDR_DATA, 26'($urandom)};
      if (n == 1500) router_id = 8'h3C;
      if (in_valid) exp_q.push_back(in_pkt);
      else begin exp_q.push_back({HDR_NULL, 18'b0, router_id}); n_id++; end
      @(negedge clk);
    end
    in_valid = 0;
    for (int n = 0; n < 40; n++) begin
      exp_q.push_back({HDR_NULL, 18'b0, router_id}); n_id++;
      @(negedge clk);
    end
    checks += 3;
    if (got < 3000) begin failures++; $display("FAIL only %0d packets out", got); end
    if (underflow)  begin failures++; $display("FAIL underflow"); end
    if (id_count < 32'(n_id)) begin failures++; $display("FAIL id_count %0d < %0d", id_count, n_id); end
    $display("%0d packets, %0d ID packets", got, n_id);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
