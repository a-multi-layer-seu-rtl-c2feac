// packet_decoder_tb: a stream of random FEB packets is serialised into 20-bit
// words at 240 MHz, starting at a random bit offset. The decoder must lock,
// then deliver every packet in order at one packet per 160 MHz clock. Later
// extra bits are slipped into the stream: the decoder must lose lock, relock
// with its header position moved by the slip, and deliver packets again.
`timescale 1ps/1ps
module packet_decoder_tb;
  import router_pkg::*;
  logic clk_rx = 0, clk = 0, rst_rx = 1, rst = 1;
  logic [19:0] rx_data = '0;
  logic pkt_valid, locked;
  pkt_t pkt;
  logic [4:0] hdr_pos;
  int checks = 0, failures = 0;

  packet_decoder dut (.clk_rx, .rst_rx, .rx_data, .clk, .rst, .pkt_valid, .pkt, .locked, .hdr_pos);

  always #2000 clk_rx = ~clk_rx;   // 4 ns : 6 ns = 240 : 160 MHz
  always #3000 clk    = ~clk;

  // bit stream source
  logic bitq[$];
  pkt_t sent[$];
  int   slip_bits = 0;

  task automatic add_packet();
    pkt_t p;
    p = {(($urandom % 3) == 0) ? HDR_DATA : HDR_NULL, 26'($urandom)};
    sent.push_back(p);
    for (int i = PKT_W - 1; i >= 0; i--) bitq.push_back(p[i]);
  endtask

  always @(posedge clk_rx) begin
    logic [19:0] w;
    while (bitq.size() < 40) add_packet();
    for (int i = 19; i >= 0; i--) w[i] = bitq.pop_front();
    rx_data <= w;
  end

  // receiver side check
  int   matched = 0, rx_count = 0, lock_events = 0, relocks = 0;
  bit   synced = 0, resync_ok = 0;
  int   cyc = 0, first_cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && pkt_valid) begin
      rx_count++;
      if (!synced) begin
        // find this packet among those sent (tail of the queue)
        while (sent.size() > 0 && sent[0] !== pkt) void'(sent.pop_front());
        if (sent.size() > 0) begin
          synced = 1; void'(sent.pop_front()); first_cyc = cyc; matched = 1;
        end
      end else begin
        checks++;
        if ((sent.size() == 0 || sent[0] !== pkt) && resync_ok) begin
          // the packet cut by the slip, or garbage before lock is lost
          synced = 0; checks--;
        end else if (sent.size() == 0 || sent[0] !== pkt) begin
          failures++;
          $display("FAIL packet order: got %h exp %h", pkt, sent[0]);
        end else begin
          void'(sent.pop_front()); matched++;
        end
      end
    end
  end

  initial begin
    #60000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int off;
    int unsigned pos0;
    int m0, c0;
    off = $urandom % 30;
    for (int i = 0; i < off; i++) bitq.push_back(1'($urandom));
    repeat (4) @(posedge clk);
    rst_rx = 0; rst = 0;
    // lock within 30 slips plus LOCK_GOOD chunks
    repeat (200) @(posedge clk);
    checks++;
    if (!locked) begin failures++; $display("FAIL no lock"); end
    checks++;
    if (!synced) begin failures++; $display("FAIL no packet matched after lock"); end
    // throughput: one packet per core clock
    m0 = matched; c0 = cyc;
    repeat (400) @(posedge clk);
    checks++;
    if ((matched - m0) < 396 || (matched - m0) > 404) begin
      failures++; $display("FAIL rate: %0d packets in 400 clocks", matched - m0);
    end
    // slip 7 bits into the stream: lock is lost, then regained at pos+7
    pos0 = hdr_pos;
    @(posedge clk_rx);
    for (int i = 0; i < 7; i++) bitq.push_front(1'b0);
    synced = 0; resync_ok = 1;
    fork
      begin : wait_unlock
        wait (!locked);
      end
      begin
        repeat (100) @(posedge clk);
      end
    join_any
    disable fork;
    checks++;
    if (locked) begin failures++; $display("FAIL lock not lost after slip"); end
    wait (locked);
    repeat (20) @(posedge clk);
    resync_ok = 0;
    checks++;
    if (hdr_pos != (pos0 + 7) % 30) begin
      failures++; $display("FAIL header position after slip: %0d, before %0d", hdr_pos, pos0);
    end
    m0 = matched;
    repeat (200) @(posedge clk);
    checks++;
    if (!synced || matched - m0 < 150) begin failures++; $display("FAIL no traffic after relock"); end
    $display("lock at pos %0d, relock at pos %0d, %0d packets", pos0, hdr_pos, matched);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
