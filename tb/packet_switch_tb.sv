// packet_switch_tb: every input link carries tagged packets (lane number and
// sequence number in the payload), data or NULL at random. Phase 1, light
// load: every data packet must reach the output of its group, in order per
// lane, and nothing is dropped; NULL packets are counted and never forwarded.
// Phase 2, one group flooded: packets are dropped and counted, the three lanes
// share the output in round robin, and forwarded + dropped = sent.
`timescale 1ns/1ps
module packet_switch_tb;
  import router_pkg::*;
  localparam int N_IN = 12, N_OUT = 4;
  logic clk = 0, rst = 1;
  logic [N_IN-1:0]  in_valid = '0;
  pkt_t             in_pkt [N_IN];
  logic [N_OUT-1:0] out_valid;
  pkt_t             out_pkt [N_OUT];
  logic [15:0]      drop_count [N_IN], null_count [N_IN];
  int checks = 0, failures = 0;

  packet_switch dut (.clk, .rst, .in_valid, .in_pkt, .out_valid, .out_pkt, .drop_count, .null_count);
  always #5 clk = ~clk;

  int unsigned seq_sent [N_IN], nulls_sent [N_IN], fwd [N_IN], last_seq [N_IN];
  int unsigned fwd_p1 [N_IN];

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor: payload = {lane[3:0], seq[21:0]}
  always @(posedge clk) if (!rst) begin
    for (int k = 0; k < N_OUT; k++) if (out_valid[k]) begin
      int unsigned lane, sq;
      lane = out_pkt[k][25:22];
      sq   = out_pkt[k][21:0];
      checks++;
      if (hdr_of(out_pkt[k]) != HDR_DATA || lane % N_OUT != k) begin
        failures++; $display("FAIL output %0d got lane %0d header %b", k, lane, hdr_of(out_pkt[k]));
      end else begin
        checks++;
        if (sq <= last_seq[lane] && fwd[lane] != 0) begin
          failures++; $display("FAIL order lane %0d seq %0d after %0d", lane, sq, last_seq[lane]);
        end
        last_seq[lane] = sq;
        fwd[lane]++;
      end
    end
  end

  task automatic drive(input int cycles, input int pct_data [N_IN]);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++) begin
        in_valid[i] = 1'b1;
        if (($urandom % 100) < pct_data[i]) begin
          seq_sent[i]++;
          in_pkt[i] = {HDR_DATA, 4'(i), 22'(seq_sent[i])};
        end else begin
          nulls_sent[i]++;
          in_pkt[i] = {HDR_NULL, 26'($urandom)};
        end
      end
    end
    @(negedge clk) in_valid = '0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    int pct [N_IN];
    for (int i = 0; i < N_IN; i++) begin
      seq_sent[i] = 0; nulls_sent[i] = 0; fwd[i] = 0; last_seq[i] = 0; in_pkt[i] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // phase 1: 20 % data on every lane
    for (int i = 0; i < N_IN; i++) pct[i] = 20;
    drive(2000, pct);
    for (int i = 0; i < N_IN; i++) begin
      checks += 3;
      if (fwd[i] != seq_sent[i]) begin failures++; $display("FAIL lane %0d forwarded %0d of %0d", i, fwd[i], seq_sent[i]); end
      if (drop_count[i] != 0)    begin failures++; $display("FAIL lane %0d dropped at light load", i); end
      if (null_count[i] != 16'(nulls_sent[i])) begin failures++; $display("FAIL lane %0d null count %0d exp %0d", i, null_count[i], nulls_sent[i]); end
    end
    // phase 2: group of output 1 (lanes 1, 5, 9) flooded with data
    foreach (fwd[i]) fwd_p1[i] = fwd[i];
    for (int i = 0; i < N_IN; i++) pct[i] = (i % N_OUT == 1) ? 100 : 10;
    drive(600, pct);
    begin
      int unsigned tot_drop = 0;
      for (int i = 0; i < N_IN; i++) begin
        checks++;
        if (fwd[i] + drop_count[i] != seq_sent[i]) begin
          failures++; $display("FAIL lane %0d fwd %0d + drop %0d != sent %0d", i, fwd[i], drop_count[i], seq_sent[i]);
        end
        tot_drop += drop_count[i];
      end
      checks++;
      if (tot_drop == 0) begin failures++; $display("FAIL overflow never dropped"); end
      // round robin: each of the three flooded lanes got about a third
      foreach (fwd[i]) if (i % N_OUT == 1) begin
        checks++;
        // 600 clocks of flood: about 200 packets for each of the three lanes
        if (fwd[i] - fwd_p1[i] < 180) begin failures++; $display("FAIL lane %0d starved: %0d", i, fwd[i] - fwd_p1[i]); end
      end
      $display("dropped %0d packets in the flood", tot_drop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
