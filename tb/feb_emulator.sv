// feb_emulator: behavioural model of one front-end link for the testbenches.
// It sends test payloads of four data frames (13 byte groups, group g
// advancing by g+1 per payload, from a per-link base) separated by runs of
// NULL packets, scrambles every payload with the reference scrambler and
// serialises the packets into 20-bit words, bit 19 first, starting at a
// random bit offset. Controls: burst (no NULL gaps), slip_req (insert
// SLIP_BITS zero bits once), corrupt_req (flip one bit of the next data frame
// before scrambling). Every data frame sent is reported on frame_stb /
// frame_pay (unscrambled payload) so the testbench can follow it.
`timescale 1ps/1ps
module feb_emulator
  import router_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned LANE      = 0,
  parameter int unsigned GAP_MIN   = 8,
  parameter int unsigned GAP_MAX   = 14,
  parameter int unsigned SLIP_BITS = 5
) (
  input  logic        clk_rx,
  input  logic        burst,
  input  logic        slip_req,
  input  logic        corrupt_req,
  output logic [19:0] rx_data,
  output logic        frame_stb,
  output logic [25:0] frame_pay
);
  logic         bitq[$];
  logic [63:0]  hist;
  logic [103:0] base, cur;
  int unsigned  n_pay = 0, frame = 0, gap = 0;
  bit           slip_done = 0, corrupt_pending = 0, corrupt_seen = 0;

  initial begin
    hist = {$urandom, $urandom};
    base = {$urandom, $urandom, $urandom, 8'(LANE)};
    cur  = test_payload(base, 0);
    rx_data = '0; frame_stb = 0; frame_pay = '0;
    repeat ($urandom % 30) bitq.push_back(1'($urandom));
  end

  task automatic push_pkt(input logic [3:0] h, input logic [25:0] pl);
    logic [25:0] s;
    s = ref_scramble(hist, pl);
    for (int i = 3; i >= 0; i--)  bitq.push_back(h[i]);
    for (int i = 25; i >= 0; i--) bitq.push_back(s[i]);
  endtask

  always @(posedge clk_rx) begin
    logic [19:0] w;
    frame_stb <= 1'b0;
    if (corrupt_req && !corrupt_seen) corrupt_pending = 1;
    corrupt_seen = corrupt_req;
    if (slip_req && !slip_done) begin
      for (int i = 0; i < SLIP_BITS; i++) bitq.push_front(1'b0);
      slip_done = 1;
    end
    if (!slip_req) slip_done = 0;
    while (bitq.size() < 40) begin
      if (gap > 0 && !burst) begin
        push_pkt(HDR_NULL, 26'($urandom));
        gap--;
      end else begin
        logic [25:0] pl;
        pl = cur[103 - 26*frame -: 26];
        if (corrupt_pending) begin pl[3] = ~pl[3]; corrupt_pending = 0; end
        push_pkt(HDR_DATA, pl);
        frame_stb <= 1'b1;
        frame_pay <= pl;
        frame++;
        if (frame == 4) begin
          frame = 0; n_pay++;
          cur = test_payload(base, n_pay);
          gap = GAP_MIN + $urandom % (GAP_MAX - GAP_MIN + 1);
        end
      end
    end
    for (int i = 19; i >= 0; i--) w[i] = bitq.pop_front();
    rx_data <= w;
  end
endmodule
