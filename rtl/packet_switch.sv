// packet_switch: stage 4 of the router datapath.
//
// Takes the packets of the N_IN (12) input links, suppresses NULL packets and
// forwards data packets to the N_OUT (4) output links. Both numbers and the
// NULL suppression are published; the mapping and the queueing are this
// design's own: output k serves inputs k, k+N_OUT, k+2*N_OUT (link k of each
// of the three front-end boards). Every input has a FIFO_DEPTH-entry queue of
// data packets. Every clock each output takes one packet from its group's
// queues in round-robin order, so an output carries at most one packet per
// clock, the same 4.8 Gb/s as an input; the switch relies on the low
// occupancy of the inputs. A data packet that finds its queue full is dropped
// and counted in drop_count; NULL packets are counted in null_count. Packets
// with an illegal header are discarded.
//
// Timing: a packet written in clock t can leave in clock t+1 (out_* are
// registered). out_valid low means "nothing to send"; packet_builder then
// sends the router ID instead.
module packet_switch
  import router_pkg::*;
#(
  parameter int unsigned N_IN       = 12,
  parameter int unsigned N_OUT      = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_IN-1:0]   in_valid,
  input  pkt_t              in_pkt     [N_IN],
  output logic [N_OUT-1:0]  out_valid,
  output pkt_t              out_pkt    [N_OUT],
  output logic [15:0]       drop_count [N_IN],
  output logic [15:0]       null_count [N_IN]
);
  localparam int unsigned GROUP = N_IN / N_OUT;
  localparam int unsigned AW    = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int unsigned CW    = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned RW    = (GROUP > 1) ? $clog2(GROUP) : 1;

  pkt_t             q   [N_IN][FIFO_DEPTH];
  logic [AW-1:0]    wp  [N_IN];
  logic [AW-1:0]    rp  [N_IN];
  logic [CW-1:0]    cnt [N_IN];
  logic [N_IN-1:0]  pop;
  logic [RW-1:0]    rr  [N_OUT];
  logic [RW-1:0]    sel [N_OUT];
  logic [N_OUT-1:0] any;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(FIFO_DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  // round-robin choice per output
  always_comb begin
    pop = '0;
    for (int k = 0; k < N_OUT; k++) begin
      any[k] = 1'b0;
      sel[k] = rr[k];
      for (int j = GROUP - 1; j >= 0; j--) begin
        // search from rr upwards; the last hit in this loop order wins
        int unsigned c;
        c = (int'(rr[k]) + j) % GROUP;
        if (cnt[k + N_OUT * c] != '0) begin
          any[k] = 1'b1;
          sel[k] = RW'(c);
        end
      end
      if (any[k]) pop[k + N_OUT * int'(sel[k])] = 1'b1;
    end
  end

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    logic push, full;
    assign full = (cnt[i] == CW'(FIFO_DEPTH));
    assign push = in_valid[i] && is_data(in_pkt[i]) && !full;
    always_ff @(posedge clk) begin
      if (rst) begin
        wp[i] <= '0; rp[i] <= '0; cnt[i] <= '0;
        drop_count[i] <= '0; null_count[i] <= '0;
      end else begin
        if (push) begin
          q[i][wp[i]] <= in_pkt[i];
          wp[i]       <= inc(wp[i]);
        end
        if (pop[i]) rp[i] <= inc(rp[i]);
        cnt[i] <= cnt[i] + CW'(push) - CW'(pop[i]);
        if (in_valid[i] && is_data(in_pkt[i]) && full) drop_count[i] <= drop_count[i] + 1'b1;
        if (in_valid[i] && hdr_of(in_pkt[i]) == HDR_NULL) null_count[i] <= null_count[i] + 1'b1;
      end
    end
  end

  for (genvar k = 0; k < N_OUT; k++) begin : g_out
    always_ff @(posedge clk) begin
      if (rst) begin
        rr[k] <= '0; out_valid[k] <= 1'b0; out_pkt[k] <= '0;
      end else begin
        out_valid[k] <= any[k];
        if (any[k]) begin
          out_pkt[k] <= q[k + N_OUT * int'(sel[k])][rp[k + N_OUT * int'(sel[k])]];
          rr[k]      <= (int'(sel[k]) == GROUP - 1) ? '0 : sel[k] + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (N_IN % N_OUT == 0) else $error("N_IN must be a multiple of N_OUT");
  end
endmodule
