// scrambler: stage 5 of the router datapath, one per output link.
//
// Scrambles the 26-bit payload of every forwarded data packet again before
// transmission to the trigger processor; the header is left in clear. Uses the
// same self-synchronising 1 + x^39 + x^58 polynomial as the input side (this
// design's choice; the paper gives no polynomial). The history advances only
// on valid packets, so the receiver descrambles the stream of data packets and
// ignores the ID packets inserted later by packet_builder. Latency: one clock.
module scrambler
  import router_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  pkt_t in_pkt,
  output logic out_valid,
  output pkt_t out_pkt
);
  scr_state_t st;
  logic [SCR_W+PAY_W-1:0] r;

  always_comb r = scramble(st, pay_of(in_pkt));

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= '0; out_valid <= 1'b0; out_pkt <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        st      <= r[SCR_W+PAY_W-1:PAY_W];
        out_pkt <= {hdr_of(in_pkt), r[PAY_W-1:0]};
      end
    end
  end
endmodule
