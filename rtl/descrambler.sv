// descrambler: stage 3 of the router datapath, one per input link.
//
// Recovers the original 26-bit payload of every FEB packet (data and NULL)
// that the front end scrambled for DC balance. The scrambler polynomial is not
// published; this design uses the self-synchronising 1 + x^39 + x^58 form
// defined in router_pkg, run over the serial stream of payload bits (headers
// are not scrambled). After 58 payload bits (three packets) the output is
// correct whatever the initial history. Latency: one clock. Throughput: one
// packet per clock.
module descrambler
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

  always_comb r = descramble(st, pay_of(in_pkt));

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
