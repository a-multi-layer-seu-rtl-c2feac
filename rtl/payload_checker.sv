// payload_checker: the router's own test-payload checker, one per input link.
//
// In the radiation test the front-end emulator sends test payloads of 104
// bits split over four data frames (4 x 26 payload bits). The payload is 13
// groups of 8 bits, and from one payload to the next every group advances by
// its own fixed increment. The checker rebuilds each payload after the
// descrambler and compares every group with the previous payload's group plus
// its increment; the result is a 13-bit flag word, bit g = 1 when group g was
// right and 0 when it was wrong. These sizes and the flag convention are
// published. Not published, and chosen here: the increment of group g
// (g = 0 is the least significant byte) is g+1 modulo 256; the first data
// frame after a NULL packet starts a payload, and the first-received frame is
// the most significant; the first payload after reset, after a short payload
// or after an illegal header is learnt, not checked.
//
// Timing: flags and flags_valid are registered one clock after the fourth
// frame; err_count counts payloads with at least one 0 flag.
module payload_checker
  import router_pkg::*;
#(
  parameter int unsigned N_GROUPS = 13,
  parameter int unsigned FRAMES   = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  pkt_t                in_pkt,
  output logic [N_GROUPS-1:0] flags,
  output logic                flags_valid,
  output logic [15:0]         err_count
);
  localparam int unsigned PW = FRAMES * PAY_W;    // 104
  localparam int unsigned FW = $clog2(FRAMES);

  logic [PW-1:0]          acc, prev, full;
  logic [FW-1:0]          fcnt;
  logic                   have_prev;
  logic [N_GROUPS-1:0]    cmp;

  always_comb begin
    full = {acc[PW-PAY_W-1:0], pay_of(in_pkt)};
    for (int g = 0; g < N_GROUPS; g++)
      cmp[g] = !have_prev || (full[8*g +: 8] == 8'(prev[8*g +: 8] + 8'(g + 1)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0; prev <= '0; fcnt <= '0; have_prev <= 1'b0;
      flags <= '1; flags_valid <= 1'b0; err_count <= '0;
    end else begin
      flags_valid <= 1'b0;
      if (in_valid) begin
        if (is_data(in_pkt)) begin
          acc <= full;
          if (fcnt == FW'(FRAMES - 1)) begin
            fcnt        <= '0;
            prev        <= full;
            have_prev   <= 1'b1;
            flags       <= cmp;
            flags_valid <= 1'b1;
            if (cmp != '1) err_count <= err_count + 1'b1;
          end else begin
            fcnt <= fcnt + 1'b1;
          end
        end else begin
          // a NULL (or an illegal header) closes the payload
          if (fcnt != '0 || !hdr_legal(in_pkt)) have_prev <= 1'b0;
          fcnt <= '0;
        end
      end
    end
  end
endmodule
