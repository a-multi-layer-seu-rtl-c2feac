// tmr_reg: triple-modular-redundant state register with three voters.
//
// The router protects the state of its control and initialisation logic with
// TMR and three voters, as published. The protected logic is used in three
// domains. Domain i has its own copy of the register, its own majority voter
// over all three copies (output q[i]) and its own next-state logic, which
// reads q[i] and drives d[i] and load[i]. A copy that was not loaded reloads
// its own voter, so an upset copy is outvoted at once and scrubbed one clock
// later. An upset in one domain's voter or next-state logic corrupts only that
// domain's copy, which the other two outvote. Two copies upset in the same bit
// before a clock edge win the vote, as with any TMR.
//
// Interface: per domain i, load[i] = 1 writes d[i] into copy i; q[i] is the
// voted value seen by domain i. rst writes RST_VAL into all copies.
// Timing: q follows d by one clock. How the three domains are split, and that
// the single data path outside reads domain 0, are this design's choices.
module tmr_reg #(
  parameter int unsigned        WIDTH   = 8,
  parameter logic [WIDTH-1:0]   RST_VAL = '0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [2:0]       load,
  input  logic [WIDTH-1:0] d [3],
  output logic [WIDTH-1:0] q [3]
);
  // keep the three copies apart: a synthesis tool would otherwise merge them
  (* keep = "true", dont_touch = "true" *) logic [WIDTH-1:0] copy [3];

  for (genvar i = 0; i < 3; i++) begin : g_dom
    tmr_voter #(.WIDTH(WIDTH)) u_vote (.a(copy[0]), .b(copy[1]), .c(copy[2]), .y(q[i]));
    always_ff @(posedge clk) begin
      if (rst)          copy[i] <= RST_VAL;
      else if (load[i]) copy[i] <= d[i];
      else              copy[i] <= q[i];
    end
  end
endmodule
