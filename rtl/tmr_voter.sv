// tmr_voter: bitwise two-out-of-three majority of three words.
// Purely combinational; used three times by tmr_reg so that the voter itself
// is triplicated. Three voters per protected register follow the published
// design; the sum-of-products form is the usual majority gate.
module tmr_voter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] c,
  output logic [WIDTH-1:0] y
);
  always_comb y = (a & b) | (a & c) | (b & c);
endmodule
