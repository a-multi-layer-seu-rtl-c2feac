// scrambler_tb: the scrambler must match the reference serial scrambler bit
// for bit (both start from a zero history after reset), skip invalid slots,
// leave the header alone, and its output must descramble back to the input.
`timescale 1ns/1ps
module scrambler_tb;
  import router_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  pkt_t in_pkt = '0, out_pkt;
  int checks = 0, failures = 0;
  logic [63:0] hs = '0, hd = 64'hFFFF_0000_FFFF_0000;

  scrambler dut (.clk, .rst, .in_valid, .in_pkt, .out_valid, .out_pkt);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_t orig, exp;
    int   nvalid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 500; n++) begin
      in_valid = ($urandom % 3) != 0;
      orig     = {HDR_DATA, 26'($urandom)};
      in_pkt   = orig;
      if (in_valid) exp = {HDR_DATA, ref_scramble(hs, pay_of(orig))};
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL valid at %0d", n); end
      if (in_valid) begin
        logic [25:0] back;
        nvalid++;
        checks++;
        if (out_pkt !== exp) begin failures++; $display("FAIL scramble %0d got %h exp %h", n, out_pkt, exp); end
        back = ref_descramble(hd, pay_of(out_pkt));
        if (nvalid > 3) begin
          checks++;
          if (back !== pay_of(orig)) begin failures++; $display("FAIL roundtrip %0d", n); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
