// descrambler_tb: random packets are scrambled by the reference serial
// scrambler and fed to the descrambler; after the 58-bit history has filled
// (three packets) every payload must come out as sent, header untouched,
// exactly one clock later.
`timescale 1ns/1ps
module descrambler_tb;
  import router_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  pkt_t in_pkt = '0, out_pkt;
  int checks = 0, failures = 0;
  logic [63:0] h = 64'h0123_4567_89AB_CDEF;   // the sender's history is arbitrary

  descrambler dut (.clk, .rst, .in_valid, .in_pkt, .out_valid, .out_pkt);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_t orig;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 500; n++) begin
      logic [3:0]  hd;
      logic [25:0] pl;
      hd = ($urandom % 2) ? HDR_DATA : HDR_NULL;
      pl = 26'($urandom);
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin
        orig   = {hd, pl};
        in_pkt = {hd, ref_scramble(h, pl)};
      end
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL valid latency at %0d", n); end
      if (in_valid && n >= 4) begin
        checks++;
        if (out_pkt !== orig) begin
          failures++; $display("FAIL packet %0d got %h exp %h", n, out_pkt, orig);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
