// mbar_controller_tb: for every loaded copy 0..5 a multi-boot trigger must
// produce the eight-word configuration-port sequence (dummy, sync, NOOP, write
// WBSTAR, start address of the next copy, write CMD, IPROG, NOOP) on eight
// consecutive clocks, bit-swapped per byte, with chip select low only then;
// the copy after 5 is 0. A trigger while busy is ignored, and an upset in one
// TMR copy of the sequence state mid-sequence changes nothing.
`timescale 1ns/1ps
module mbar_controller_tb;
  logic clk = 0, rst = 1, trigger = 0;
  logic [2:0] cur_image = '0, next_image;
  logic busy, icap_csib, icap_rdwrb;
  logic [31:0] icap_i, icap_word;
  int checks = 0, failures = 0;

  mbar_controller dut (.clk, .rst, .trigger, .cur_image, .busy, .next_image,
                       .icap_csib, .icap_rdwrb, .icap_i, .icap_word);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] unswap(input logic [31:0] w);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[(i / 8) * 8 + 7 - (i % 8)] = w[i];
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!icap_csib || busy) begin failures++; $display("FAIL port active while idle"); end
    for (int img = 0; img < 6; img++) begin
      logic [31:0] exp [8];
      int nxt;
      nxt = (img + 1) % 6;
      exp = '{32'hFFFFFFFF, 32'hAA995566, 32'h20000000, 32'h30020001,
              32'(nxt) * 32'h00500000, 32'h30008001, 32'h0000000F, 32'h20000000};
      cur_image = 3'(img);
      trigger = 1;
      @(negedge clk) trigger = 0;
      for (int w = 0; w < 8; w++) begin
        checks += 3;
        if (icap_csib || icap_rdwrb) begin failures++; $display("FAIL img %0d word %0d: port not writing", img, w); end
        if (unswap(icap_i) !== exp[w]) begin
          failures++; $display("FAIL img %0d word %0d: %h exp %h", img, w, unswap(icap_i), exp[w]);
        end
        if (next_image != 3'(nxt)) begin failures++; $display("FAIL next image %0d exp %0d", next_image, nxt); end
        if (w == 3) begin
          trigger = 1;                       // ignored while busy
          dut.u_state.copy[img % 3] = dut.u_state.copy[img % 3] ^ 7'h7F;   // single upset
        end
        @(negedge clk) trigger = 0;
      end
      checks++;
      if (!icap_csib || busy) begin failures++; $display("FAIL img %0d: sequence did not end", img); end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
