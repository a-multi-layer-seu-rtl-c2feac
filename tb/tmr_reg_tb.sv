// tmr_reg_tb: checks that the TMR register loads, holds, outvotes and scrubs a
// single upset copy, outvotes a wrong next state from one domain, and (as TMR
// must) follows a double upset.
`timescale 1ns/1ps
module tmr_reg_tb;
  localparam int W = 8;
  logic clk = 0, rst = 1;
  logic [2:0] load = '0;
  logic [W-1:0] d [3];
  logic [W-1:0] q [3];
  int checks = 0, failures = 0;

  tmr_reg #(.WIDTH(W), .RST_VAL(8'h5A)) dut (.clk, .rst, .load, .d, .q);

  always #5 clk = ~clk;

  task automatic check_all(input logic [W-1:0] exp, input string what);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (q[i] !== exp) begin
        failures++;
        $display("FAIL %s: domain %0d got %h exp %h", what, i, q[i], exp);
      end
    end
  endtask

  task automatic check(input logic [W-1:0] got, input logic [W-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) d[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    check_all(8'h5A, "reset value");
    for (int n = 0; n < 40; n++) begin
      logic [W-1:0] v, flip;
      int unsigned c, c2;
      v = 8'($urandom);
      // all domains agree
      @(negedge clk); load = 3'b111; for (int i = 0; i < 3; i++) d[i] = v;
      @(negedge clk); load = 3'b000;
      check_all(v, "load");
      // one domain computes a wrong next state: outvoted, then scrubbed
      flip = 8'($urandom) | 8'h01;
      c = $urandom % 3;
      @(negedge clk); load = 3'b111; for (int i = 0; i < 3; i++) d[i] = v; d[c] = v ^ flip;
      @(negedge clk); load = 3'b000;
      check_all(v, "wrong next state in one domain outvoted");
      @(negedge clk);
      check(dut.copy[c], v, "wrong copy scrubbed");
      // single upset in one copy: outputs unchanged, copy scrubbed next clock
      c = $urandom % 3;
      dut.copy[c] = dut.copy[c] ^ flip;
      #1 check_all(v, "single upset outvoted");
      @(negedge clk);
      check(dut.copy[c], v, "upset copy scrubbed");
      check_all(v, "hold after scrub");
      // the same bits upset in two copies win the vote
      c2 = (c + 1) % 3;
      dut.copy[c]  = dut.copy[c]  ^ flip;
      dut.copy[c2] = dut.copy[c2] ^ flip;
      #1 check_all(v ^ flip, "double upset propagates");
      @(negedge clk);
      check(dut.copy[(c + 2) % 3], v ^ flip, "third copy follows double upset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
