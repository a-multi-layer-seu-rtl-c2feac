// payload_checker_tb: sends test payloads (13 byte groups, group g advancing
// by g+1 per payload) as four data frames followed by NULL packets. Clean
// payloads must give all-ones flags; a payload with one corrupted group must
// clear exactly that flag bit and count one error; a short payload makes the
// next one be learnt, not checked.
`timescale 1ns/1ps
module payload_checker_tb;
  import router_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0;
  pkt_t in_pkt = '0;
  logic [12:0] flags;
  logic flags_valid;
  logic [15:0] err_count;
  int checks = 0, failures = 0;

  payload_checker dut (.clk, .rst, .in_valid, .in_pkt, .flags, .flags_valid, .err_count);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [103:0] pl, input int frames);
    for (int f = 0; f < frames; f++) begin
      @(negedge clk);
      in_valid = 1; in_pkt = {HDR_DATA, pl[103 - 26*f -: 26]};
    end
    for (int z = 0; z < 1 + $urandom % 3; z++) begin
      @(negedge clk);
      in_valid = 1; in_pkt = {HDR_NULL, 26'($urandom)};
    end
    @(negedge clk) in_valid = 0;
  endtask

  int n_flag = 0;
  logic [12:0] last_flags;
  always @(posedge clk) if (!rst && flags_valid) begin n_flag++; last_flags = flags; end

  initial begin
    logic [103:0] base;
    int exp_err = 0, exp_n = 0;
    base = {$urandom, $urandom, $urandom, 8'($urandom)};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 200; n++) begin
      logic [103:0] pl;
      logic [12:0]  exp_flags;
      int bad;
      pl = test_payload(base, n);
      bad = -1;
      exp_flags = '1;
      if (n > 2 && ($urandom % 4) == 0) begin
        bad = $urandom % 13;
        pl[8*bad +: 8] ^= 8'(1 << ($urandom % 8));
        exp_flags[bad] = 1'b0;
        exp_err++;
      end
      send(pl, 4);
      exp_n++;
      @(negedge clk);
      checks += 2;
      if (n_flag != exp_n)       begin failures++; $display("FAIL payload %0d: no flags", n); end
      if (last_flags !== exp_flags) begin failures++; $display("FAIL payload %0d flags %b exp %b", n, last_flags, exp_flags); end
      // a corrupted payload becomes the reference: the next one then shows the
      // same group wrong again, so resynchronise with a short payload
      if (bad >= 0) begin
        send(pl, 2);
        n++;
        send(test_payload(base, n), 4);     // learnt
        exp_n++;
        @(negedge clk);
        checks++;
        if (last_flags !== '1) begin failures++; $display("FAIL relearn flags %b", last_flags); end
      end
    end
    checks++;
    if (err_count != 16'(exp_err)) begin failures++; $display("FAIL err_count %0d exp %0d", err_count, exp_err); end
    $display("%0d payloads, %0d corrupted", exp_n, exp_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
