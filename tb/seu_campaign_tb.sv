// seu_campaign_tb: an upset campaign on the full-size router, in the spirit
// of the neutron-beam runs. While twelve front-end models send test traffic,
// upsets are injected at random:
//   - single upsets: random bits of one TMR copy of a link's alignment state
//     or of the multi-boot state. TMR must hide every one of them.
//   - double upsets: the same bit in two copies of a link's alignment state,
//     which defeats TMR. The link must recover by itself (relock).
//   - one hard-IP failure: a receiver's output is held at zero, which no
//     logic in the fabric can repair.
// The link-loss rule of the radiation test is applied per link: the link is
// bad while it is unlocked or its header position differs from the value
// learnt after reset. A link that stays bad for PERSIST clocks counts as an
// SEU failure. That is the five-minute rule, scaled to clocks. A failure is
// answered as the second mitigation layer does: a multi-boot request goes to
// the mbar_controller. Once its port sequence has run, the testbench models
// the reload by resetting the router and releasing the stuck receiver.
// Expected: no failure from single upsets, no persistent failure from double
// upsets, exactly one failure (the stuck receiver) repaired by the reload.
`timescale 1ps/1ps
module seu_campaign_tb;
  import router_pkg::*;
  localparam int N_IN = 12, N_OUT = 4;
  localparam int PERSIST = 1500;      // core clocks
  localparam int N_EVENTS = 240;

  logic clk_rx = 0, clk = 0, clk_tx = 0, clk_cfg = 0;
  logic rst_rx = 1, rst = 1, rst_tx = 1, rst_cfg = 1;
  logic [19:0] rx_data [N_IN], feb_data [N_IN];
  logic [19:0] tx_data [N_OUT];
  logic [7:0]  router_id = 8'h21;
  logic [N_IN-1:0]  locked, chk_valid;
  logic [4:0]  hdr_pos   [N_IN];
  logic [12:0] chk_flags [N_IN];
  logic [15:0] chk_errs  [N_IN], drop_count [N_IN], null_count [N_IN];
  logic [31:0] id_count  [N_OUT];
  logic [N_OUT-1:0] tx_underflow;
  logic mbar_trigger = 0, mbar_busy, icap_csib, icap_rdwrb;
  logic [2:0] cur_image = 3'd0, next_image;
  logic [31:0] icap_i;
  logic [N_IN-1:0] stuck = '0;
  int checks = 0, failures = 0;

  router_top dut (.*);

  always #2000 clk_rx  = ~clk_rx;
  always #3000 clk     = ~clk;
  always #2000 clk_tx  = ~clk_tx;
  always #5000 clk_cfg = ~clk_cfg;

  for (genvar i = 0; i < N_IN; i++) begin : g_feb
    logic fstb;
    logic [25:0] fpay;
    feb_emulator #(.LANE(i)) u_feb (.clk_rx, .burst(1'b0), .slip_req(1'b0), .corrupt_req(1'b0),
      .rx_data(feb_data[i]), .frame_stb(fstb), .frame_pay(fpay));
    assign rx_data[i] = stuck[i] ? 20'h0 : feb_data[i];
  end

  // ---------------- link-loss monitor ----------------
  logic [4:0] ref_pos [N_IN];
  int         bad_run [N_IN];
  bit         armed = 0;
  int         seu_failures = 0, transient_events = 0, fail_link = -1;
  bit         was_bad [N_IN];
  always @(posedge clk) if (armed) begin
    for (int i = 0; i < N_IN; i++) begin
      bit bad;
      bad = !locked[i] || hdr_pos[i] != ref_pos[i];
      if (bad) begin
        if (!was_bad[i]) transient_events++;
        bad_run[i]++;
        if (bad_run[i] == PERSIST) begin
          seu_failures++; fail_link = i;
          $display("SEU failure on link %0d at clock %0d", i, bad_run[i]);
        end
      end else bad_run[i] = 0;
      was_bad[i] = bad;
    end
  end

  task automatic learn();
    for (int i = 0; i < N_IN; i++) begin
      ref_pos[i] = hdr_pos[i]; bad_run[i] = 0; was_bad[i] = 0;
    end
  endtask

  task automatic reset_router();
    rst_rx = 1; rst = 1; rst_tx = 1; rst_cfg = 1;
    repeat (4) @(posedge clk);
    rst_rx = 0; rst = 0; rst_tx = 0; rst_cfg = 0;
  endtask

  initial begin
    #900000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_single = 0, n_double = 0, n_mbar_single = 0, recovered = 0;
    int errs0;
    reset_router();
    repeat (400) @(posedge clk);
    checks++;
    if (locked != '1) begin failures++; $display("FAIL not all links locked"); end
    learn();
    armed = 1;
    for (int e = 0; e < N_EVENTS; e++) begin
      int   l, c, kind;
      logic [12:0] m;
      repeat (100 + $urandom % 200) @(posedge clk);
      @(negedge clk);
      l = $urandom % N_IN;
      c = $urandom % 3;
      kind = $urandom % 10;
      if (e == N_EVENTS / 2) begin
        stuck[l] = 1'b1;                    // hard-IP failure
        $display("receiver %0d stuck", l);
      end else if (kind == 0) begin
        m = 13'(1 << ($urandom % 13));
        case (l)
          0: begin dut.g_link[0].u_dec.u_state.copy[c] ^= m; dut.g_link[0].u_dec.u_state.copy[(c+1)%3] ^= m; end
          1: begin dut.g_link[1].u_dec.u_state.copy[c] ^= m; dut.g_link[1].u_dec.u_state.copy[(c+1)%3] ^= m; end
          2: begin dut.g_link[2].u_dec.u_state.copy[c] ^= m; dut.g_link[2].u_dec.u_state.copy[(c+1)%3] ^= m; end
          3: begin dut.g_link[3].u_dec.u_state.copy[c] ^= m; dut.g_link[3].u_dec.u_state.copy[(c+1)%3] ^= m; end
          4: begin dut.g_link[4].u_dec.u_state.copy[c] ^= m; dut.g_link[4].u_dec.u_state.copy[(c+1)%3] ^= m; end
          5: begin dut.g_link[5].u_dec.u_state.copy[c] ^= m; dut.g_link[5].u_dec.u_state.copy[(c+1)%3] ^= m; end
          6: begin dut.g_link[6].u_dec.u_state.copy[c] ^= m; dut.g_link[6].u_dec.u_state.copy[(c+1)%3] ^= m; end
          7: begin dut.g_link[7].u_dec.u_state.copy[c] ^= m; dut.g_link[7].u_dec.u_state.copy[(c+1)%3] ^= m; end
          8: begin dut.g_link[8].u_dec.u_state.copy[c] ^= m; dut.g_link[8].u_dec.u_state.copy[(c+1)%3] ^= m; end
          9: begin dut.g_link[9].u_dec.u_state.copy[c] ^= m; dut.g_link[9].u_dec.u_state.copy[(c+1)%3] ^= m; end
          10: begin dut.g_link[10].u_dec.u_state.copy[c] ^= m; dut.g_link[10].u_dec.u_state.copy[(c+1)%3] ^= m; end
          default: begin dut.g_link[11].u_dec.u_state.copy[c] ^= m; dut.g_link[11].u_dec.u_state.copy[(c+1)%3] ^= m; end
        endcase
        n_double++;
      end else if (kind == 1) begin
        dut.u_mbar.u_state.copy[c] ^= 7'($urandom);
        n_mbar_single++;
      end else begin
        m = 13'($urandom) | 13'd1;
        case (l)
          0: dut.g_link[0].u_dec.u_state.copy[c] ^= m;
          1: dut.g_link[1].u_dec.u_state.copy[c] ^= m;
          2: dut.g_link[2].u_dec.u_state.copy[c] ^= m;
          3: dut.g_link[3].u_dec.u_state.copy[c] ^= m;
          4: dut.g_link[4].u_dec.u_state.copy[c] ^= m;
          5: dut.g_link[5].u_dec.u_state.copy[c] ^= m;
          6: dut.g_link[6].u_dec.u_state.copy[c] ^= m;
          7: dut.g_link[7].u_dec.u_state.copy[c] ^= m;
          8: dut.g_link[8].u_dec.u_state.copy[c] ^= m;
          9: dut.g_link[9].u_dec.u_state.copy[c] ^= m;
          10: dut.g_link[10].u_dec.u_state.copy[c] ^= m;
          default: dut.g_link[11].u_dec.u_state.copy[c] ^= m;
        endcase
        n_single++;
      end
      // layer 2: a persistent failure is answered by a multi-boot reload
      if (seu_failures > recovered) begin
        @(negedge clk_cfg) mbar_trigger = 1;
        @(negedge clk_cfg) mbar_trigger = 0;
        wait (!mbar_busy);
        checks++;
        if (next_image != cur_image + 3'd1) begin failures++; $display("FAIL reload copy %0d", next_image); end
        cur_image = next_image;
        armed = 0;
        stuck = '0;                           // the reload re-initialises the receiver
        reset_router();
        repeat (400) @(posedge clk);
        checks++;
        if (locked != '1) begin failures++; $display("FAIL links not locked after reload"); end
        learn();
        armed = 1;
        recovered++;
      end
    end
    // settle and let a last failure be seen
    repeat (PERSIST + 400) @(posedge clk);
    errs0 = 0;
    for (int i = 0; i < N_IN; i++) errs0 += chk_errs[i];
    checks += 4;
    if (seu_failures != 1) begin failures++; $display("FAIL %0d SEU failures, expected 1", seu_failures); end
    if (recovered != 1)    begin failures++; $display("FAIL %0d reloads, expected 1", recovered); end
    if (locked != '1)      begin failures++; $display("FAIL links not locked at the end"); end
    if (n_double == 0)     begin failures++; $display("FAIL no double upset was injected"); end
    $display("upsets: %0d single (link state), %0d single (multi-boot state), %0d double",
             n_single, n_mbar_single, n_double);
    $display("link-loss indicator events %0d, SEU failures %0d, reloads %0d, checker errors since reload %0d",
             transient_events, seu_failures, recovered, errs0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
