// router_top_tb: end-to-end test of the router at its full size (12 input
// links, 4 output links, default parameters).
//
// Twelve feb_emulator models drive the receivers; a trigger-processor model
// here reassembles the transmitter words, descrambles the data packets and
// checks that every data packet on output k is the next unseen frame of one
// of its lanes k, k+4, k+8, in order. Idle slots must carry the router ID.
// The run makes every mechanism happen and counts it:
//   lock        all 12 links find the packet boundary
//   null        NULL packets are suppressed
//   id          router-ID packets fill idle output slots
//   overflow    a flood on one output group drops packets in the switch
//   slip        a bit slip on one link: lock lost, header position changes
//   check_err   a corrupted frame is flagged by the payload checker
//   id_change   the trigger-processor model sees a new router ID
//   tmr         an upset in one TMR copy of a link's alignment state is outvoted
//   mbar        a multi-boot request produces the configuration-port sequence
// The three link-loss indicators of the radiation test (header position
// change, checker flag change, router-ID change) are monitored and counted.
`timescale 1ps/1ps
module router_top_tb;
  import router_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_IN = 12, N_OUT = 4;

  logic clk_rx = 0, clk = 0, clk_tx = 0, clk_cfg = 0;
  logic rst_rx = 1, rst = 1, rst_tx = 1, rst_cfg = 1;
  logic [19:0] rx_data [N_IN];
  logic [19:0] tx_data [N_OUT];
  logic [7:0]  router_id = 8'h5D;
  logic [N_IN-1:0]  locked, chk_valid;
  logic [4:0]  hdr_pos   [N_IN];
  logic [12:0] chk_flags [N_IN];
  logic [15:0] chk_errs  [N_IN], drop_count [N_IN], null_count [N_IN];
  logic [31:0] id_count  [N_OUT];
  logic [N_OUT-1:0] tx_underflow;
  logic mbar_trigger = 0, mbar_busy, icap_csib, icap_rdwrb;
  logic [2:0] cur_image = 3'd4, next_image;
  logic [31:0] icap_i;

  int checks = 0, failures = 0;

  router_top dut (.*);

  always #2000 clk_rx  = ~clk_rx;    // 240 MHz (4 ns here, exact 3:2 ratio)
  always #3000 clk     = ~clk;       // 160 MHz
  always #2000 clk_tx  = ~clk_tx;    // 240 MHz
  always #5000 clk_cfg = ~clk_cfg;   // 100 MHz configuration clock

  // ---------------- front ends ----------------
  logic [N_IN-1:0] burst = '0, slip = '0, corrupt = '0, fstb;
  logic [25:0]     fpay [N_IN];
  for (genvar i = 0; i < N_IN; i++) begin : g_feb
    feb_emulator #(.LANE(i)) u_feb (.clk_rx, .burst(burst[i]), .slip_req(slip[i]),
      .corrupt_req(corrupt[i]), .rx_data(rx_data[i]), .frame_stb(fstb[i]), .frame_pay(fpay[i]));
  end

  logic [25:0] lane_q [N_IN][$];
  time         lane_t [N_IN][$];
  time         lat_min = '1, lat_max = 0;
  always @(posedge clk_rx) for (int i = 0; i < N_IN; i++) if (fstb[i]) begin
    lane_q[i].push_back(fpay[i]); lane_t[i].push_back($time);
  end

  // ---------------- trigger-processor model ----------------
  logic [63:0] tp_hist [N_OUT];
  logic [59:0] tp_acc  [N_OUT];
  int          tp_nw   [N_OUT];
  bit          tp_on   [N_OUT];
  bit          lane_synced [N_IN];
  bit          lossy [N_IN];
  bit          slip_group [N_OUT];        // packets of this lane may be lost (slip, flood)
  int          tp_data [N_OUT], tp_ids [N_OUT], tp_skip_bad = 0, tp_unknown = 0;
  logic [7:0]  tp_last_id [N_OUT];
  int          n_id_change = 0;
  bit          monitor_on = 0;

  task automatic tp_packet(input int k, input pkt_t p);
    if (hdr_of(p) == HDR_DATA) begin
      logic [25:0] d;
      bit found;
      d = ref_descramble(tp_hist[k], pay_of(p));
      tp_data[k]++;
      if (tp_data[k] <= 3) return;           // descrambler history filling
      found = 0;
      for (int j = 0; j < N_IN / N_OUT && !found; j++) begin
        int l;
        l = k + N_OUT * j;
        foreach (lane_q[l][x]) if (lane_q[l][x] == d) begin
          if (x != 0 && lane_synced[l] && !lossy[l]) begin
            tp_skip_bad++;
            $display("FAIL lane %0d lost %0d frames", l, x);
          end
          if (monitor_on && !lossy[l]) begin
            time lt;
            lt = $time - lane_t[l][x];
            if (lt < lat_min) lat_min = lt;
            if (lt > lat_max) lat_max = lt;
          end
          repeat (x + 1) begin void'(lane_q[l].pop_front()); void'(lane_t[l].pop_front()); end
          lane_synced[l] = 1;
          found = 1;
          break;
        end
      end
      checks++;
      if (!found) begin
        // not a frame that was sent: the first packets after lock (router
        // descrambler history still filling) or packets cut by a bit slip
        // before the link drops lock; anything else is an error
        tp_unknown++;
        if (monitor_on && !slip_group[k]) begin failures++; $display("FAIL output %0d: unknown data packet %h", k, d); end
      end
    end else begin
      checks++;
      tp_ids[k]++;
      if (hdr_of(p) != HDR_NULL || p[25:8] != '0) begin
        failures++; $display("FAIL output %0d: bad idle packet %h", k, p);
      end else begin
        if (tp_ids[k] > 1 && p[7:0] != tp_last_id[k]) n_id_change++;
        tp_last_id[k] = p[7:0];
      end
    end
  endtask

  always @(posedge clk_tx) if (!rst_tx) begin
    for (int k = 0; k < N_OUT; k++) begin
      if (!tp_on[k] && tx_data[k] != 0) tp_on[k] = 1;
      if (tp_on[k]) begin
        tp_acc[k] = {tp_acc[k][39:0], tx_data[k]};
        tp_nw[k]++;
        if (tp_nw[k] == 3) begin
          tp_nw[k] = 0;
          tp_packet(k, tp_acc[k][59:30]);
          tp_packet(k, tp_acc[k][29:0]);
        end
      end
    end
  end

  // ---------------- link-loss indicators ----------------
  logic [4:0]  last_pos   [N_IN];
  logic [12:0] last_flags [N_IN];
  int n_pos_change = 0, n_flag_change = 0, n_mbar_words = 0;
  always @(posedge clk) if (monitor_on) begin
    for (int i = 0; i < N_IN; i++) begin
      if (hdr_pos[i] != last_pos[i]) n_pos_change++;
      if (chk_flags[i] != last_flags[i]) n_flag_change++;
      last_pos[i] = hdr_pos[i]; last_flags[i] = chk_flags[i];
    end
  end
  always @(posedge clk_cfg) if (!rst_cfg && !icap_csib) n_mbar_words++;

  initial begin
    #400000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_mech(input string name, input int count);
    checks++;
    if (count == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
    else $display("mechanism %-10s happened %0d times", name, count);
  endtask

  initial begin
    int n_lock, n_null, n_drop, n_ids, n_err, tmr_ok;
    for (int k = 0; k < N_OUT; k++) begin
      tp_hist[k] = '0; tp_acc[k] = '0; tp_nw[k] = 0; tp_on[k] = 0; tp_data[k] = 0; tp_ids[k] = 0; tp_last_id[k] = '0;
    end
    for (int i = 0; i < N_IN; i++) begin lane_synced[i] = 0; lossy[i] = 0; end
    for (int k = 0; k < N_OUT; k++) slip_group[k] = 0;
    repeat (4) @(posedge clk);
    rst_rx = 0; rst = 0; rst_tx = 0; rst_cfg = 0;

    // 1. all links lock
    repeat (400) @(posedge clk);
    n_lock = $countones(locked);
    checks++;
    if (locked != '1) begin failures++; $display("FAIL locked = %b", locked); end
    for (int i = 0; i < N_IN; i++) begin last_pos[i] = hdr_pos[i]; last_flags[i] = chk_flags[i]; end
    monitor_on = 1;
    repeat (1500) @(posedge clk);

    // 2. TMR: upset one copy of link 3's alignment state, the link must not notice
    dut.g_link[3].u_dec.u_state.copy[1] = ~dut.g_link[3].u_dec.u_state.copy[1];
    repeat (200) @(posedge clk);
    tmr_ok = (locked[3] && n_pos_change == 0) ? 1 : 0;
    checks++;
    if (!tmr_ok) begin failures++; $display("FAIL single TMR upset disturbed link 3"); end

    // 3. corrupted frame on link 6: checker flags it
    @(negedge clk_rx) corrupt[6] = 1;
    repeat (600) @(posedge clk);
    corrupt[6] = 0;

    // 4. bit slip on link 2: lock lost and regained at another position
    lossy[2] = 1; slip_group[2] = 1;
    @(negedge clk_rx) slip[2] = 1;
    repeat (600) @(posedge clk);
    slip[2] = 0;
    slip_group[2] = 0;
    checks++;
    if (!locked[2]) begin failures++; $display("FAIL link 2 did not relock"); end

    // 5. flood on the group of output 1 (links 1, 5, 9)
    lossy[1] = 1; lossy[5] = 1; lossy[9] = 1;
    burst[1] = 1; burst[5] = 1; burst[9] = 1;
    repeat (400) @(posedge clk);
    burst = '0;
    repeat (600) @(posedge clk);

    // 6. router ID change and a multi-boot request
    router_id = 8'hC3;
    @(negedge clk_cfg) mbar_trigger = 1;
    @(negedge clk_cfg) mbar_trigger = 0;
    repeat (800) @(posedge clk);

    // ---------------- results ----------------
    n_null = 0; n_drop = 0; n_ids = 0; n_err = 0;
    for (int i = 0; i < N_IN; i++) begin
      n_null += null_count[i]; n_drop += drop_count[i]; n_err += chk_errs[i];
    end
    for (int k = 0; k < N_OUT; k++) n_ids += tp_ids[k];
    expect_mech("lock", n_lock);
    expect_mech("null", n_null);
    expect_mech("id", n_ids);
    expect_mech("overflow", n_drop);
    expect_mech("slip", n_pos_change);
    expect_mech("check_err", n_err);
    expect_mech("id_change", n_id_change);
    expect_mech("tmr", tmr_ok);
    expect_mech("mbar", n_mbar_words == 8 ? 1 : 0);
    checks += 5;
    if (chk_errs[6] == 0) begin failures++; $display("FAIL link 6 corruption not flagged"); end
    if (n_flag_change == 0) begin failures++; $display("FAIL checker flags never changed"); end
    if (next_image != 3'd5) begin failures++; $display("FAIL next image %0d", next_image); end
    if (tx_underflow != '0) begin failures++; $display("FAIL transmitter underflow"); end
    if (tp_skip_bad != 0) begin failures += tp_skip_bad; end
    for (int k = 0; k < N_OUT; k++) begin
      checks++;
      if (tp_data[k] < 100) begin failures++; $display("FAIL output %0d carried only %0d data packets", k, tp_data[k]); end
    end
    $display("data packets at the outputs: %0d %0d %0d %0d; ID packets %0d; drops %0d",
             tp_data[0], tp_data[1], tp_data[2], tp_data[3], n_ids, n_drop);
    $display("latency, frame generated to frame reassembled at the TP model: %0d to %0d ns",
             lat_min / 1000, lat_max / 1000);
    $display("link-loss indicators: header position changes %0d, flag changes %0d, ID changes %0d",
             n_pos_change, n_flag_change, n_id_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
