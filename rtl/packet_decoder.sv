// packet_decoder: stage 2 of the router datapath, one per input link.
//
// The transceiver delivers the 4.8 Gb/s stream as 20-bit words at 240 MHz,
// with bit 19 received first and with no knowledge of where a 30-bit FEB
// packet starts. The decoder buffers these words into the 160 MHz core domain
// and finds the packet boundary from the two legal header patterns (1010 data,
// 1100 NULL).
//
// How it works. On the 240 MHz side three words are packed into a 60-bit chunk
// (two packets' worth) and written into a dual-clock FIFO: one chunk every
// three 240 MHz clocks, which the 160 MHz side drains at one chunk every two
// clocks, so the rates match exactly. On the core side the previous and the
// current chunk form a 120-bit window; the two packets starting at bit
// position hdr_pos and hdr_pos+30 of the previous chunk are cut out. While
// hunting, a chunk whose two headers are not both legal slips hdr_pos by one
// bit; LOCK_GOOD consecutive good chunks declare lock. While locked, LOCK_BAD
// consecutive bad chunks drop lock and resume hunting. The alignment state
// (lock flag, position, counters) is control logic and is fully triplicated:
// three copies of the state, three voters (tmr_reg) and three copies of the
// header check and next-state logic; the packet data path reads domain 0.
// Packets are only emitted while locked, one per 160 MHz clock, two clocks
// per chunk.
//
// Published: 20-bit words at 240 MHz, 30-bit packets at 160 MHz, the header
// patterns, buffering in this stage and the reported header position. This
// design's own choices: chunk packing, FIFO depth, the slip-and-count lock
// procedure and its thresholds.
//
// Latency from the last word of a chunk to its first packet: about 7 core
// clocks (FIFO synchroniser plus two register stages).
module packet_decoder
  import router_pkg::*;
#(
  parameter int unsigned LOCK_GOOD  = 8,
  parameter int unsigned LOCK_BAD   = 4,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic             clk_rx,
  input  logic             rst_rx,
  input  logic [RXW_W-1:0] rx_data,

  input  logic             clk,
  input  logic             rst,
  output logic             pkt_valid,
  output pkt_t             pkt,
  output logic             locked,
  output logic [4:0]       hdr_pos
);
  // ---------------- 240 MHz side: pack three words into a chunk ------------
  logic [1:0]           wcnt;
  logic [2*RXW_W-1:0]   wacc;
  logic                 f_wr;
  logic [CHUNK_W-1:0]   f_wdata;
  logic                 f_full;

  always_ff @(posedge clk_rx) begin
    if (rst_rx) begin
      wcnt <= '0; wacc <= '0; f_wr <= 1'b0; f_wdata <= '0;
    end else begin
      f_wr <= 1'b0;
      if (wcnt == 2'd2) begin
        f_wdata <= {wacc, rx_data};
        f_wr    <= 1'b1;
        wcnt    <= '0;
      end else begin
        wacc <= {wacc[RXW_W-1:0], rx_data};
        wcnt <= wcnt + 1'b1;
      end
    end
  end

  // ---------------- clock crossing ----------------------------------------
  logic               f_rd, f_empty, rd_vld;
  logic [CHUNK_W-1:0] f_rdata;
  logic [$clog2(FIFO_DEPTH):0] f_level;

  cdc_fifo #(.WIDTH(CHUNK_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk(clk_rx), .wr_rst(rst_rx), .wr_en(f_wr), .wr_data(f_wdata), .wr_full(f_full),
    .rd_clk(clk), .rd_rst(rst), .rd_en(f_rd), .rd_data(f_rdata), .rd_empty(f_empty),
    .rd_level(f_level)
  );

  // one read every second clock at most
  assign f_rd = !f_empty && !rd_vld;

  // ---------------- alignment state (TMR protected) -----------------------
  localparam int unsigned GW = $clog2(LOCK_GOOD + 1);
  localparam int unsigned BW = $clog2(LOCK_BAD + 1);
  typedef struct packed {
    logic          lock;
    logic [4:0]    pos;
    logic [GW-1:0] good;
    logic [BW-1:0] bad;
  } align_t;

  // next state of one TMR domain, from its voted state and its own header check
  function automatic align_t align_next(input align_t s, input logic ok);
    align_t n = s;
    if (!s.lock) begin
      if (ok) begin
        if (s.good == GW'(LOCK_GOOD - 1)) begin
          n.lock = 1'b1;
          n.good = '0;
        end else begin
          n.good = s.good + 1'b1;
        end
      end else begin
        n.good = '0;
        n.pos  = (s.pos == 5'd29) ? 5'd0 : s.pos + 5'd1;
      end
    end else begin
      if (ok) begin
        n.bad = '0;
      end else if (s.bad == BW'(LOCK_BAD - 1)) begin
        n.lock = 1'b0;
        n.bad  = '0;
        n.pos  = (s.pos == 5'd29) ? 5'd0 : s.pos + 5'd1;
      end else begin
        n.bad = s.bad + 1'b1;
      end
    end
    return n;
  endfunction

  align_t     st    [3];
  align_t     st_nx [3];
  logic [2:0] st_ld;

  logic [$bits(align_t)-1:0] st_q [3];
  (* keep = "true", dont_touch = "true" *) logic [$bits(align_t)-1:0] st_d [3];

  tmr_reg #(.WIDTH($bits(align_t))) u_state (
    .clk(clk), .rst(rst), .load(st_ld), .d(st_d), .q(st_q)
  );

  // ---------------- window and packet extraction --------------------------
  logic [CHUNK_W-1:0]   prev;
  logic                 have_prev;
  logic [2*CHUNK_W-1:0] win;
  pkt_t                 cut_a, cut_b;

  assign win = {prev, f_rdata};

  // each domain checks the headers at its own position
  for (genvar i = 0; i < 3; i++) begin : g_dom
    pkt_t h_a, h_b;
    always_comb begin
      st[i]    = align_t'(st_q[i]);
      h_a      = win[2*CHUNK_W-1 - int'(st[i].pos) -: PKT_W];
      h_b      = win[2*CHUNK_W-1 - PKT_W - int'(st[i].pos) -: PKT_W];
      st_nx[i] = align_next(st[i], hdr_legal(h_a) && hdr_legal(h_b));
      st_d[i]  = st_nx[i];
      st_ld[i] = rd_vld && have_prev;
    end
  end

  // the (single) data path follows domain 0
  always_comb begin
    cut_a = win[2*CHUNK_W-1 - int'(st[0].pos) -: PKT_W];
    cut_b = win[2*CHUNK_W-1 - PKT_W - int'(st[0].pos) -: PKT_W];
  end

  // ---------------- output --------------------------------------------------
  pkt_t hold;
  logic hold_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_vld <= 1'b0; prev <= '0; have_prev <= 1'b0;
      pkt_valid <= 1'b0; pkt <= '0; hold <= '0; hold_v <= 1'b0;
    end else begin
      rd_vld    <= f_rd;
      pkt_valid <= 1'b0;
      if (hold_v) begin
        pkt       <= hold;
        pkt_valid <= 1'b1;
        hold_v    <= 1'b0;
      end
      if (rd_vld) begin
        prev      <= f_rdata;
        have_prev <= 1'b1;
        if (have_prev && st_nx[0].lock) begin
          pkt       <= cut_a;
          pkt_valid <= 1'b1;
          hold      <= cut_b;
          hold_v    <= 1'b1;
        end
      end
    end
  end

  assign locked  = st[0].lock;
  assign hdr_pos = st[0].pos;

  // a chunk is never lost while the core clock keeps up
  property p_no_overflow;
    @(posedge clk_rx) disable iff (rst_rx) f_wr |-> !f_full;
  endproperty
  a_no_overflow: assert property (p_no_overflow);
endmodule
