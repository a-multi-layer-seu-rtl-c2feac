// router_top: user logic of the trigger-packet router (stages 2 to 6).
//
// Twelve 4.8 Gb/s links from three front-end boards arrive as 20-bit words at
// 240 MHz from the transceivers. Per link a packet_decoder buffers them into
// the 160 MHz core clock and aligns 30-bit packets, a descrambler restores the
// payload and a payload_checker watches the test payload. The packet_switch
// drops NULL packets and sends data packets to four outputs; per output a
// scrambler re-scrambles the payload and a packet_builder fills idle slots
// with the router ID and gears the packets into 20-bit words at 240 MHz for
// the transmitters. Alongside, the mbar_controller drives the internal
// configuration port for multi-boot reconfiguration. Control state (link
// alignment, multi-boot sequence) is triple-redundant.
//
// The transceivers, clock manager, soft-error-mitigation core, configuration
// flash and slow-control interface are vendor or board parts and lie outside:
// their signals are ports here. One 240 MHz clock serves all receivers and
// one all transmitters (this design's choice); every domain has its own
// synchronous reset. Status outputs are what the slow-control interface
// would read: header positions, lock flags, checker flags and counters.
//
// Latency: in the end-to-end simulation a data frame takes 21 to 31 core
// clocks from the front-end model generating it to the trigger-processor
// model reassembling it. That span includes serialisation in both models and
// waiting in the switch queue behind the other links of the group.
module router_top
  import router_pkg::*;
#(
  parameter int unsigned N_IN  = 12,
  parameter int unsigned N_OUT = 4
) (
  input  logic               clk_rx,
  input  logic               rst_rx,
  input  logic               clk,
  input  logic               rst,
  input  logic               clk_tx,
  input  logic               rst_tx,
  input  logic               clk_cfg,
  input  logic               rst_cfg,

  input  logic [RXW_W-1:0]   rx_data   [N_IN],
  output logic [RXW_W-1:0]   tx_data   [N_OUT],
  input  logic [7:0]         router_id,

  output logic [N_IN-1:0]    locked,
  output logic [4:0]         hdr_pos   [N_IN],
  output logic [12:0]        chk_flags [N_IN],
  output logic [N_IN-1:0]    chk_valid,
  output logic [15:0]        chk_errs  [N_IN],
  output logic [15:0]        drop_count[N_IN],
  output logic [15:0]        null_count[N_IN],
  output logic [31:0]        id_count  [N_OUT],
  output logic [N_OUT-1:0]   tx_underflow,

  input  logic               mbar_trigger,
  input  logic [2:0]         cur_image,
  output logic               mbar_busy,
  output logic [2:0]         next_image,
  output logic               icap_csib,
  output logic               icap_rdwrb,
  output logic [31:0]        icap_i
);
  logic [N_IN-1:0] dec_v, dsc_v;
  pkt_t            dec_p [N_IN];
  pkt_t            dsc_p [N_IN];

  for (genvar i = 0; i < N_IN; i++) begin : g_link
    packet_decoder u_dec (
      .clk_rx(clk_rx), .rst_rx(rst_rx), .rx_data(rx_data[i]),
      .clk(clk), .rst(rst), .pkt_valid(dec_v[i]), .pkt(dec_p[i]),
      .locked(locked[i]), .hdr_pos(hdr_pos[i])
    );
    descrambler u_dsc (
      .clk(clk), .rst(rst), .in_valid(dec_v[i]), .in_pkt(dec_p[i]),
      .out_valid(dsc_v[i]), .out_pkt(dsc_p[i])
    );
    payload_checker u_chk (
      .clk(clk), .rst(rst), .in_valid(dsc_v[i]), .in_pkt(dsc_p[i]),
      .flags(chk_flags[i]), .flags_valid(chk_valid[i]), .err_count(chk_errs[i])
    );
  end

  logic [N_OUT-1:0] sw_v, scr_v;
  pkt_t             sw_p  [N_OUT];
  pkt_t             scr_p [N_OUT];

  packet_switch #(.N_IN(N_IN), .N_OUT(N_OUT)) u_sw (
    .clk(clk), .rst(rst), .in_valid(dsc_v), .in_pkt(dsc_p),
    .out_valid(sw_v), .out_pkt(sw_p), .drop_count(drop_count), .null_count(null_count)
  );

  for (genvar k = 0; k < N_OUT; k++) begin : g_out
    scrambler u_scr (
      .clk(clk), .rst(rst), .in_valid(sw_v[k]), .in_pkt(sw_p[k]),
      .out_valid(scr_v[k]), .out_pkt(scr_p[k])
    );
    packet_builder u_bld (
      .clk(clk), .rst(rst), .in_valid(scr_v[k]), .in_pkt(scr_p[k]),
      .router_id(router_id), .id_count(id_count[k]),
      .clk_tx(clk_tx), .rst_tx(rst_tx), .tx_data(tx_data[k]), .underflow(tx_underflow[k])
    );
  end

  logic [31:0] icap_word_unused;
  mbar_controller u_mbar (
    .clk(clk_cfg), .rst(rst_cfg), .trigger(mbar_trigger), .cur_image(cur_image),
    .busy(mbar_busy), .next_image(next_image), .icap_csib(icap_csib),
    .icap_rdwrb(icap_rdwrb), .icap_i(icap_i), .icap_word(icap_word_unused)
  );
endmodule
