// mbar_controller: multi-boot auto reconfiguration (second mitigation layer).
//
// The board's configuration flash holds N_COPIES (6) independent copies of the
// compressed router firmware. When the slow-control path requests a
// multi-boot (trigger), the controller chooses the copy after the one now
// loaded, in a fixed cycle, and makes the FPGA reload itself from it through
// the internal configuration port: it writes the warm-boot start address
// register with that copy's flash address and then the IPROG command. There is
// no golden image, so every copy is an equal member of the cycle.
//
// Published: six copies, a sequential queue of copies, reload triggered over
// slow control, the vendor multi-boot scheme without a golden image. Taken
// from the vendor's 7-series configuration guide rather than from the paper:
// the command words (dummy, sync 0xAA995566, NOOP, write WBSTAR 0x30020001,
// address, write CMD 0x30008001, IPROG 0x0000000F, NOOP) and the bit swap
// within each byte at the port. This design's own: copies start every
// SLOT_BYTES (5 MiB, room for a ~32 Mb image; 6 x 40 Mb = 240 Mb fit in the
// 256 Mb flash) and the loaded copy is an input, kept by slow control.
//
// Interface: cur_image is sampled when trigger is seen while idle. The eight
// words then appear on icap_i on eight consecutive clocks with icap_csib = 0
// and icap_rdwrb = 0; busy is high meanwhile. The sequence state is control
// logic and is triplicated: three copies of the state, three voters
// (tmr_reg) and three copies of the next-state logic; the port is driven from
// domain 0.
module mbar_controller #(
  parameter int unsigned N_COPIES   = 6,
  parameter logic [31:0] SLOT_BYTES = 32'h0050_0000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        trigger,
  input  logic [2:0]  cur_image,
  output logic        busy,
  output logic [2:0]  next_image,
  output logic        icap_csib,
  output logic        icap_rdwrb,
  output logic [31:0] icap_i,
  output logic [31:0] icap_word
);
  localparam int unsigned N_WORDS = 8;

  typedef struct packed {
    logic       busy;
    logic [2:0] idx;
    logic [2:0] img;
  } mbar_t;

  mbar_t      st    [3];
  mbar_t      st_nx [3];

  logic [$bits(mbar_t)-1:0] st_q [3];
  (* keep = "true", dont_touch = "true" *) logic [$bits(mbar_t)-1:0] st_d [3];

  tmr_reg #(.WIDTH($bits(mbar_t))) u_state (
    .clk(clk), .rst(rst), .load(3'b111), .d(st_d), .q(st_q)
  );

  function automatic logic [31:0] bitswap(input logic [31:0] w);
    logic [31:0] r;
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < 8; i++) r[8*b + i] = w[8*b + 7 - i];
    return r;
  endfunction

  // next state of one TMR domain
  function automatic mbar_t mbar_next(input mbar_t s, input logic trig, input logic [2:0] cur);
    mbar_t n = s;
    if (!s.busy) begin
      if (trig) begin
        n.busy = 1'b1;
        n.idx  = '0;
        n.img  = (32'(cur) >= N_COPIES - 1) ? 3'd0 : cur + 3'd1;
      end
    end else begin
      n.idx = s.idx + 3'd1;
      if (s.idx == 3'(N_WORDS - 1)) n.busy = 1'b0;
    end
    return n;
  endfunction

  for (genvar i = 0; i < 3; i++) begin : g_dom
    always_comb begin
      st[i]    = mbar_t'(st_q[i]);
      st_nx[i] = mbar_next(st[i], trigger, cur_image);
      st_d[i]  = st_nx[i];
    end
  end

  always_comb begin
    unique case (st[0].idx)
      3'd0: icap_word = 32'hFFFF_FFFF;                 // dummy
      3'd1: icap_word = 32'hAA99_5566;                 // sync
      3'd2: icap_word = 32'h2000_0000;                 // NOOP
      3'd3: icap_word = 32'h3002_0001;                 // write WBSTAR
      3'd4: icap_word = 32'(st[0].img) * SLOT_BYTES;      // start address of the copy
      3'd5: icap_word = 32'h3000_8001;                 // write CMD
      3'd6: icap_word = 32'h0000_000F;                 // IPROG
      default: icap_word = 32'h2000_0000;              // NOOP
    endcase
  end

  assign busy       = st[0].busy;
  assign next_image = st[0].img;
  assign icap_csib  = !st[0].busy;
  assign icap_rdwrb = 1'b0;
  assign icap_i     = bitswap(icap_word);
endmodule
