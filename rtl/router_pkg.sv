// router_pkg: types, constants and payload-scrambling functions shared by the
// trigger-packet router.
//
// A front-end (FEB) packet is 30 bits: a 4-bit header followed by a 26-bit
// payload. Header 1010 marks a data packet and 1100 a NULL packet; both numbers
// and the 30/26/4 split follow the published router description. The payload is
// scrambled for DC balance. The polynomial is not published; this design uses
// the self-synchronising 1 + x^39 + x^58 scrambler (the one of 64b/66b Ethernet)
// over the serial stream of payload bits, most significant bit first. Being
// self-synchronising, a receiver locks after 58 payload bits without any seed.
package router_pkg;

  localparam int unsigned PKT_W   = 30;   // FEB packet width
  localparam int unsigned HDR_W   = 4;    // header width
  localparam int unsigned PAY_W   = 26;   // payload width
  localparam int unsigned RXW_W   = 20;   // GTP word width
  localparam int unsigned CHUNK_W = 60;   // 3 GTP words = 2 packets
  localparam int unsigned SCR_W   = 58;   // scrambler history length

  localparam logic [HDR_W-1:0] HDR_DATA = 4'b1010;
  localparam logic [HDR_W-1:0] HDR_NULL = 4'b1100;

  typedef logic [PKT_W-1:0]   pkt_t;
  typedef logic [PAY_W-1:0]   payload_t;
  typedef logic [SCR_W-1:0]   scr_state_t;

  function automatic logic [HDR_W-1:0] hdr_of(input pkt_t p);
    return p[PKT_W-1 -: HDR_W];
  endfunction

  function automatic payload_t pay_of(input pkt_t p);
    return p[PAY_W-1:0];
  endfunction

  function automatic logic hdr_legal(input pkt_t p);
    return (hdr_of(p) == HDR_DATA) || (hdr_of(p) == HDR_NULL);
  endfunction

  function automatic logic is_data(input pkt_t p);
    return hdr_of(p) == HDR_DATA;
  endfunction

  // Scramble 26 payload bits. state[0] holds the most recent scrambled bit,
  // state[k] the bit sent k+1 bits earlier. Returns {new_state, out}.
  function automatic logic [SCR_W+PAY_W-1:0] scramble(input scr_state_t st, input payload_t din);
    scr_state_t s = st;
    payload_t   o;
    for (int i = PAY_W - 1; i >= 0; i--) begin
      o[i] = din[i] ^ s[38] ^ s[57];
      s    = {s[SCR_W-2:0], o[i]};
    end
    return {s, o};
  endfunction

  // Inverse of scramble(): the history is built from the received bits.
  function automatic logic [SCR_W+PAY_W-1:0] descramble(input scr_state_t st, input payload_t din);
    scr_state_t s = st;
    payload_t   o;
    for (int i = PAY_W - 1; i >= 0; i--) begin
      o[i] = din[i] ^ s[38] ^ s[57];
      s    = {s[SCR_W-2:0], din[i]};
    end
    return {s, o};
  endfunction

endpackage
