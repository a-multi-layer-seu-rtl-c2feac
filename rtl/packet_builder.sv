// packet_builder: stage 6 of the router datapath, one per output link.
//
// Every 160 MHz clock the builder emits one 30-bit TP packet: the forwarded
// (already re-scrambled) data packet when in_valid is high, otherwise an ID
// packet that carries the router's identification number. Sending the ID
// whenever there is no data for a transmitter is published; its format is
// this design's own: header 1100 (the NULL pattern) and payload
// {18'b0, router_id}, not scrambled. Data packets keep their FEB format.
//
// The packets are then geared down to the transmitter: two packets form a
// 60-bit chunk that crosses to the 240 MHz transmitter clock through a
// dual-clock FIFO and leaves as three 20-bit words, bit 19 first. The
// transmitter side waits until two chunks are buffered, then takes one chunk
// every three clocks; with locked 240/160 MHz clocks the fill then stays
// constant. Before that it sends zero words. If the buffer ever runs dry a
// zero chunk is sent and the sticky underflow flag is raised.
module packet_builder
  import router_pkg::*;
#(
  parameter int unsigned ID_WIDTH   = 8,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  pkt_t                in_pkt,
  input  logic [ID_WIDTH-1:0] router_id,
  output logic [31:0]         id_count,

  input  logic                clk_tx,
  input  logic                rst_tx,
  output logic [RXW_W-1:0]    tx_data,
  output logic                underflow
);
  // ---------------- 160 MHz side ------------------------------------------
  pkt_t               cur, first;
  logic               phase;
  logic               f_wr, f_full;
  logic [CHUNK_W-1:0] f_wdata;

  always_comb cur = in_valid ? in_pkt
                             : {HDR_NULL, {(PAY_W - ID_WIDTH){1'b0}}, router_id};

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= 1'b0; first <= '0; f_wr <= 1'b0; f_wdata <= '0; id_count <= '0;
    end else begin
      f_wr  <= 1'b0;
      phase <= !phase;
      if (!in_valid) id_count <= id_count + 1'b1;
      if (!phase) begin
        first <= cur;
      end else begin
        f_wdata <= {first, cur};
        f_wr    <= 1'b1;
      end
    end
  end

  // ---------------- clock crossing ----------------------------------------
  logic               f_rd, f_empty;
  logic [CHUNK_W-1:0] f_rdata;
  logic [$clog2(FIFO_DEPTH):0] f_level;

  cdc_fifo #(.WIDTH(CHUNK_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk(clk), .wr_rst(rst), .wr_en(f_wr), .wr_data(f_wdata), .wr_full(f_full),
    .rd_clk(clk_tx), .rd_rst(rst_tx), .rd_en(f_rd), .rd_data(f_rdata), .rd_empty(f_empty),
    .rd_level(f_level)
  );

  // ---------------- 240 MHz side ------------------------------------------
  logic               started, got;
  logic [1:0]         wc;
  logic [CHUNK_W-1:0] sh;

  assign f_rd = started ? (wc == 2'd1) : (f_level >= 2);

  always_ff @(posedge clk_tx) begin
    if (rst_tx) begin
      started <= 1'b0; got <= 1'b0; wc <= 2'd1; sh <= '0; tx_data <= '0; underflow <= 1'b0;
    end else begin
      got <= f_rd && !f_empty;
      if (!started) begin
        tx_data <= '0;
        if (f_rd) begin
          started <= 1'b1;
          wc      <= 2'd2;
        end
      end else begin
        if (f_rd && f_empty) underflow <= 1'b1;
        case (wc)
          2'd0:    tx_data <= sh[CHUNK_W-1 -: RXW_W];
          2'd1:    tx_data <= sh[CHUNK_W-1-RXW_W -: RXW_W];
          default: tx_data <= sh[RXW_W-1:0];
        endcase
        wc <= (wc == 2'd2) ? 2'd0 : wc + 2'd1;
        if (wc == 2'd2) sh <= got ? f_rdata : '0;
      end
    end
  end

  // the FIFO never fills: both sides move one chunk per 6.25 ns x 2
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) f_wr |-> !f_full);
endmodule
