// cdc_fifo: dual-clock FIFO with gray-coded pointers.
//
// Used where the router crosses between the 240 MHz transceiver clocks and the
// 160 MHz core clock. Pointers are one bit wider than the address, converted to
// gray code and passed through two-flop synchronisers. wr_full and rd_empty are
// conservative (they may lag by the synchroniser delay). rd_level is the fill
// as seen from the read side. Read data is registered: rd_data is valid the
// clock after rd_en. Writes into a full FIFO and reads from an empty one are
// ignored. DEPTH must be a power of two and at least 4.
// The published design only says that the incoming words are buffered; the
// FIFO and its gray-code crossing are this design's own.
module cdc_fifo #(
  parameter int unsigned WIDTH = 60,
  parameter int unsigned DEPTH = 8
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty,
  output logic [$clog2(DEPTH):0] rd_level
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];
  ptr_t wbin, rbin, wgray, rgray;
  ptr_t wgray_s1, wgray_s2, rgray_s1, rgray_s2;

  function automatic ptr_t bin2gray(input ptr_t b);
    return b ^ (b >> 1);
  endfunction
  function automatic ptr_t gray2bin(input ptr_t g);
    ptr_t b;
    for (int i = AW; i >= 0; i--) b[i] = (i == AW) ? g[i] : (b[i+1] ^ g[i]);
    return b;
  endfunction

  // write side
  assign wr_full = (wgray == {~rgray_s2[AW:AW-1], rgray_s2[AW-2:0]});
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
    end else begin
      rgray_s1 <= rgray; rgray_s2 <= rgray_s1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end
  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  // read side
  ptr_t wbin_s;
  assign wbin_s   = gray2bin(wgray_s2);
  assign rd_empty = (rgray == wgray_s2);
  assign rd_level = wbin_s - rbin;
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; wgray_s1 <= '0; wgray_s2 <= '0; rd_data <= '0;
    end else begin
      wgray_s1 <= wgray; wgray_s2 <= wgray_s1;
      if (rd_en && !rd_empty) begin
        rd_data <= mem[rbin[AW-1:0]];
        rbin    <= rbin + 1'b1;
        rgray   <= bin2gray(rbin + 1'b1);
      end
    end
  end
endmodule
