// udp_eth_tx: Ethernet interface of the spectrometer. Sends one integrated
// spectrum set from the output buffer as UDP/IPv4 packets over a GMII byte
// interface (one byte per 125 MHz clock, 1 Gb/s).
//
// The paper states that the integrated spectra travel to the SBC in UDP
// packets over 1 Gigabit Ethernet, with markers and fixed patterns that
// identify the data of the parallel paths, and that 16 channels are a
// quarter of a data packet, i.e. 64 channels per packet. The packet layout
// below is this design's choice:
//
//   preamble (7 x 55h) + SFD (D5h)
//   Ethernet header: destination MAC, source MAC, type 0800h      14 bytes
//   IPv4 header (no options, DF set, TTL 64, protocol 17)          20 bytes
//   UDP header (checksum 0, i.e. not used)                          8 bytes
//   payload header                                                 16 bytes
//     marker A5A55A5Ah | spectrum index (16b) | product (8b) |
//     path (8b: 0 = channels 0..N-1, 1 = N..2N-1) | packet number in
//     product (16b) | first channel (16b) | trailer 0F0FF0F0h
//   CH_PER_PKT channels of one product, each as a 64-bit big-endian
//   two's-complement word (the 48-bit accumulator sign-extended)
//   FCS (CRC-32, least significant byte first)
//   12 idle bytes (inter-frame gap)
//
// One set is 4 products x 2N/CH_PER_PKT packets; products go in the order
// self 1, self 2, cross real, cross imaginary, channels in increasing order.
// The IPv4 identification field counts packets. start launches a set from
// buffer page `page`; done pulses after the last gap byte.
//
// Reading: the buffer has one cycle of read latency. The channel for a
// data word is addressed in the cycle before its first byte; that byte is
// taken from rd_data directly and the word is held for its other 7 bytes.
module udp_eth_tx
  import dcs_pkg::*;
#(
  parameter int          N          = 8192,   // channels per path; 2N per spectrum
  parameter int          CH_PER_PKT = 64,
  parameter logic [47:0] DST_MAC    = 48'hFFFF_FFFF_FFFF,
  parameter logic [47:0] SRC_MAC    = 48'h0200_0000_0001,
  parameter logic [31:0] SRC_IP     = 32'hC0A8_0164,      // 192.168.1.100
  parameter logic [31:0] DST_IP     = 32'hC0A8_0101,      // 192.168.1.1
  parameter logic [15:0] SRC_PORT   = 16'd5000,
  parameter logic [15:0] DST_PORT   = 16'd5000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   page,
  input  logic [15:0]            spec_idx,
  output logic                   rd_page,
  output logic [$clog2(N):0]     rd_chan,
  input  spec_word_t             rd_data,
  output logic [7:0]             gmii_txd,
  output logic                   gmii_tx_en,
  output logic                   busy,
  output logic                   done
);

  localparam int CW        = $clog2(N) + 1;            // channel index width
  localparam int NPKT      = (2 * N) / CH_PER_PKT;     // packets per product
  localparam int PAY_BYTES = 16 + CH_PER_PKT * 8;
  localparam int DATA0     = 66;                       // first data byte
  localparam int FCS0      = DATA0 + CH_PER_PKT * 8;
  localparam int GAP0      = FCS0 + 4;
  localparam int TOTAL     = GAP0 + 12;
  localparam int BW        = $clog2(TOTAL);
  localparam int PW        = (NPKT > 1) ? $clog2(NPKT) : 1;
  localparam logic [15:0] IP_LEN  = 16'(20 + 8 + PAY_BYTES);
  localparam logic [15:0] UDP_LEN = 16'(8 + PAY_BYTES);

  logic [BW-1:0]  bcnt;
  logic [1:0]     prod;
  logic [PW-1:0]  pkt;
  logic [15:0]    ip_id;
  logic [15:0]    cur_spec;
  logic [31:0]    crc;
  logic [63:0]    word;
  logic [CW-1:0]  first_chan;

  logic           page_q;

  assign first_chan = CW'(pkt) * CW'(CH_PER_PKT);
  assign rd_page    = page_q;

  // IPv4 header checksum.
  function automatic logic [15:0] ip_csum(input logic [15:0] id);
    logic [19:0] s;
    s = 20'h4500 + 20'(IP_LEN) + 20'(id) + 20'h4000 + 20'h4011 +
        20'(SRC_IP[31:16]) + 20'(SRC_IP[15:0]) + 20'(DST_IP[31:16]) + 20'(DST_IP[15:0]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  // Product field of a buffer word, sign-extended to 64 bits.
  function automatic logic [63:0] field(input spec_word_t w, input logic [1:0] p);
    case (p)
      2'd0:    return {16'd0, w.self1};
      2'd1:    return {16'd0, w.self2};
      2'd2:    return {{16{w.crossr[ACC_W-1]}}, w.crossr};
      default: return {{16{w.crossi[ACC_W-1]}}, w.crossi};
    endcase
  endfunction

  // Header byte at frame position b (b < DATA0).
  logic [15:0] csum;
  assign csum = ip_csum(ip_id);

  logic [8*DATA0-1:0] hdr;     // all header bytes, first byte in the top bits
  assign hdr = {
    {7{8'h55}}, 8'hD5,
    DST_MAC, SRC_MAC, 16'h0800,
    16'h4500, IP_LEN, ip_id, 16'h4000, 8'h40, 8'h11, csum, SRC_IP, DST_IP,
    SRC_PORT, DST_PORT, UDP_LEN, 16'h0000,
    PKT_MARKER, cur_spec, 6'd0, prod, 7'd0, first_chan[CW-1], 16'(pkt), 16'(first_chan),
    PKT_TRAILER
  };

  // Data word position. Only the low bits of (bcnt - DATA0) and
  // (bcnt - FCS0) are needed, and those depend only on the low bits of bcnt.
  logic [2:0]    doff;           // byte within the current 64-bit word
  logic [1:0]    fcs_idx;        // byte within the FCS
  assign doff    = bcnt[2:0] - 3'(DATA0);
  assign fcs_idx = bcnt[1:0] - 2'(FCS0);

  // Channel read address: the word whose first byte is at bcnt + 1.
  logic [BW-1:0] nxt_off;
  assign nxt_off = bcnt + 1'b1 - BW'(DATA0);
  assign rd_chan = first_chan + CW'(nxt_off >> 3);

  logic [7:0] tx_byte;
  logic       in_data, is_first_byte;
  assign in_data       = busy && bcnt >= BW'(DATA0) && bcnt < BW'(FCS0);
  assign is_first_byte = in_data && doff == 3'd0;

  always_comb begin
    tx_byte = 8'h00;
    if (bcnt < BW'(DATA0))      tx_byte = hdr[8*(DATA0-1-int'(bcnt)) +: 8];
    else if (bcnt < BW'(FCS0)) begin
      if (is_first_byte) tx_byte = field(rd_data, prod)[63:56];
      else               tx_byte = word[8*(3'd7 - doff) +: 8];
    end else if (bcnt < BW'(GAP0)) begin
      tx_byte = ~crc[8*fcs_idx +: 8];
    end
  end

  logic last_byte, last_pkt;
  assign last_byte = bcnt == BW'(TOTAL - 1);
  assign last_pkt  = (prod == 2'd3) && (pkt == PW'(NPKT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      bcnt       <= '0;
      prod       <= '0;
      pkt        <= '0;
      ip_id      <= '0;
      cur_spec   <= '0;
      page_q     <= 1'b0;
      crc        <= '1;
      word       <= '0;
      gmii_txd   <= '0;
      gmii_tx_en <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        gmii_tx_en <= 1'b0;
        gmii_txd   <= '0;
        if (start) begin
          busy     <= 1'b1;
          bcnt     <= '0;
          prod     <= '0;
          pkt      <= '0;
          cur_spec <= spec_idx;
          page_q   <= page;
        end
      end else begin
        gmii_txd   <= tx_byte;
        gmii_tx_en <= bcnt < BW'(GAP0);
        if (is_first_byte) word <= field(rd_data, prod);
        // CRC over destination MAC .. end of payload.
        if (bcnt == BW'(7))                            crc <= '1;
        else if (bcnt >= BW'(8) && bcnt < BW'(FCS0))   crc <= crc32_byte(crc, tx_byte);
        bcnt <= bcnt + 1'b1;
        if (last_byte) begin
          bcnt  <= '0;
          ip_id <= ip_id + 1'b1;
          if (last_pkt) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else if (pkt == PW'(NPKT - 1)) begin
            pkt  <= '0;
            prod <= prod + 1'b1;
          end else begin
            pkt <= pkt + 1'b1;
          end
        end
      end
    end
  end

endmodule
