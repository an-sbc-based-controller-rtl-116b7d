// tb_udp_eth_tx: checks the Ethernet interface. A model of the output
// buffer (one cycle read latency) holds random spectra in both pages. Two
// spectrum sets are sent; every GMII frame is captured and parsed: preamble,
// MAC addresses, IPv4 header fields and checksum, UDP header, payload
// header (marker, spectrum index, product, path, packet number, first
// channel, trailer), the 64-bit channel words against the buffer contents,
// and the Ethernet FCS (the CRC-32 register run over frame and FCS must end
// at the residue C704DD7Bh). Also checked: packet count and order, the
// 12-byte inter-frame gap, and that a set takes exactly
// packets x (frame + gap) cycles.
`timescale 1ns/1ps
module tb_udp_eth_tx;
  import dcs_pkg::*;
  localparam int N = 8, CPP = 8, NPKT = 2 * N / CPP;
  localparam int FRAME_BYTES = 8 + 14 + 20 + 8 + 16 + 8 * CPP + 4;
  logic clk = 0, rst_n = 0;
  logic start = 0, page = 0;
  logic [15:0] spec_idx = '0;
  logic rd_page;
  logic [$clog2(N):0] rd_chan;
  spec_word_t rd_data;
  logic [7:0] gmii_txd;
  logic gmii_tx_en, busy, done;
  int checks = 0, failures = 0;

  udp_eth_tx #(.N(N), .CH_PER_PKT(CPP)) dut (.*);
  always #4 clk = ~clk;

  spec_word_t mem [2][2*N];
  always @(posedge clk) rd_data <= mem[rd_page][rd_chan];

  `define CHK(c, msg) begin checks++; if (!(c)) begin failures++; $display("FAIL: %s (cycle %0d)", msg, cyc); end end

  byte unsigned fr [$];
  int frames = 0, cyc = 0, gap = 100, min_gap = 1000;
  int cur_spec = 0, cur_page = 0;
  logic [15:0] last_id;

  function automatic logic [31:0] crc_run(logic [31:0] c, byte unsigned b);
    for (int i = 0; i < 8; i++) begin
      logic fb = c[0] ^ b[i];
      c = c >> 1;
      if (fb) c = c ^ 32'hEDB88320;
    end
    return c;
  endfunction

  function automatic longint unsigned be(int off, int n);
    longint unsigned v = 0;
    for (int i = 0; i < n; i++) v = (v << 8) | fr[off + i];
    return v;
  endfunction

  task automatic parse();
    int pk = frames;                       // packet number within the set
    int prod = (pk % (4 * NPKT)) / NPKT, pn = pk % NPKT, fc = pn * CPP;
    logic [31:0] c = '1;
    longint unsigned sum = 0;
    `CHK(fr.size() == FRAME_BYTES, "frame length")
    if (fr.size() != FRAME_BYTES) return;
    for (int i = 0; i < 7; i++) `CHK(fr[i] == 8'h55, "preamble")
    `CHK(fr[7] == 8'hD5, "SFD")
    `CHK(be(8, 6) == 48'hFFFFFFFFFFFF && be(14, 6) == 48'h020000000001 && be(20, 2) == 16'h0800, "Ethernet header")
    `CHK(fr[22] == 8'h45 && be(24, 2) == 20 + 8 + 16 + 8 * CPP && fr[31] == 17, "IPv4 header")
    `CHK(be(34, 4) == 32'hC0A80164 && be(38, 4) == 32'hC0A80101, "IP addresses")
    for (int i = 0; i < 10; i++) sum += be(22 + 2 * i, 2);
    while (sum >> 16) sum = (sum & 16'hFFFF) + (sum >> 16);
    `CHK(sum == 16'hFFFF, "IPv4 header checksum")
    if (frames > 0) `CHK(be(26, 2) == 16'(last_id + 1), "IPv4 identification increments")
    last_id = 16'(be(26, 2));
    `CHK(be(42, 2) == 5000 && be(44, 2) == 5000 && be(46, 2) == 8 + 16 + 8 * CPP, "UDP header")
    `CHK(be(50, 4) == 32'hA5A55A5A && be(62, 4) == 32'h0F0FF0F0, "payload marker and trailer")
    `CHK(be(54, 2) == cur_spec && fr[56] == prod && fr[57] == (fc >= N) && be(58, 2) == pn && be(60, 2) == fc,
         "payload header fields")
    for (int j = 0; j < CPP; j++) begin
      spec_word_t w = mem[cur_page][fc + j];
      longint unsigned got = be(66 + 8 * j, 8), exp;
      case (prod)
        0: exp = {16'd0, w.self1};
        1: exp = {16'd0, w.self2};
        2: exp = {{16{w.crossr[47]}}, w.crossr};
        default: exp = {{16{w.crossi[47]}}, w.crossi};
      endcase
      `CHK(got == exp, "channel word")
    end
    for (int i = 8; i < FRAME_BYTES; i++) c = crc_run(c, fr[i]);
    `CHK(c == 32'hDEBB20E3, "FCS")
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (gmii_tx_en) begin
      if (gap < 100 && gap < min_gap && fr.size() == 0) min_gap = gap;
      fr.push_back(gmii_txd);
      gap = 0;
    end else begin
      if (fr.size() > 0) begin parse(); frames++; fr.delete(); end
      gap++;
    end
  end

  int t0;
  initial begin
    foreach (mem[p, c]) begin
      mem[p][c].self1 = {$urandom, $urandom}; mem[p][c].self2 = {$urandom, $urandom};
      mem[p][c].crossr = {$urandom, $urandom}; mem[p][c].crossi = {$urandom, $urandom};
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk);
      cur_spec = 5 + s; cur_page = s;
      start = 1; page = s[0]; spec_idx = 16'(5 + s);
      @(negedge clk); start = 0;
      t0 = cyc;
      wait (done);
      @(negedge clk);
      `CHK(cyc - t0 == 4 * NPKT * (FRAME_BYTES + 12), "set duration")
      repeat (20) @(negedge clk);
      `CHK(frames == 4 * NPKT, "packets per set")
      frames = 0;
    end
    `CHK(min_gap >= 12, "inter-frame gap")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
