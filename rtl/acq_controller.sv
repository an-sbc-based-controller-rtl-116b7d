// acq_controller: start-stop acquisition control of the spectrometer.
//
// The spectrometer runs in start-stop mode: the SBC raises a start line
// (a GPIO pin wired to an FPGA LVDS input), the FPGA produces a fixed number
// of integrated spectra (sixteen, each of 2048 FFT frames, about 134 ms),
// sends them over Ethernet and stops until the next start. Those numbers
// are the paper's; the circuit below is this design's own.
//
// Operation:
//  * The start line is synchronised (two flip-flops, a third for edge
//    detection) and its rising edge starts an acquisition if none is running; edges during a run are
//    ignored.
//  * At each frame boundary (frame_sop, the first channel of a frame
//    entering the X-engine) the controller decides what the X-engine does
//    with that frame and presents it combinationally on cfg: continue the
//    current integration, start a new one (first), or end it (last). A new
//    integration only starts when its output-buffer page is free; otherwise
//    the frame is skipped and stall_count is incremented.
//  * When the X-engine reports dump_done the page is queued for the
//    Ethernet interface; tx_start/tx_page/tx_spec_idx launch its transfer
//    and tx_done frees the page. After NUM_SPECTRA transfers the run ends
//    and acq_done pulses.
//
// tx_spec_idx is 16 bits wide to match the field of the packet header; it
// counts 0..NUM_SPECTRA-1, so its upper bits are constant zero at the
// default of 16 spectra (synthesis sees them as idle outputs).
module acq_controller
  import dcs_pkg::*;
#(
  parameter int ACC_FRAMES  = 2048,  // FFT frames per integration (paper)
  parameter int NUM_SPECTRA = 16     // integrations per start (paper)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_in,      // from the SBC, asynchronous
  input  logic        frame_sop,     // first channel of a frame at the X-engine
  output frame_cfg_t  cfg,           // valid in the frame_sop cycle
  input  logic        dump_done,     // X-engine finished writing a page
  input  logic        dump_page,     // ... and which page it was
  output logic        tx_start,
  output logic        tx_page,
  output logic [15:0] tx_spec_idx,
  input  logic        tx_done,
  output logic        running,
  output logic        acq_done,
  output logic [31:0] stall_count
);

  localparam int FW = $clog2(ACC_FRAMES + 1);
  localparam int SW = $clog2(NUM_SPECTRA + 1);

  // Start line synchroniser and edge detector.
  logic [2:0] start_sync;
  logic       start_rise;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_sync <= '0;
    else        start_sync <= {start_sync[1:0], start_in};
  end
  assign start_rise = start_sync[1] & ~start_sync[2];

  logic          int_active;   // an integration is in progress
  logic [FW-1:0] frame_cnt;    // frames of the current integration begun
  logic          cur_page;     // page of the current integration
  logic          next_page;    // page the next integration will use
  logic [SW-1:0] started;      // integrations started in this run
  logic [SW-1:0] sent;         // integrations transmitted in this run
  logic [1:0]    page_busy;    // reserved by an integration, until sent
  logic [1:0]    page_ready;   // written, waiting for transmission
  logic          tx_busy;
  logic          tx_next;      // page to transmit next

  logic can_start;
  assign can_start = running && !int_active && (started < SW'(NUM_SPECTRA)) &&
                     !page_busy[next_page];

  always_comb begin
    cfg = '0;
    if (int_active) begin
      cfg.acc   = 1'b1;
      cfg.first = 1'b0;
      cfg.last  = (frame_cnt == FW'(ACC_FRAMES - 1));
      cfg.page  = cur_page;
    end else if (can_start) begin
      cfg.acc   = 1'b1;
      cfg.first = 1'b1;
      cfg.last  = (ACC_FRAMES == 1);
      cfg.page  = next_page;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running     <= 1'b0;
      acq_done    <= 1'b0;
      int_active  <= 1'b0;
      frame_cnt   <= '0;
      cur_page    <= 1'b0;
      next_page   <= 1'b0;
      started     <= '0;
      sent        <= '0;
      page_busy   <= '0;
      page_ready  <= '0;
      tx_busy     <= 1'b0;
      tx_next     <= 1'b0;
      tx_start    <= 1'b0;
      tx_page     <= 1'b0;
      tx_spec_idx <= '0;
      stall_count <= '0;
    end else begin
      acq_done <= 1'b0;
      tx_start <= 1'b0;

      if (start_rise && !running) begin
        running <= 1'b1;
        started <= '0;
        sent    <= '0;
      end

      // Frame boundary: follow the decision presented on cfg.
      if (frame_sop && cfg.acc) begin
        if (cfg.first) begin
          int_active <= !cfg.last;
          frame_cnt  <= FW'(1);
          cur_page   <= next_page;
          next_page  <= ~next_page;
          started    <= started + 1'b1;
          page_busy[next_page] <= 1'b1;
        end else begin
          frame_cnt <= frame_cnt + 1'b1;
          if (cfg.last) int_active <= 1'b0;
        end
      end else if (frame_sop && running && !int_active &&
                   started < SW'(NUM_SPECTRA) && page_busy[next_page]) begin
        stall_count <= stall_count + 1'b1;
      end

      if (dump_done) page_ready[dump_page] <= 1'b1;

      // Launch a transfer.
      if (!tx_busy && page_ready[tx_next]) begin
        tx_busy     <= 1'b1;
        tx_start    <= 1'b1;
        tx_page     <= tx_next;
        tx_spec_idx <= 16'(sent);
        page_ready[tx_next] <= 1'b0;
        tx_next     <= ~tx_next;
      end

      if (tx_done && tx_busy) begin
        tx_busy            <= 1'b0;
        page_busy[tx_page] <= 1'b0;
        sent               <= sent + 1'b1;
        if (sent + 1'b1 == SW'(NUM_SPECTRA)) begin
          running  <= 1'b0;
          acq_done <= 1'b1;
        end
      end
    end
  end

endmodule
