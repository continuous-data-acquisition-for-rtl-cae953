// ring_buffer_ctrl: SRAM ring buffer of the FEM, written in time order and
// read back in channel order.
//
// The external SRAM (1M x 36 bit in the paper) holds NFRAMES frames of
// SAMPLES_PER_FRAME ticks of all NCH channels: 8 frames of 1.6 ms at 2 MS/s,
// i.e. 12.8 ms, as the paper describes. Each 36-bit word holds two consecutive
// samples of one channel, {12'b0, sample[2p+1], sample[2p]}, at address
// {frame, channel, p}; with the paper's sizes that is 3 + 6 + 11 = 20 address
// bits, and 1600 of the 2048 pair slots of a channel-frame are used.
//
// Write side: on every in_valid tick (2 MS/s) the samples of all channels are
// taken. Even ticks are held; on odd ticks the NCH pairs are moved to a write
// buffer and written, one per clock, with priority over reads. At 128 MHz a
// tick pair lasts 128 clocks, so writes use 64 of them and reads the other 64:
// the paper's SRAM clock is exactly enough for one write and one read stream.
//
// Read side: when a frame is complete it is read in channel order (channel 0
// ticks 0..SPF-1, then channel 1, ...), at most one read per free clock and
// only while the read-data queue has room; each word is then serialised into
// two samples, one per clock, on the out_* stream (no back-pressure: the
// compression pipeline accepts one sample per clock). The queue (RDQ_DEPTH
// words) must bridge a 64-clock write burst, during which the serialiser
// still needs 32 words; with that, reading keeps pace with writing exactly
// and a frame is read out within one frame period of its completion.
//
// A trigger pulse marks the frame being written; its samples leave with
// triggered=1, which routes them into the Trigger Stream as well.
//
// SRAM contract: a read command sampled at a clock edge returns its data on
// sram_rdata SRAM_RL edges later (a pipelined synchronous SRAM); writes take
// effect at the sampled edge. The pair packing, the read-queue and the latency
// are this design's choices; the paper gives the sizes, the ring organisation
// and the two orders.
//
// Constant outputs by construction: sram_wdata[35:24] (unused SRAM bits) and
// the channel bits of out_sample above log2(NCH).
module ring_buffer_ctrl
  import lartpc_pkg::*;
#(
  parameter int unsigned NCH               = 64,
  parameter int unsigned SAMPLES_PER_FRAME = 3200,
  parameter int unsigned NFRAMES           = 8,
  parameter int unsigned ADDR_W            = 20,
  parameter int unsigned DATA_W            = 36,
  parameter int unsigned SRAM_RL           = 2,
  parameter int unsigned RDQ_DEPTH         = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // 2 MS/s samples from the downsampler
  input  logic              in_valid,
  input  adc_t [NCH-1:0]    in_data,
  input  logic              trig_in,
  // external SRAM
  output logic              sram_ce,
  output logic              sram_we,
  output logic [ADDR_W-1:0] sram_addr,
  output logic [DATA_W-1:0] sram_wdata,
  input  logic [DATA_W-1:0] sram_rdata,
  // channel-ordered sample stream
  output logic              out_valid,
  output sample_t           out_sample,
  // status
  output logic              wr_overrun,     // a tick pair arrived before the previous was written
  output logic              ring_overflow,  // writing caught up with a frame not yet read
  output logic [15:0]       frames_written
);

  localparam int unsigned FW    = (NFRAMES > 1) ? $clog2(NFRAMES) : 1;
  localparam int unsigned CHW   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned PAIRS = SAMPLES_PER_FRAME / 2;
  localparam int unsigned PW    = ADDR_W - FW - CHW;
  localparam int unsigned TW    = $clog2(SAMPLES_PER_FRAME);
  localparam int unsigned QW    = $clog2(RDQ_DEPTH);

  typedef struct packed {
    logic           valid;
    logic [CHW-1:0] ch;
    logic [PW-1:0]  pair;
    logic [FW-1:0]  fr;
    logic [11:0]    frame_num;
    logic           trig;
  } rtag_t;

  typedef struct packed {
    rtag_t       tag;
    logic [23:0] data;
  } rdq_t;

  // ---------------- write side ----------------
  logic [TW-1:0]     wtick;
  logic [FW-1:0]     wframe;
  adc_t [NCH-1:0]    hold;
  logic [23:0]       wbuf [NCH];
  logic              wpend;
  logic [CHW-1:0]    wch;
  logic [PW-1:0]     wpair;
  logic [FW-1:0]     wfr;
  logic [NFRAMES-1:0] trig_flag;
  logic [15:0]       frames_read;

  logic do_write;
  assign do_write = wpend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wtick          <= '0;
      wframe         <= '0;
      wpend          <= 1'b0;
      wch            <= '0;
      wpair          <= '0;
      wfr            <= '0;
      hold           <= '0;
      trig_flag      <= '0;
      frames_written <= '0;
      wr_overrun     <= 1'b0;
      ring_overflow  <= 1'b0;
    end else begin
      if (in_valid) begin
        if (!wtick[0]) begin
          hold <= in_data;
        end else begin
          for (int c = 0; c < NCH; c++) wbuf[c] <= {in_data[c], hold[c]};
          if (wpend) wr_overrun <= 1'b1;
          wpend <= 1'b1;
          wch   <= '0;
          wpair <= PW'(wtick >> 1);
          wfr   <= wframe;
        end
        if (wtick == TW'(SAMPLES_PER_FRAME - 1)) begin
          wtick  <= '0;
          wframe <= (wframe == FW'(NFRAMES - 1)) ? '0 : wframe + 1'b1;
        end else begin
          wtick <= wtick + 1'b1;
        end
      end
      // trigger flag of the frame being written: cleared when the frame starts
      if (in_valid && wtick == '0) trig_flag[wframe] <= trig_in;
      else if (trig_in)            trig_flag[wframe] <= 1'b1;

      if (do_write && !(in_valid && wtick[0])) begin
        if (wch == CHW'(NCH - 1)) begin
          wpend <= 1'b0;
          if (wpair == PW'(PAIRS - 1)) begin
            frames_written <= frames_written + 1'b1;
            if (16'(frames_written + 1'b1 - frames_read) >= 16'(NFRAMES)) ring_overflow <= 1'b1;
          end
        end
        wch <= wch + 1'b1;
      end
    end
  end

  // ---------------- read side ----------------
  logic           rbusy;
  logic [FW-1:0]  rfr;
  logic [CHW-1:0] rch;
  logic [PW-1:0]  rpair;
  logic           rtrig;
  rtag_t          tpipe [SRAM_RL+1];
  rdq_t           rdq [RDQ_DEPTH];
  logic [QW-1:0]  rdq_wp, rdq_rp;
  logic [QW:0]    rdq_cnt;
  logic [QW:0]    inflight;
  logic           do_read, rdq_push, rdq_pop, half;

  always_comb begin
    inflight = '0;
    for (int k = 0; k <= SRAM_RL; k++) inflight += (QW+1)'(tpipe[k].valid);
  end

  assign do_read  = rbusy && !do_write && ((rdq_cnt + inflight) < (QW+1)'(RDQ_DEPTH));
  assign rdq_push = tpipe[SRAM_RL].valid;
  assign rdq_pop  = (rdq_cnt != '0) && half;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy       <= 1'b0;
      rfr         <= '0;
      rch         <= '0;
      rpair       <= '0;
      rtrig       <= 1'b0;
      frames_read <= '0;
      for (int k = 0; k <= SRAM_RL; k++) tpipe[k] <= '0;
    end else begin
      if (!rbusy && frames_written != frames_read) begin
        rbusy <= 1'b1;
        rch   <= '0;
        rpair <= '0;
        rtrig <= trig_flag[rfr];
      end
      tpipe[0] <= '0;
      if (do_read) begin
        tpipe[0] <= '{valid: 1'b1, ch: rch, pair: rpair, fr: rfr,
                      frame_num: frames_read[11:0], trig: rtrig};
        if (rpair == PW'(PAIRS - 1)) begin
          rpair <= '0;
          if (rch == CHW'(NCH - 1)) begin
            rch         <= '0;
            rbusy       <= 1'b0;
            rfr         <= (rfr == FW'(NFRAMES - 1)) ? '0 : rfr + 1'b1;
            frames_read <= frames_read + 1'b1;
          end else begin
            rch <= rch + 1'b1;
          end
        end else begin
          rpair <= rpair + 1'b1;
        end
      end
      for (int k = 1; k <= SRAM_RL; k++) tpipe[k] <= tpipe[k-1];
    end
  end

  // SRAM command (single port: a write or a read per clock)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sram_ce    <= 1'b0;
      sram_we    <= 1'b0;
      sram_addr  <= '0;
      sram_wdata <= '0;
    end else begin
      sram_ce <= do_write || do_read;
      sram_we <= do_write;
      if (do_write) begin
        sram_addr  <= {wfr, wch, wpair};
        sram_wdata <= DATA_W'(wbuf[wch]);
      end else if (do_read) begin
        sram_addr  <= {rfr, rch, rpair};
      end
    end
  end

  // read-data queue and two-sample serialiser
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdq_wp     <= '0;
      rdq_rp     <= '0;
      rdq_cnt    <= '0;
      half       <= 1'b0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      if (rdq_push) begin
        rdq[rdq_wp] <= '{tag: tpipe[SRAM_RL], data: sram_rdata[23:0]};
        rdq_wp      <= rdq_wp + 1'b1;
      end
      out_valid <= 1'b0;
      if (rdq_cnt != '0) begin
        automatic rdq_t    e = rdq[rdq_rp];
        automatic logic [TW-1:0] t = TW'({e.tag.pair, half});
        out_valid              <= 1'b1;
        out_sample.adc         <= half ? e.data[23:12] : e.data[11:0];
        out_sample.tick        <= 12'(t);
        out_sample.channel     <= 8'(e.tag.ch);
        out_sample.frame       <= e.tag.frame_num;
        out_sample.triggered   <= e.tag.trig;
        out_sample.chan_first  <= (t == '0);
        out_sample.chan_last   <= (t == TW'(SAMPLES_PER_FRAME - 1));
        out_sample.frame_first <= (t == '0) && (e.tag.ch == '0);
        half <= ~half;
        if (half) rdq_rp <= rdq_rp + 1'b1;
      end
      rdq_cnt <= rdq_cnt + (QW+1)'(rdq_push) - (QW+1)'(rdq_pop);
    end
  end

  // parameter sanity
  initial begin
    assert (SAMPLES_PER_FRAME % 2 == 0) else $error("SAMPLES_PER_FRAME must be even");
    assert (PAIRS <= (1 << PW)) else $error("ADDR_W too small for NFRAMES*NCH*SAMPLES_PER_FRAME/2");
    assert ((1 << QW) == RDQ_DEPTH) else $error("RDQ_DEPTH must be a power of two");
  end

  // a write buffer must be drained before the next tick pair arrives
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(in_valid && wtick[0] && wpend));

endmodule
