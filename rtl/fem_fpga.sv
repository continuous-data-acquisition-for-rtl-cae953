// fem_fpga: the FPGA of one TPC Front-End Module (FEM), 64 wires.
//
// Data path, as the paper describes it:
//   ADCs (16 MS/s) -> downsampler (2 MS/s) -> SRAM ring buffer, written in
//   time order -> read back in channel order -> split into two streams:
//     * Continuous Readout (supernova) Stream: zero suppression, then Huffman
//       encoding, into its stream buffer;
//     * Trigger Stream: the frames that received a trigger, uncompressed,
//       into its own stream buffer.
// Both buffers are emptied by the XMIT over the backplane (see
// backplane_arbiter). The zero-suppression settings (per-channel thresholds,
// signs and static baselines, presamples/postsamples, static or dynamic
// baseline, baseline tolerances) are written through the cfg_* port.
//
// All logic runs on one clock, the SRAM clock (128 MHz in the paper); the ADC
// strobe adc_valid comes every 8 clocks at 16 MS/s. The external SRAM sits on
// the sram_* pins (see ring_buffer_ctrl for its timing). Using a single clock,
// and the stream buffer sizes, are this design's choices.
module fem_fpga
  import lartpc_pkg::*;
#(
  parameter int unsigned NCH               = 64,
  parameter int unsigned DECIM             = 8,
  parameter int unsigned SAMPLES_PER_FRAME = 3200,
  parameter int unsigned NFRAMES           = 8,
  parameter int unsigned ADDR_W            = 20,
  parameter int unsigned SRAM_RL           = 2,
  parameter int unsigned BLOCK             = 64,
  parameter int unsigned ZS_DELAY          = 72,
  parameter int unsigned SN_FIFO_DEPTH     = 1024,
  parameter int unsigned TRIG_FIFO_DEPTH   = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // ADCs
  input  logic              adc_valid,
  input  adc_t [NCH-1:0]    adc_data,
  // trigger for the Trigger Stream
  input  logic              trig_in,
  // configuration
  input  logic              cfg_we,
  input  logic [9:0]        cfg_addr,
  input  logic [15:0]       cfg_wdata,
  // external SRAM
  output logic              sram_ce,
  output logic              sram_we,
  output logic [ADDR_W-1:0] sram_addr,
  output logic [35:0]       sram_wdata,
  input  logic [35:0]       sram_rdata,
  // Trigger Stream buffer towards the backplane
  output logic              trig_valid,
  output logic [1:0]        trig_cnt,
  output word_t [1:0]       trig_words,
  input  logic              trig_ready,
  // Continuous Readout Stream buffer towards the backplane
  output logic              sn_valid,
  output logic [1:0]        sn_cnt,
  output word_t [1:0]       sn_words,
  input  logic              sn_ready,
  // status
  output logic              wr_overrun,
  output logic              ring_overflow,
  output logic              trig_overflow,
  output logic              sn_overflow,
  output logic              bl_update,
  output logic [15:0]       frames_written
);

  logic           ds_valid;
  adc_t [NCH-1:0] ds_data;
  logic           rs_valid;
  sample_t        rs_sample;
  logic           zs_valid;
  zs_sample_t     zs_out;
  logic [2:0]     he_cnt, tf_cnt;
  word_t [3:0]    he_words, tf_words;

  downsampler #(.NCH(NCH), .DECIM(DECIM)) u_ds (
    .clk, .rst_n,
    .adc_valid (adc_valid),
    .adc_data  (adc_data),
    .ds_valid  (ds_valid),
    .ds_data   (ds_data)
  );

  ring_buffer_ctrl #(
    .NCH(NCH), .SAMPLES_PER_FRAME(SAMPLES_PER_FRAME), .NFRAMES(NFRAMES),
    .ADDR_W(ADDR_W), .DATA_W(36), .SRAM_RL(SRAM_RL)
  ) u_ring (
    .clk, .rst_n,
    .in_valid       (ds_valid),
    .in_data        (ds_data),
    .trig_in        (trig_in),
    .sram_ce        (sram_ce),
    .sram_we        (sram_we),
    .sram_addr      (sram_addr),
    .sram_wdata     (sram_wdata),
    .sram_rdata     (sram_rdata),
    .out_valid      (rs_valid),
    .out_sample     (rs_sample),
    .wr_overrun     (wr_overrun),
    .ring_overflow  (ring_overflow),
    .frames_written (frames_written)
  );

  // ---- Continuous Readout Stream ----
  zero_suppressor #(.NCH(NCH), .BLOCK(BLOCK), .ZS_DELAY(ZS_DELAY)) u_zs (
    .clk, .rst_n,
    .in_valid  (rs_valid),
    .in_sample (rs_sample),
    .cfg_we    (cfg_we),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .out_valid (zs_valid),
    .out_zs    (zs_out),
    .bl_update (bl_update)
  );

  huffman_encoder u_he (
    .clk, .rst_n,
    .in_valid  (zs_valid),
    .in_zs     (zs_out),
    .out_cnt   (he_cnt),
    .out_words (he_words)
  );

  stream_fifo #(.DEPTH(SN_FIFO_DEPTH)) u_sn_fifo (
    .clk, .rst_n,
    .wr_cnt   (he_cnt),
    .wr_words (he_words),
    .rd_valid (sn_valid),
    .rd_cnt   (sn_cnt),
    .rd_words (sn_words),
    .rd_ready (sn_ready),
    .level    (),
    .overflow (sn_overflow),
    .drop_cnt ()
  );

  // ---- Trigger Stream ----
  trigger_formatter u_tf (
    .clk, .rst_n,
    .in_valid  (rs_valid),
    .in_sample (rs_sample),
    .out_cnt   (tf_cnt),
    .out_words (tf_words)
  );

  stream_fifo #(.DEPTH(TRIG_FIFO_DEPTH)) u_trig_fifo (
    .clk, .rst_n,
    .wr_cnt   (tf_cnt),
    .wr_words (tf_words),
    .rd_valid (trig_valid),
    .rd_cnt   (trig_cnt),
    .rd_words (trig_words),
    .rd_ready (trig_ready),
    .level    (),
    .overflow (trig_overflow),
    .drop_cnt ()
  );

endmodule
