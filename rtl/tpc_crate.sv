// tpc_crate: one TPC readout crate: N_FEM front-end modules and the XMIT's
// backplane collection of their two output streams.
//
// Each FEM (fem_fpga) digitises 64 wires, buffers them in its SRAM ring buffer
// and produces a Trigger Stream (raw, triggered frames only) and a
// zero-suppressed, Huffman-encoded Continuous Readout Stream. The XMIT
// (backplane_arbiter) collects both streams from all FEMs over the shared
// dataway, Trigger Stream first, and passes each stream on to its optical
// transmitters (outside this design, on trig_out_* and sn_out_*).
//
// N_FEM = 15 is derived, not printed in the paper: the paper spreads the
// 8256 wires (2 x 2400 + 3256) about equally over 9 crates and quotes about
// 4 GB/s of input per crate; 64 wires at 2 MS/s and 2 bytes per sample is
// 256 MB/s per FEM, so 15 FEMs give 3.84 GB/s and 135 >= 8256/64 FEM slots.
//
// The ADC strobe and the trigger are common to all FEMs; configuration writes
// go to the FEM selected by cfg_fem. Each FEM's external SRAM is on the
// sram_* array ports. One clock (128 MHz in the paper) for everything.
//
// Some output bits are constant by construction: sram_wdata[35:24] is always
// zero (each 36-bit SRAM word holds two 12-bit samples, see ring_buffer_ctrl)
// and the upper bits of trig_out_fem/sn_out_fem are zero for slots 0..14.
module tpc_crate
  import lartpc_pkg::*;
#(
  parameter int unsigned N_FEM             = 15,
  parameter int unsigned NCH               = 64,
  parameter int unsigned SAMPLES_PER_FRAME = 3200,
  parameter int unsigned NFRAMES           = 8,
  parameter int unsigned ADDR_W            = 20
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ADCs
  input  logic                          adc_valid,
  input  adc_t [N_FEM-1:0][NCH-1:0]     adc_data,
  input  logic                          trig_in,
  // configuration
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_fem,
  input  logic [9:0]                    cfg_addr,
  input  logic [15:0]                   cfg_wdata,
  // external SRAMs, one per FEM
  output logic [N_FEM-1:0]              sram_ce,
  output logic [N_FEM-1:0]              sram_we,
  output logic [N_FEM-1:0][ADDR_W-1:0]  sram_addr,
  output logic [N_FEM-1:0][35:0]        sram_wdata,
  input  logic [N_FEM-1:0][35:0]        sram_rdata,
  // Trigger Stream to the XMIT's optical transmitters
  output logic                          trig_out_valid,
  output logic [1:0]                    trig_out_cnt,
  output word_t [1:0]                   trig_out_words,
  output logic [7:0]                    trig_out_fem,
  input  logic                          trig_out_ready,
  // Continuous Readout Stream to the XMIT's optical transmitters
  output logic                          sn_out_valid,
  output logic [1:0]                    sn_out_cnt,
  output word_t [1:0]                   sn_out_words,
  output logic [7:0]                    sn_out_fem,
  input  logic                          sn_out_ready,
  // status
  output logic [N_FEM-1:0]              wr_overrun,
  output logic [N_FEM-1:0]              ring_overflow,
  output logic [N_FEM-1:0]              trig_overflow,
  output logic [N_FEM-1:0]              sn_overflow,
  output logic [N_FEM-1:0]              bl_update,
  output logic [31:0]                   trig_beats,
  output logic [31:0]                   sn_beats,
  output logic [31:0]                   sn_deferred
);

  logic [N_FEM-1:0]        t_valid, t_ready, s_valid, s_ready;
  logic [N_FEM-1:0][1:0]   t_cnt, s_cnt;
  word_t [N_FEM-1:0][1:0]  t_words, s_words;

  for (genvar f = 0; f < N_FEM; f++) begin : g_fem
    logic [15:0] frames_written;
    fem_fpga #(
      .NCH(NCH), .SAMPLES_PER_FRAME(SAMPLES_PER_FRAME), .NFRAMES(NFRAMES), .ADDR_W(ADDR_W)
    ) u_fem (
      .clk, .rst_n,
      .adc_valid      (adc_valid),
      .adc_data       (adc_data[f]),
      .trig_in        (trig_in),
      .cfg_we         (cfg_we && cfg_fem == 8'(f)),
      .cfg_addr       (cfg_addr),
      .cfg_wdata      (cfg_wdata),
      .sram_ce        (sram_ce[f]),
      .sram_we        (sram_we[f]),
      .sram_addr      (sram_addr[f]),
      .sram_wdata     (sram_wdata[f]),
      .sram_rdata     (sram_rdata[f]),
      .trig_valid     (t_valid[f]),
      .trig_cnt       (t_cnt[f]),
      .trig_words     (t_words[f]),
      .trig_ready     (t_ready[f]),
      .sn_valid       (s_valid[f]),
      .sn_cnt         (s_cnt[f]),
      .sn_words       (s_words[f]),
      .sn_ready       (s_ready[f]),
      .wr_overrun     (wr_overrun[f]),
      .ring_overflow  (ring_overflow[f]),
      .trig_overflow  (trig_overflow[f]),
      .sn_overflow    (sn_overflow[f]),
      .bl_update      (bl_update[f]),
      .frames_written (frames_written)
    );
  end

  backplane_arbiter #(.N_FEM(N_FEM)) u_xmit (
    .clk, .rst_n,
    .t_valid, .t_cnt, .t_words, .t_ready,
    .s_valid, .s_cnt, .s_words, .s_ready,
    .trig_out_valid, .trig_out_cnt, .trig_out_words, .trig_out_fem, .trig_out_ready,
    .sn_out_valid, .sn_out_cnt, .sn_out_words, .sn_out_fem, .sn_out_ready,
    .trig_beats, .sn_beats, .sn_deferred
  );

endmodule
