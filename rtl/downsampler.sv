// downsampler: reduces the FEM's ADC channels from 16 MS/s to 2 MS/s.
//
// The ADCs deliver one 12-bit sample for each of the NCH channels at every
// adc_valid strobe (16 MS/s). The downsampler passes on one sample set out of
// every DECIM (the first of each group), asserting ds_valid for one clock
// together with the held samples, so the ring buffer sees a 2 MS/s tick.
//
// Timing: ds_valid/ds_data are registered, one clock after the adc_valid that
// is kept. Reset starts a new group, so the first strobe after reset is kept.
//
// The 16 to 2 MS/s rate change follows the paper; how it is done (plain
// decimation, no filtering) is this design's choice, as the paper only says the
// FPGA downsamples.
module downsampler
  import lartpc_pkg::*;
#(
  parameter int unsigned NCH   = 64,
  parameter int unsigned DECIM = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            adc_valid,
  input  adc_t [NCH-1:0]  adc_data,
  output logic            ds_valid,
  output adc_t [NCH-1:0]  ds_data
);

  localparam int unsigned CW = (DECIM > 1) ? $clog2(DECIM) : 1;
  logic [CW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= '0;
      ds_valid <= 1'b0;
      ds_data  <= '0;
    end else begin
      ds_valid <= 1'b0;
      if (adc_valid) begin
        if (phase == '0) begin
          ds_valid <= 1'b1;
          ds_data  <= adc_data;
        end
        phase <= (phase == CW'(DECIM - 1)) ? '0 : phase + 1'b1;
      end
    end
  end

endmodule
