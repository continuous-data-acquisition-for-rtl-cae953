// trigger_formatter: the Trigger Stream branch of the FEM.
//
// The paper splits the channel-ordered readout into two streams: the
// Continuous Readout Stream, always read out and compressed, and the Trigger
// Stream, read out only upon a trigger. This block forms the Trigger Stream:
// the samples of frames marked as triggered are sent without zero suppression
// or compression, as raw ADC words (label 0, bits 11:0), preceded by a frame
// header at the start of the frame and a channel header at the start of each
// channel; samples of untriggered frames are dropped. The paper does not say
// how the Trigger Stream is formatted; the word layout is the one used by the
// compressed stream (see lartpc_pkg).
//
// Timing: one input sample per clock, never stalls; 0 to 3 words leave one
// clock later on out_words[0..out_cnt-1].
module trigger_formatter
  import lartpc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_t     in_sample,
  output logic [2:0]  out_cnt,
  output word_t [3:0] out_words
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_cnt   <= '0;
      out_words <= '0;
    end else begin
      automatic logic [2:0]  n  = '0;
      automatic word_t [3:0] wv = '0;
      if (in_valid && in_sample.triggered) begin
        if (in_sample.frame_first) begin
          wv[n] = make_word(HDR_FRAME, in_sample.frame);
          n++;
        end
        if (in_sample.chan_first) begin
          wv[n] = make_word(HDR_CHANNEL, 12'(in_sample.channel));
          n++;
        end
        wv[n] = make_word(HDR_ADC, in_sample.adc);
        n++;
      end
      out_cnt   <= n;
      out_words <= wv;
    end
  end

endmodule
