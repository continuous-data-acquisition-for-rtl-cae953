// huffman_encoder: turns zero-suppressed samples into 16-bit stream words.
//
// Paper's rules: within an ROI, the difference to the previous sample,
// d = adc[i] - adc[i-1], is Huffman-coded when |d| <= 3 with the fixed table
//     d :  0   -1   +1    -2     +2      -3      +3
//   code:  1   01   001   0001   00001   000001  0000001
// Codes are packed into a Huffman word (bit 15 = 1) in the 15 lower bits: the
// first code sits lowest and each later code above it, and the finished
// sequence is left-aligned, the unused low bits filled with zeros. A word is
// closed when the next code does not fit (the code then starts a new word),
// when the next difference is larger than 3 (that sample is sent as a raw ADC
// word) or at the end of the ROI. Raw samples use bits 11:0 with a 4-bit label.
//
// Since every code is "a 1 preceded by zeros", a code of length L is the value
// 1 placed L-1 bits below the next code, so the packer keeps an accumulator
// acc and a length len: acc |= 1 << len; len += L, and emits
// {1'b1, acc << (15-len)}.
//
// Framing words (this design's choice; the paper gives only the two word
// kinds): a frame header at the first sample of a frame, a channel header at
// the first sample of each channel, and an ROI header carrying the tick of the
// ROI's first sample, which itself is sent raw.
//
// Timing: one input per clock, never stalls; 0 to 4 words leave one clock
// later on out_words[0..out_cnt-1] (in stream order).
module huffman_encoder
  import lartpc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  zs_sample_t    in_zs,
  output logic [2:0]    out_cnt,
  output word_t [3:0]   out_words
);

  logic [14:0] acc;
  logic [3:0]  len;
  adc_t        prev;

  // code length of a difference in -3..+3
  function automatic logic [3:0] code_len(logic signed [12:0] d);
    if (d == 0)     return 4'd1;
    else if (d < 0) return 4'(13'(-d) << 1);
    else            return 4'((d << 1) + 13'sd1);
  endfunction

  function automatic word_t huff_word(logic [14:0] a, logic [3:0] l);
    return {1'b1, a << (4'd15 - l)};
  endfunction

  logic [14:0]  nacc;
  logic [3:0]   nlen;
  logic [2:0]   n;
  word_t [3:0]  wv;

  always_comb begin
    automatic logic signed [12:0] d = $signed({1'b0, in_zs.s.adc}) - $signed({1'b0, prev});
    automatic logic [3:0] L = 4'd0;
    nacc = acc;
    nlen = len;
    n    = '0;
    wv   = '0;
    if (in_valid) begin
      if (in_zs.s.frame_first) begin
        wv[n] = make_word(HDR_FRAME, in_zs.s.frame);
        n++;
      end
      if (in_zs.s.chan_first) begin
        wv[n] = make_word(HDR_CHANNEL, 12'(in_zs.s.channel));
        n++;
      end
      if (in_zs.keep) begin
        if (in_zs.roi_first) begin
          wv[n] = make_word(HDR_ROI, in_zs.s.tick);
          n++;
          wv[n] = make_word(HDR_ADC, in_zs.s.adc);
          n++;
          nacc = '0;
          nlen = '0;
        end else if (d >= -13'sd3 && d <= 13'sd3) begin
          L = code_len(d);
          if (5'(len) + 5'(L) > 5'd15) begin
            wv[n] = huff_word(acc, len);
            n++;
            nacc = 15'd1;
            nlen = L;
          end else begin
            nacc = acc | (15'd1 << len);
            nlen = len + L;
          end
        end else begin
          if (len != 0) begin
            wv[n] = huff_word(acc, len);
            n++;
          end
          wv[n] = make_word(HDR_ADC, in_zs.s.adc);
          n++;
          nacc = '0;
          nlen = '0;
        end
        if (in_zs.roi_last && nlen != 0) begin
          wv[n] = huff_word(nacc, nlen);
          n++;
          nacc = '0;
          nlen = '0;
        end
      end else if (len != 0) begin
        // ROI ended without its last flag (not expected): close the word
        wv[n] = huff_word(acc, len);
        n++;
        nacc = '0;
        nlen = '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      len       <= '0;
      prev      <= '0;
      out_cnt   <= '0;
      out_words <= '0;
    end else begin
      out_cnt   <= n;
      out_words <= wv;
      acc       <= nacc;
      len       <= nlen;
      if (in_valid && in_zs.keep) prev <= in_zs.s.adc;
    end
  end

endmodule
