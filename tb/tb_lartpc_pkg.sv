// tb_lartpc_pkg: reference models shared by the testbenches.
//
// * stream_decoder: decodes the 16-bit word stream (frame/channel/ROI headers,
//   raw ADC words, Huffman words) back into (frame, channel, tick, adc)
//   samples. It reads Huffman words from the least significant end: trailing
//   zeros are padding, then each code is a 1 followed (upwards) by zeros, the
//   last one ended by the Huffman flag in bit 15; code length L gives
//   d = 0, -1, +1, -2, +2, -3, +3 for L = 1..7.
// * bl_model: the paper's dynamic-baseline arithmetic, per channel, block by
//   block, written independently of the RTL.
// * zs_keep: which samples of one channel run lie in an ROI.
package tb_lartpc_pkg;

  typedef struct {
    int frame;
    int channel;
    int tick;
    int adc;
  } dsample_t;

  class stream_decoder;
    int frame = -1, channel = -1, tick = 0, prev = 0;
    int n_frame_hdr = 0, n_chan_hdr = 0, n_roi = 0, n_raw = 0, n_huff = 0, n_codes = 0;
    int n_full_huff = 0;   // Huffman words whose padding is shorter than the next code would need
    int errors = 0;
    dsample_t out[$];

    function void push(logic [15:0] w);
      if (w[15]) begin
        int p = 0;
        int codes[$];
        n_huff++;
        while (p < 15 && w[p] == 1'b0) p++;
        if (p >= 15) begin errors++; return; end
        while (p < 15) begin
          int q = p + 1;
          while (q < 15 && w[q] == 1'b0) q++;
          codes.push_back(q - p);   // code length
          p = q;
        end
        foreach (codes[i]) begin
          int L = codes[i];
          int d;
          if (L > 7) begin errors++; return; end
          d = (L == 1) ? 0 : ((L % 2 == 0) ? -(L / 2) : (L - 1) / 2);
          prev = prev + d;
          tick++;
          n_codes++;
          out.push_back('{frame, channel, tick, prev});
        end
      end else begin
        case (w[15:12])
          4'h0: begin
            n_raw++;
            tick++;
            prev = int'(w[11:0]);
            out.push_back('{frame, channel, tick, prev});
          end
          4'h1: begin n_chan_hdr++; channel = int'(w[11:0]); tick = -1; end
          4'h2: begin n_roi++; tick = int'(w[11:0]) - 1; end
          4'h4: begin n_frame_hdr++; frame = int'(w[11:0]); end
          default: errors++;
        endcase
      end
    endfunction
  endclass

  // Reference dynamic baseline: one call per completed block of a channel.
  class bl_model;
    int n[int];
    int mu1[int], mu2[int], v1[int], v2[int];
    int base[int];
    bit valid[int];

    // mean and variance as the paper defines them, for a block of 2**k samples
    static function void stats(int s[$], output int mu, output int v);
      int sum = 0, k = $clog2(s.size());
      foreach (s[i]) sum += s[i];
      mu = sum >> k;
      sum = 0;
      foreach (s[i]) begin
        int d = s[i] - mu;
        if (d < 0) d = -d;
        sum += (d >= 63) ? 4095 : d * d;
      end
      v = sum >> k;
    endfunction

    static function int adiff(int a, int b);
      return (a > b) ? a - b : b - a;
    endfunction

    // returns 1 when the window ending with this block is accepted
    function bit add_block(int ch, int mu, int v, int mtol, int vtol);
      bit ok = 0;
      if (!n.exists(ch)) begin n[ch] = 0; valid[ch] = 0; base[ch] = 0; mu1[ch] = 0; mu2[ch] = 0; v1[ch] = 0; v2[ch] = 0; end
      if (n[ch] >= 2 &&
          adiff(mu, mu2[ch]) <= mtol && adiff(mu2[ch], mu1[ch]) <= mtol && adiff(mu, mu1[ch]) <= mtol &&
          adiff(v, v2[ch]) <= vtol && adiff(v2[ch], v1[ch]) <= vtol && adiff(v, v1[ch]) <= vtol) begin
        ok = 1;
        base[ch] = mu2[ch];
        valid[ch] = 1;
      end
      mu1[ch] = mu2[ch]; v1[ch] = v2[ch];
      mu2[ch] = mu; v2[ch] = v;
      if (n[ch] < 2) n[ch]++;
      return ok;
    endfunction
  endclass

  // ROI membership of a run given per-sample pass and ok flags
  function automatic void zs_keep(input bit pass[$], input bit ok[$], input int pre, input int post,
                                  output bit keep[$]);
    keep.delete();
    for (int m = 0; m < pass.size(); m++) begin
      bit k = 0;
      for (int j = m - post; j <= m + pre; j++)
        if (j >= 0 && j < pass.size() && pass[j]) k = 1;
      keep.push_back(k && ok[m]);
    end
  endfunction

  function automatic bit zs_pass(int adc, int bl, int thr, int sgn);
    return ((sgn == 1 || sgn == 3) && adc > bl + thr) || ((sgn == 2 || sgn == 3) && adc < bl - thr);
  endfunction

  // Reference zero suppression of one channel run (channel c, in stream order).
  // Static: baseline sbl. Dynamic: the baseline of each block is the model's
  // accepted baseline before that block is added (windows ending at the
  // previous block at the latest); the run's blocks are then added to model.
  function automatic void zs_ref_run(input int vals[$], input int c, input int thr, input int sgn,
                                     input int sbl, input bit dyn, input int pre, input int post,
                                     input int block, input int mtol, input int vtol,
                                     bl_model model, output bit keep[$]);
    bit pass[$], ok[$];
    int blk[$];
    int bl = sbl;
    bit bok = 1;
    foreach (vals[t]) begin
      if (dyn && t % block == 0) begin
        bl  = model.base.exists(c) ? model.base[c] : 0;
        bok = model.valid.exists(c) ? model.valid[c] : 0;
      end
      pass.push_back(zs_pass(vals[t], bl, thr, sgn) && bok);
      ok.push_back(bok);
      blk.push_back(vals[t]);
      if (blk.size() == block) begin
        int mu, vv;
        bl_model::stats(blk, mu, vv);
        void'(model.add_block(c, mu, vv, mtol, vtol));
        blk.delete();
      end
    end
    zs_keep(pass, ok, pre, post, keep);
  endfunction

  // Deterministic test waveform of one channel at 2 MS/s tick g: a baseline
  // near 2000 with +/-1 noise, and now and then a bipolar pulse (steps larger
  // than 3 counts as well as small ones).
  function automatic int adc_wave(int g, int fem, int ch);
    int h = (g * 1103515245 + ch * 12345 + fem * 7919) & 32'h7fffffff;
    int v = 2000 + 30 * ch + 5 * fem + ((h >> 16) % 3) - 1;
    int p = (g + 13 * ch + 7 * fem) % 97;
    if (p < 12) v += (p < 6) ? (p * 9) : ((12 - p) * -8);
    return v;
  endfunction

endpackage
