// tb_huffman_encoder: (1) the paper's worked example: differences
// (-2, -1, 0, +1) after a raw sample must give the single Huffman word
// 0b1_001_1_01_0001_00000 = 0x9A20; (2) random ROIs with small and large
// differences are encoded and the word stream is decoded by an independent
// decoder (tb_lartpc_pkg::stream_decoder); the decoded samples must equal the
// kept input samples, and the number of Huffman words must match a count
// worked out from the code lengths (a word closes when the next code does not
// fit in its 15 bits).
module tb_huffman_encoder;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  zs_sample_t in_zs;
  logic [2:0] out_cnt;
  word_t [3:0] out_words;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  huffman_encoder dut (.*);

  stream_decoder dec = new();
  word_t words[$];
  dsample_t expq[$];
  int exp_huff = 0, n_split = 0, n_bigjump = 0;

  always @(posedge clk) if (rst_n)
    for (int i = 0; i < int'(out_cnt); i++) begin
      words.push_back(out_words[i]);
      dec.push(out_words[i]);
    end

  task automatic send(int f, int c, int t, int adc, bit keep, bit first, bit last, bit cf, bit ff);
    @(negedge clk);
    in_valid = 1;
    in_zs = '0;
    in_zs.s.frame = 12'(f);
    in_zs.s.channel = 8'(c);
    in_zs.s.tick = 12'(t);
    in_zs.s.adc = adc_t'(adc);
    in_zs.s.chan_first = cf;
    in_zs.s.frame_first = ff;
    in_zs.keep = keep;
    in_zs.roi_first = first;
    in_zs.roi_last = last;
    if (keep) expq.push_back('{f, c, t, adc});
  endtask

  function automatic int clen(int d);
    return (d == 0) ? 1 : (d < 0 ? -2 * d : 2 * d + 1);
  endfunction

  initial begin
    in_zs = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // (1) paper example
    send(0, 0, 0, 2000, 0, 0, 0, 1, 1);
    send(0, 0, 1, 2000, 1, 1, 0, 0, 0);
    send(0, 0, 2, 1998, 1, 0, 0, 0, 0);
    send(0, 0, 3, 1997, 1, 0, 0, 0, 0);
    send(0, 0, 4, 1997, 1, 0, 0, 0, 0);
    send(0, 0, 5, 1998, 1, 0, 1, 0, 0);
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (words.size() != 5 || words[0] != 16'h4000 || words[1] != 16'h1000 || words[2] != 16'h2001 ||
        words[3] != 16'(2000) || words[4] != 16'h9A20) begin
      failures++;
      $display("FAIL: paper example gave %0d words:", words.size());
      foreach (words[i]) $display("  %04h", words[i]);
    end
    exp_huff = 1;
    // (2) random ROIs
    for (int f = 1; f < 4; f++)
      for (int c = 0; c < 4; c++) begin
        automatic int v = 2000 + 50 * c;
        automatic int len = 0;
        automatic bit in_roi = 0;
        automatic int roi_left = 0;
        for (int t = 0; t < 200; t++) begin
          automatic bit keep, first, last;
          automatic int d = int'($urandom % 7) - 3;
          if ($urandom % 23 == 0) begin d = 20 + int'($urandom % 50); n_bigjump++; end
          if (!in_roi && $urandom % 6 == 0) begin in_roi = 1; roi_left = 1 + int'($urandom % 40); first = 1; end
          else first = 0;
          keep = in_roi;
          last = in_roi && (roi_left == 1 || t == 199);
          v = v + d;
          if (keep && !first) begin
            if (d >= -3 && d <= 3) begin
              if (len + clen(d) > 15) begin exp_huff++; n_split++; len = clen(d); end
              else len += clen(d);
            end else begin
              if (len > 0) exp_huff++;
              len = 0;
            end
          end
          if (last && len > 0) begin exp_huff++; len = 0; end
          send(f, c, t, v, keep, first, last, t == 0, t == 0 && c == 0);
          if (in_roi) begin roi_left--; if (roi_left == 0 || last) in_roi = 0; end
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
    // compare decoded samples
    checks++;
    if (dec.out.size() != expq.size() || dec.errors != 0) begin
      failures++;
      $display("FAIL: decoded %0d samples (%0d errors), expected %0d", dec.out.size(), dec.errors, expq.size());
    end
    for (int i = 0; i < expq.size() && i < dec.out.size(); i++) begin
      checks++;
      if (dec.out[i] != expq[i]) begin
        failures++;
        if (failures < 20)
          $display("FAIL: sample %0d decoded f%0d c%0d t%0d %0d, expected f%0d c%0d t%0d %0d", i,
                   dec.out[i].frame, dec.out[i].channel, dec.out[i].tick, dec.out[i].adc,
                   expq[i].frame, expq[i].channel, expq[i].tick, expq[i].adc);
      end
    end
    checks++;
    if (dec.n_huff != exp_huff) begin
      failures++;
      $display("FAIL: %0d Huffman words, expected %0d", dec.n_huff, exp_huff);
    end
    checks++;
    if (n_split == 0 || n_bigjump == 0) begin failures++; $display("FAIL: coverage"); end
    $display("samples=%0d words=%0d huffman=%0d raw=%0d splits=%0d", expq.size(), words.size(),
             dec.n_huff, dec.n_raw, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
