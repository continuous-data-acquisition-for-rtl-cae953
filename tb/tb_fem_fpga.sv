// tb_fem_fpga: one FEM (4 channels, frames of 128 ticks, 4-frame ring) with
// static baselines, 7 presamples and 8 postsamples, a trigger in frame 2 and
// random back-pressure on both stream outputs. The decoded Continuous Readout
// Stream must equal the reference zero suppression of the 2 MS/s samples, and
// the decoded Trigger Stream every sample of frame 2. Samples on the 7 of 8
// ADC strobes that are not kept carry junk. Also checks that a complete frame
// leaves the FEM's Continuous Stream buffer within two frame periods of its
// last sample being digitised.
module tb_fem_fpga;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;
  localparam int NCH = 4, SPF = 128, NFR = 4, AW = 2 + 2 + 6;
  localparam int FRAMES_IN = 6, THR = 10, TRIG_FRAME = 2;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0, trig_in = 0;
  adc_t [NCH-1:0] adc_data;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0;
  logic sram_ce, sram_we;
  logic [AW-1:0] sram_addr;
  logic [35:0] sram_wdata, sram_rdata;
  logic trig_valid, sn_valid;
  logic trig_ready = 0, sn_ready = 0;
  logic [1:0] trig_cnt, sn_cnt;
  word_t [1:0] trig_words, sn_words;
  logic wr_overrun, ring_overflow, trig_overflow, sn_overflow, bl_update;
  logic [15:0] frames_written;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fem_fpga #(.NCH(NCH), .SAMPLES_PER_FRAME(SPF), .NFRAMES(NFR), .ADDR_W(AW)) dut (.*);
  sram_model #(.ADDR_W(AW), .RL(2)) u_sram (.clk, .ce(sram_ce), .we(sram_we), .addr(sram_addr),
                                            .wdata(sram_wdata), .rdata(sram_rdata));

  stream_decoder sn_dec = new(), tr_dec = new();
  int cyc = 0, frame_in_done[int], frame_out_done[int];

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (sn_valid && sn_ready)
        for (int k = 0; k < int'(sn_cnt); k++) begin
          automatic int fr_was = sn_dec.frame;
          sn_dec.push(sn_words[k]);
          if (sn_dec.frame != fr_was && fr_was >= 0) frame_out_done[fr_was] = cyc;
        end
      if (trig_valid && trig_ready)
        for (int k = 0; k < int'(trig_cnt); k++) tr_dec.push(trig_words[k]);
      sn_ready <= ($urandom % 3 != 0);
      trig_ready <= ($urandom % 3 != 0);
    end
  end

  task automatic cfg(int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    dsample_t sn_exp[$], tr_exp[$];
    bl_model model = new();
    adc_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      cfg(c, (3 << 12) | THR);
      cfg(256 + c, 2000 + 30 * c);
    end
    cfg(512, (7 << 4) | 8);
    for (int fr = 0; fr < FRAMES_IN; fr++)
      for (int c = 0; c < NCH; c++) begin
        automatic int vals[$];
        automatic bit keep[$];
        for (int t = 0; t < SPF; t++) vals.push_back(adc_wave(fr * SPF + t, 0, c));
        zs_ref_run(vals, c, THR, 3, 2000 + 30 * c, 0, 7, 8, 64, 0, 0, model, keep);
        if (fr < FRAMES_IN - 1) foreach (keep[t]) if (keep[t]) sn_exp.push_back('{fr, c, t, vals[t]});
        if (fr == TRIG_FRAME) foreach (vals[t]) tr_exp.push_back('{fr, c, t, vals[t]});
      end
    for (int g = 0; g < FRAMES_IN * SPF; g++) begin
      for (int s = 0; s < 8; s++) begin
        @(negedge clk);
        adc_valid = 1;
        for (int c = 0; c < NCH; c++) adc_data[c] = (s == 0) ? adc_t'(adc_wave(g, 0, c)) : adc_t'($urandom);
        trig_in = (g == TRIG_FRAME * SPF + 3 && s == 0);
        @(negedge clk);
        adc_valid = 0;
        trig_in = 0;
        repeat (6) @(negedge clk);
      end
      if (g % SPF == SPF - 1) frame_in_done[g / SPF] = cyc;
    end
    repeat (SPF * 64 + 2000) @(posedge clk);
    checks++;
    if (sn_dec.out.size() < sn_exp.size() || sn_dec.errors != 0) begin
      failures++;
      $display("FAIL: continuous stream decoded %0d samples (%0d errors), expected >= %0d",
               sn_dec.out.size(), sn_dec.errors, sn_exp.size());
    end
    for (int i = 0; i < sn_exp.size() && i < sn_dec.out.size(); i++) begin
      checks++;
      if (sn_dec.out[i] != sn_exp[i]) begin
        failures++;
        if (failures < 20) $display("FAIL: continuous sample %0d differs", i);
      end
    end
    checks++;
    if (tr_dec.out.size() != tr_exp.size()) begin
      failures++;
      $display("FAIL: trigger stream %0d samples, expected %0d", tr_dec.out.size(), tr_exp.size());
    end
    for (int i = 0; i < tr_exp.size() && i < tr_dec.out.size(); i++) begin
      checks++;
      if (tr_dec.out[i] != tr_exp[i]) begin
        failures++;
        if (failures < 20) $display("FAIL: trigger sample %0d differs", i);
      end
    end
    // latency: frame f's compressed data has left when frame f+1's header is read,
    // at most two frame periods (2 * SPF * 64 clocks) after frame f was digitised
    for (int f = 0; f < FRAMES_IN - 1; f++) begin
      checks++;
      if (!frame_out_done.exists(f) || frame_out_done[f] - frame_in_done[f] > 2 * SPF * 64) begin
        failures++;
        $display("FAIL: frame %0d left late", f);
      end
    end
    checks++;
    if (wr_overrun || ring_overflow || trig_overflow || sn_overflow || frames_written != 16'(FRAMES_IN)) begin
      failures++;
      $display("FAIL: status flags");
    end
    $display("continuous: %0d samples in %0d words; trigger: %0d samples", sn_dec.out.size(),
             sn_dec.n_raw + sn_dec.n_huff + sn_dec.n_roi + sn_dec.n_chan_hdr + sn_dec.n_frame_hdr, tr_dec.out.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
