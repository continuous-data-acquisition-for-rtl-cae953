// tb_tpc_crate: end-to-end test of a reduced crate (2 FEMs of 4 channels,
// frames of 128 ticks, a 4-frame ring). ADC samples are driven at 16 MS/s
// (every 8 clocks), with junk on the 7 strobes of 8 that the downsampler must
// drop. FEM 0 runs with static baselines, FEM 1 with the dynamic baseline.
// One trigger is given during frame 1. Both output streams are split by FEM
// slot and decoded; the Continuous Readout Stream must equal the reference
// zero suppression of the 2 MS/s samples for every completed frame, and the
// Trigger Stream must hold every sample of frame 1. The test also counts the
// mechanisms the design has and fails if one never happened: ROIs and
// suppressed samples, Huffman words, raw words after large steps, Huffman
// words closed because the next code did not fit, dynamic baseline updates,
// Trigger Stream readout, Continuous Stream beats deferred by the Trigger
// Stream priority, token passing between FEMs, and ring-buffer wrap-around.
module tb_tpc_crate;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;
  localparam int NF = 2, NCH = 4, SPF = 128, NFR = 4, AW = 2 + 2 + 6;
  localparam int FRAMES_IN = 7;
  localparam int THR = 10, PRE = 7, POST = 8, BLOCK = 64, MTOL = 8, VTOL = 400;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0, trig_in = 0;
  adc_t [NF-1:0][NCH-1:0] adc_data;
  logic cfg_we = 0;
  logic [7:0] cfg_fem = 0;
  logic [9:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0;
  logic [NF-1:0] sram_ce, sram_we;
  logic [NF-1:0][AW-1:0] sram_addr;
  logic [NF-1:0][35:0] sram_wdata, sram_rdata;
  logic trig_out_valid, sn_out_valid;
  logic trig_out_ready = 1, sn_out_ready = 1;
  logic [1:0] trig_out_cnt, sn_out_cnt;
  word_t [1:0] trig_out_words, sn_out_words;
  logic [7:0] trig_out_fem, sn_out_fem;
  logic [NF-1:0] wr_overrun, ring_overflow, trig_overflow, sn_overflow, bl_update;
  logic [31:0] trig_beats, sn_beats, sn_deferred;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tpc_crate #(.N_FEM(NF), .NCH(NCH), .SAMPLES_PER_FRAME(SPF), .NFRAMES(NFR), .ADDR_W(AW)) dut (.*);

  for (genvar f = 0; f < NF; f++) begin : g_sram
    sram_model #(.ADDR_W(AW), .RL(2)) u_sram (.clk, .ce(sram_ce[f]), .we(sram_we[f]), .addr(sram_addr[f]),
                                              .wdata(sram_wdata[f]), .rdata(sram_rdata[f]));
  end

  stream_decoder sn_dec[NF], tr_dec[NF];
  int n_split = 0, n_bl_upd = 0, sn_slots = 0, tr_slots = 0;
  bit prev_huff[NF];

  always @(posedge clk) if (rst_n) begin
    if (sn_out_valid && sn_out_ready) begin
      sn_slots |= 1 << sn_out_fem;
      for (int k = 0; k < int'(sn_out_cnt); k++) begin
        if (sn_out_words[k][15] && prev_huff[sn_out_fem]) n_split++;
        prev_huff[sn_out_fem] = sn_out_words[k][15];
        sn_dec[sn_out_fem].push(sn_out_words[k]);
      end
    end
    if (trig_out_valid && trig_out_ready) begin
      tr_slots |= 1 << trig_out_fem;
      for (int k = 0; k < int'(trig_out_cnt); k++) tr_dec[trig_out_fem].push(trig_out_words[k]);
    end
    for (int f = 0; f < NF; f++) if (bl_update[f]) n_bl_upd++;
  end

  task automatic cfg(int fem, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_fem = 8'(fem); cfg_addr = 10'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    dsample_t sn_exp[NF][$], tr_exp[NF][$];
    bl_model model[NF];
    int n_keep = 0, n_drop = 0;
    adc_data = '0;
    for (int f = 0; f < NF; f++) begin
      sn_dec[f] = new(); tr_dec[f] = new(); model[f] = new();
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // configuration: FEM 0 static, FEM 1 dynamic; both signs, 7 pre / 8 post
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < NCH; c++) begin
        cfg(f, c, (3 << 12) | THR);
        cfg(f, 256 + c, 2000 + 30 * c + 5 * f);
      end
      cfg(f, 512, ((f == 1) << 8) | (PRE << 4) | POST);
      cfg(f, 513, MTOL);
      cfg(f, 514, VTOL);
    end
    // reference streams, in readout order
    for (int fr = 0; fr < FRAMES_IN; fr++)
      for (int f = 0; f < NF; f++)
        for (int c = 0; c < NCH; c++) begin
          automatic int vals[$];
          automatic bit keep[$];
          for (int t = 0; t < SPF; t++) vals.push_back(adc_wave(fr * SPF + t, f, c));
          zs_ref_run(vals, c, THR, 3, 2000 + 30 * c + 5 * f, f == 1, PRE, POST, BLOCK, MTOL, VTOL,
                     model[f], keep);
          if (fr < FRAMES_IN - 1)
            foreach (keep[t]) begin
              if (keep[t]) begin sn_exp[f].push_back('{fr, c, t, vals[t]}); n_keep++; end
              else n_drop++;
            end
          if (fr == 1) foreach (vals[t]) tr_exp[f].push_back('{fr, c, t, vals[t]});
        end
    // ADC samples at 16 MS/s
    for (int g = 0; g < FRAMES_IN * SPF; g++)
      for (int s = 0; s < 8; s++) begin
        @(negedge clk);
        adc_valid = 1;
        for (int f = 0; f < NF; f++)
          for (int c = 0; c < NCH; c++)
            adc_data[f][c] = (s == 0) ? adc_t'(adc_wave(g, f, c)) : adc_t'($urandom);
        trig_in = (g == SPF + 20 && s == 0);
        @(negedge clk);
        adc_valid = 0;
        trig_in = 0;
        repeat (6) @(negedge clk);
      end
    repeat (SPF * 64 + 2000) @(posedge clk);
    // compare
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (sn_dec[f].out.size() < sn_exp[f].size() || sn_dec[f].errors != 0) begin
        failures++;
        $display("FAIL: FEM %0d continuous stream decoded %0d samples (%0d errors), expected >= %0d",
                 f, sn_dec[f].out.size(), sn_dec[f].errors, sn_exp[f].size());
      end
      for (int i = 0; i < sn_exp[f].size() && i < sn_dec[f].out.size(); i++) begin
        checks++;
        if (sn_dec[f].out[i] != sn_exp[f][i]) begin
          failures++;
          if (failures < 20)
            $display("FAIL: FEM %0d sample %0d: f%0d c%0d t%0d %0d expected f%0d c%0d t%0d %0d", f, i,
                     sn_dec[f].out[i].frame, sn_dec[f].out[i].channel, sn_dec[f].out[i].tick, sn_dec[f].out[i].adc,
                     sn_exp[f][i].frame, sn_exp[f][i].channel, sn_exp[f][i].tick, sn_exp[f][i].adc);
        end
      end
      checks++;
      if (tr_dec[f].out.size() != tr_exp[f].size()) begin
        failures++;
        $display("FAIL: FEM %0d trigger stream %0d samples, expected %0d", f, tr_dec[f].out.size(), tr_exp[f].size());
      end
      for (int i = 0; i < tr_exp[f].size() && i < tr_dec[f].out.size(); i++) begin
        checks++;
        if (tr_dec[f].out[i] != tr_exp[f][i]) begin
          failures++;
          if (failures < 20) $display("FAIL: FEM %0d trigger sample %0d differs", f, i);
        end
      end
      checks++;
      if (wr_overrun[f] || ring_overflow[f] || trig_overflow[f] || sn_overflow[f]) begin
        failures++;
        $display("FAIL: FEM %0d status flags %b%b%b%b", f, wr_overrun[f], ring_overflow[f], trig_overflow[f], sn_overflow[f]);
      end
    end
    // mechanisms
    begin
      int n_roi = 0, n_raw = 0, n_huff = 0, n_trig = 0;
      for (int f = 0; f < NF; f++) begin
        n_roi += sn_dec[f].n_roi; n_raw += sn_dec[f].n_raw; n_huff += sn_dec[f].n_huff;
        n_trig += tr_dec[f].out.size();
      end
      $display("mechanisms: rois=%0d suppressed=%0d kept=%0d huffman_words=%0d raw_words=%0d raw_after_step=%0d",
               n_roi, n_drop, n_keep, n_huff, n_raw, n_raw - n_roi);
      $display("            code_did_not_fit=%0d baseline_updates=%0d trigger_samples=%0d deferred=%0d",
               n_split, n_bl_upd, n_trig, sn_deferred);
      $display("            sn_slots=%b trig_slots=%b ring_wraps=%0d", sn_slots, tr_slots, FRAMES_IN / NFR);
      checks++; if (n_roi == 0)           begin failures++; $display("FAIL: no ROI"); end
      checks++; if (n_drop == 0)          begin failures++; $display("FAIL: nothing suppressed"); end
      checks++; if (n_huff == 0)          begin failures++; $display("FAIL: no Huffman word"); end
      checks++; if (n_raw - n_roi <= 0)   begin failures++; $display("FAIL: no raw word after a large step"); end
      checks++; if (n_split == 0)         begin failures++; $display("FAIL: no Huffman word split"); end
      checks++; if (n_bl_upd == 0)        begin failures++; $display("FAIL: no dynamic baseline update"); end
      checks++; if (n_trig == 0)          begin failures++; $display("FAIL: no Trigger Stream data"); end
      checks++; if (sn_deferred == 0)     begin failures++; $display("FAIL: Trigger Stream priority never used"); end
      checks++; if (sn_slots != (1 << NF) - 1 || tr_slots != (1 << NF) - 1) begin failures++; $display("FAIL: token did not visit every FEM"); end
      checks++; if (FRAMES_IN <= NFR)     begin failures++; $display("FAIL: ring never wrapped"); end
    end
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
