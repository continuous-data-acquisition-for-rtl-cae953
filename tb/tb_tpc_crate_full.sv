// tb_tpc_crate_full: the crate at its full size (15 FEMs of 64 channels,
// frames of 3200 ticks, an 8-frame ring in a 1M x 36 SRAM per FEM), taken
// through one complete frame: two frames (3.2 ms) of 16 MS/s ADC data go in,
// and frame 0 must come out of the Continuous Readout Stream, decoded per FEM
// slot, exactly as the reference zero suppression gives it. Even FEMs use
// static baselines with a threshold per channel (SN Run Period 3), FEMs
// 1, 5, 9, 13 the dynamic baseline with one threshold for all channels
// (Period 1), FEMs 3, 7, 11 the dynamic baseline with a threshold per channel
// (Period 2). The
// signal is a noisy baseline with a short bipolar pulse on each channel every
// 797 ticks, sparse enough for the shared dataway. No trigger is given: a
// triggered frame from all 15 FEMs is 15 x 409.6 kB of raw data, which the
// FEMs hold in their external buffer memory, not modelled here. The test also
// reports the compression factor reached on this signal.
module tb_tpc_crate_full;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;
  localparam int NF = 15, NCH = 64, SPF = 3200, AW = 20;
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

  tpc_crate dut (.*);

  for (genvar f = 0; f < NF; f++) begin : g_sram
    sram_model #(.ADDR_W(AW), .RL(2)) u_sram (.clk, .ce(sram_ce[f]), .we(sram_we[f]), .addr(sram_addr[f]),
                                              .wdata(sram_wdata[f]), .rdata(sram_rdata[f]));
  end

  // threshold of a channel: one value, or one per channel (8..14)
  function automatic int thr_of(int fem, int ch);
    return (fem % 4 == 1) ? THR : 8 + 2 * (ch % 4);
  endfunction

  // sparse test signal: baseline with +/-1 noise, a pulse every 797 ticks
  function automatic int wave(int g, int fem, int ch);
    int h = (g * 1103515245 + ch * 12345 + fem * 7919) & 32'h7fffffff;
    int v = 2000 + 20 * ch + 5 * fem + ((h >> 16) % 3) - 1;
    int p = (g + 37 * ch + 101 * fem) % 797;
    if (p < 12) v += (p < 6) ? (p * 9) : ((12 - p) * -8);
    return v;
  endfunction

  stream_decoder sn_dec[NF];
  longint n_words = 0;
  int n_bl_upd = 0, sn_slots = 0;

  always @(posedge clk) if (rst_n) begin
    if (sn_out_valid && sn_out_ready) begin
      sn_slots |= 1 << sn_out_fem;
      for (int k = 0; k < int'(sn_out_cnt); k++) begin
        sn_dec[sn_out_fem].push(sn_out_words[k]);
        if (sn_dec[sn_out_fem].frame == 0) n_words++;
      end
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
    dsample_t sn_exp[NF][$];
    bl_model model[NF];
    adc_data = '0;
    for (int f = 0; f < NF; f++) begin
      sn_dec[f] = new(); model[f] = new();
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < NCH; c++) begin
        cfg(f, c, (3 << 12) | thr_of(f, c));
        cfg(f, 256 + c, 2000 + 20 * c + 5 * f);
      end
      cfg(f, 512, ((f % 2) << 8) | (PRE << 4) | POST);
      cfg(f, 513, MTOL);
      cfg(f, 514, VTOL);
    end
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NCH; c++) begin
        automatic int vals[$];
        automatic bit keep[$];
        for (int t = 0; t < SPF; t++) vals.push_back(wave(t, f, c));
        zs_ref_run(vals, c, thr_of(f, c), 3, 2000 + 20 * c + 5 * f, f % 2 == 1, PRE, POST, BLOCK, MTOL, VTOL,
                   model[f], keep);
        foreach (keep[t]) if (keep[t]) sn_exp[f].push_back('{0, c, t, vals[t]});
      end
    // two frames in at 16 MS/s (one strobe every 8 clocks of 128 MHz)
    for (int g = 0; g < 2 * SPF; g++)
      for (int s = 0; s < 8; s++) begin
        @(negedge clk);
        adc_valid = 1;
        if (s == 0)
          for (int f = 0; f < NF; f++)
            for (int c = 0; c < NCH; c++) adc_data[f][c] = adc_t'(wave(g, f, c));
        @(negedge clk);
        adc_valid = 0;
        repeat (6) @(negedge clk);
      end
    repeat (20000) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      automatic int got = 0;
      foreach (sn_dec[f].out[i]) if (sn_dec[f].out[i].frame == 0) got++;
      checks++;
      if (got != sn_exp[f].size() || sn_dec[f].errors != 0) begin
        failures++;
        $display("FAIL: FEM %0d frame 0 decoded %0d samples (%0d errors), expected %0d",
                 f, got, sn_dec[f].errors, sn_exp[f].size());
      end
      for (int i = 0; i < sn_exp[f].size() && i < sn_dec[f].out.size(); i++) begin
        checks++;
        if (sn_dec[f].out[i] != sn_exp[f][i]) begin
          failures++;
          if (failures < 20) $display("FAIL: FEM %0d sample %0d differs", f, i);
        end
      end
      checks++;
      if (wr_overrun[f] || ring_overflow[f] || trig_overflow[f] || sn_overflow[f]) begin
        failures++;
        $display("FAIL: FEM %0d status flags", f);
      end
    end
    checks++;
    if (sn_slots != (1 << NF) - 1) begin failures++; $display("FAIL: token did not visit every FEM"); end
    checks++;
    if (n_bl_upd == 0) begin failures++; $display("FAIL: no dynamic baseline update"); end
    $display("frame 0: %0d input bytes, %0d output bytes, compression factor %0d",
             NF * NCH * SPF * 2, n_words * 2, (NF * NCH * SPF * 2) / (n_words * 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
