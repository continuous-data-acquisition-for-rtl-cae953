// tb_zero_suppressor: compares the ROI flags of every sample with a reference
// computed in the testbench: threshold/sign test against the baseline, then
// "inside [first pass - pre, last pass + post] of the same channel run".
// Phase A uses static baselines with 7 presamples and 8 postsamples and the
// three sign settings; phase B (after a reset) uses the dynamic baseline with
// 3 presamples and 2 postsamples, where the baseline of block b is the one
// accepted from the windows ending at block b-1 at the latest and a channel
// gives no data before its first accepted window.
module tb_zero_suppressor;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;
  localparam int NCH = 3, BLOCK = 8, SPF = 64, DLY = 12, NFR = 6;
  localparam int LAT = DLY + 7 + 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t in_sample;
  logic cfg_we = 0;
  logic [9:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0;
  logic out_valid, bl_update;
  zs_sample_t out_zs;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  zero_suppressor #(.NCH(NCH), .BLOCK(BLOCK), .ZS_DELAY(DLY)) dut (.*);

  typedef struct { int ch; int t; int f; int adc; bit keep; bit first; bit last; } exp_t;
  exp_t expq[$];
  int nin = 0, nout = 0, n_keep = 0, n_drop = 0, n_roi = 0, n_bl_upd = 0;

  task automatic cfg(int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic int wave(int f, int c, int t, bit dyn);
    int v = 1000 + 100 * c + (($urandom % 3) - 1);
    if (dyn && f == 2 && c == 1 && t >= 24 && t < 40) v += ((t % 2) ? 30 : -30);   // noisy stretch
    if ((t % 29) == (7 * c + f) % 29 && t > 2) v += 40;
    if ((t % 29) == (7 * c + f + 1) % 29 && t > 2) v -= 35;
    if (t == SPF - 3 && f % 2 == 0) v += 25;     // ROI cut by the end of the run
    return v;
  endfunction

  task automatic run_phase(bit dyn, int pre, int post, int thr[NCH], int sgn[NCH], int sbl[NCH]);
    bl_model model = new();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      cfg(c, (sgn[c] << 12) | thr[c]);
      cfg(256 + c, sbl[c]);
    end
    cfg(512, (int'(dyn) << 8) | (pre << 4) | post);
    cfg(513, 3);
    cfg(514, 6);
    expq.delete();
    nin = 0; nout = 0;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < NCH; c++) begin
        int vals[$];
        bit pass[$], ok[$], keep[$];
        int blk[$];
        int bl = sbl[c];
        bit bok = 1;
        for (int t = 0; t < SPF; t++) begin
          automatic int v = wave(f, c, t, dyn);
          if (t % BLOCK == 0 && dyn) begin
            bl = model.base.exists(c) ? model.base[c] : 0;
            bok = model.valid.exists(c) ? model.valid[c] : 0;
          end
          vals.push_back(v);
          pass.push_back(zs_pass(v, bl, thr[c], sgn[c]) && bok);
          ok.push_back(bok);
          blk.push_back(v);
          if (blk.size() == BLOCK) begin
            int mu, vv;
            bl_model::stats(blk, mu, vv);
            void'(model.add_block(c, mu, vv, 3, 6));
            blk.delete();
          end
        end
        zs_keep(pass, ok, pre, post, keep);
        for (int t = 0; t < SPF; t++) begin
          automatic exp_t e;
          e.ch = c; e.t = t; e.f = f; e.adc = vals[t]; e.keep = keep[t];
          e.first = keep[t] && !(t > 0 && keep[t-1]);
          e.last  = keep[t] && !(t < SPF - 1 && keep[t+1]);
          expq.push_back(e);
        end
        // drive the run, one sample per clock, with an idle clock now and then
        for (int t = 0; t < SPF; t++) begin
          @(negedge clk);
          in_valid = 1;
          in_sample = '0;
          in_sample.adc = adc_t'(vals[t]);
          in_sample.channel = 8'(c);
          in_sample.tick = 12'(t);
          in_sample.frame = 12'(f);
          in_sample.chan_first = (t == 0);
          in_sample.chan_last = (t == SPF - 1);
          in_sample.frame_first = (t == 0 && c == 0);
          nin++;
          if ($urandom % 7 == 0) begin
            @(negedge clk);
            in_valid = 0;
          end
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != nin - LAT) begin
      failures++;
      $display("FAIL: %0d samples out for %0d in, expected %0d", nout, nin, nin - LAT);
    end
  endtask

  always @(posedge clk) if (rst_n && bl_update) n_bl_upd++;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    nout++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL: unexpected output");
    end else begin
      automatic exp_t e = expq.pop_front();
      if (int'(out_zs.s.channel) != e.ch || int'(out_zs.s.tick) != e.t || int'(out_zs.s.adc) != e.adc ||
          out_zs.keep != e.keep || out_zs.roi_first != e.first || out_zs.roi_last != e.last) begin
        failures++;
        if (failures < 20)
          $display("FAIL: f%0d c%0d t%0d adc %0d keep/first/last %0b%0b%0b, expected c%0d t%0d adc %0d %0b%0b%0b",
                   out_zs.s.frame, out_zs.s.channel, out_zs.s.tick, out_zs.s.adc, out_zs.keep,
                   out_zs.roi_first, out_zs.roi_last, e.ch, e.t, e.adc, e.keep, e.first, e.last);
      end
      if (e.keep) n_keep++; else n_drop++;
      if (e.first) n_roi++;
    end
  end

  initial begin
    int thr[NCH] = '{5, 8, 8};
    int sgn[NCH] = '{3, 1, 2};
    int sbl[NCH] = '{1000, 1100, 1200};
    in_sample = '0;
    repeat (2) @(posedge clk);
    run_phase(0, 7, 8, thr, sgn, sbl);
    run_phase(1, 3, 2, thr, sgn, '{0, 0, 0});
    checks++;
    if (n_keep == 0 || n_drop == 0 || n_roi < 10 || n_bl_upd == 0) begin
      failures++;
      $display("FAIL: coverage keep=%0d drop=%0d roi=%0d baseline updates=%0d", n_keep, n_drop, n_roi, n_bl_upd);
    end
    $display("kept=%0d dropped=%0d rois=%0d baseline updates=%0d", n_keep, n_drop, n_roi, n_bl_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
