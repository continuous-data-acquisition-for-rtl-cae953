// tb_baseline_estimator: feeds channel runs (2 channels, frames of 4 blocks of
// 8 samples) back to back, one sample per clock, and compares every block's
// rounded mean, truncated variance and window decision, and the baseline
// table, with the paper's arithmetic computed in tb_lartpc_pkg::bl_model.
// The data include quiet blocks (accepted windows), a step in the mean and
// spikes of more than 63 counts (clamped variance terms, rejected windows).
module tb_baseline_estimator;
  import lartpc_pkg::*;
  import tb_lartpc_pkg::*;
  localparam int NCH = 2, BLOCK = 8, SPF = 32, NFRAMES = 8;
  localparam int MTOL = 2, VTOL = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t in_sample;
  logic [7:0] rd_ch;
  adc_t rd_baseline;
  logic rd_valid, blk_valid, bl_update;
  logic [7:0] blk_ch;
  adc_t blk_mean;
  logic [11:0] blk_var;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  baseline_estimator #(.NCH(NCH), .BLOCK(BLOCK)) dut (
    .clk, .rst_n, .in_valid, .in_sample, .mean_tol(12'(MTOL)), .var_tol(12'(VTOL)),
    .rd_ch, .rd_baseline, .rd_valid, .blk_valid, .blk_ch, .blk_mean, .blk_var, .bl_update);

  bl_model model = new();
  int exp_ch[$], exp_mu[$], exp_v[$];
  bit exp_ok[$];
  int n_accept = 0, n_reject = 0, n_clamp = 0;

  function automatic int wave(int f, int c, int t);
    int base = 1000 + 500 * c;
    int v = base + (($urandom % 3) - 1);
    if (f >= 3 && c == 0) v += 40;                  // step in the mean on channel 0
    if (f == 5 && t == 17) v += 300;                // spike, |d| >= 63: clamped term
    if (f == 6 && c == 1 && t >= 8 && t < 16) v += (t % 2) ? 20 : -20;   // noisy block
    return v;
  endfunction

  initial begin
    in_sample = '0;
    rd_ch = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFRAMES; f++)
      for (int c = 0; c < NCH; c++) begin
        automatic int blk[$];
        for (int t = 0; t < SPF; t++) begin
          automatic int v = wave(f, c, t);
          @(negedge clk);
          in_valid = 1;
          in_sample = '0;
          in_sample.adc = adc_t'(v);
          in_sample.channel = 8'(c);
          in_sample.tick = 12'(t);
          in_sample.frame = 12'(f);
          blk.push_back(v);
          if (blk.size() == BLOCK) begin
            int mu, vv;
            bit ok;
            bl_model::stats(blk, mu, vv);
            foreach (blk[i]) if (blk[i] - mu >= 63 || mu - blk[i] >= 63) n_clamp++;
            ok = model.add_block(c, mu, vv, MTOL, VTOL);
            exp_ch.push_back(c); exp_mu.push_back(mu); exp_v.push_back(vv); exp_ok.push_back(ok);
            if (ok) n_accept++; else n_reject++;
            blk.delete();
          end
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (3 * BLOCK) @(posedge clk);
    checks++;
    if (exp_ch.size() != 0) begin failures++; $display("FAIL: %0d blocks never reported", exp_ch.size()); end
    // baseline table
    for (int c = 0; c < NCH; c++) begin
      @(negedge clk);
      rd_ch = 8'(c);
      #1;
      checks++;
      if (rd_valid != model.valid[c] || (rd_valid && int'(rd_baseline) != model.base[c])) begin
        failures++;
        $display("FAIL: ch %0d baseline %0d valid %0b, expected %0d %0b", c, rd_baseline, rd_valid,
                 model.base[c], model.valid[c]);
      end
    end
    checks++;
    if (n_accept == 0 || n_reject == 0 || n_clamp == 0) begin
      failures++;
      $display("FAIL: coverage accept=%0d reject=%0d clamp=%0d", n_accept, n_reject, n_clamp);
    end
    $display("blocks accepted=%0d rejected=%0d clamped terms=%0d", n_accept, n_reject, n_clamp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && blk_valid) begin
    checks++;
    if (exp_ch.size() == 0) begin
      failures++;
      $display("FAIL: unexpected block result");
    end else begin
      automatic int c = exp_ch.pop_front(), mu = exp_mu.pop_front(), vv = exp_v.pop_front();
      automatic bit ok = exp_ok.pop_front();
      if (int'(blk_ch) != c || int'(blk_mean) != mu || int'(blk_var) != vv || bl_update != ok) begin
        failures++;
        $display("FAIL: block ch %0d mu %0d var %0d upd %0b, expected ch %0d mu %0d var %0d upd %0b",
                 blk_ch, blk_mean, blk_var, bl_update, c, mu, vv, ok);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
