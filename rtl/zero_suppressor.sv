// zero_suppressor: keeps only the regions of interest (ROIs) of each channel.
//
// Following the paper: a sample passes when it lies beyond the channel's
// baseline by more than the channel's threshold, on the side(s) chosen by the
// channel's sign setting (positive: adc > baseline + thr, negative:
// adc < baseline - thr, or either). An ROI is every passing sample plus up to
// `pre` samples before the first and `post` samples after the last passing
// sample (at most 7 and 8, the values all FEMs use). The baseline is either a
// static per-channel value or the dynamic one from baseline_estimator; in
// dynamic mode a channel yields no ROI until its baseline has been found once.
//
// How it works: the input is the channel-ordered stream, one sample per clock
// at most. It first goes through a delay line of ZS_DELAY samples, so that the
// dynamic baseline worked out from blocks i-1, i, i+1 is ready before block
// i+2 leaves the delay line; the baseline is latched at every block boundary
// of the delayed stream, which makes it apply exactly from the block after the
// third one, as the paper says. The delayed sample is compared with the
// threshold and enters a window of PRE_MAX+2 stages; the decision stage looks
// ahead `pre` samples and back `post` samples of the same channel run (same
// channel and frame). The last stage holds the previous sample so that its
// roi_last flag can be derived from the next sample's decision.
//
// Interface: every input sample leaves as one out_* sample, with keep,
// roi_first and roi_last, ZS_DELAY+PRE_MAX+2 input samples later; the stream
// only advances on in_valid. Configuration is written through cfg_we/addr/wdata
// (map in lartpc_pkg). The delay-line length, the latch-per-block scheme and
// the register map are this design's choices.
module zero_suppressor
  import lartpc_pkg::*;
#(
  parameter int unsigned NCH      = 64,
  parameter int unsigned BLOCK    = 64,
  parameter int unsigned ZS_DELAY = 72,
  parameter int unsigned PRE_MAX  = 7,
  parameter int unsigned POST_MAX = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_t     in_sample,
  // configuration
  input  logic        cfg_we,
  input  logic [9:0]  cfg_addr,
  input  logic [15:0] cfg_wdata,
  // output
  output logic        out_valid,
  output zs_sample_t  out_zs,
  // dynamic baseline status
  output logic        bl_update
);

  localparam int unsigned CW = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned LB = $clog2(BLOCK);
  localparam int unsigned DW = $clog2(ZS_DELAY);
  localparam int unsigned NS = PRE_MAX + 2;   // window stages
  localparam int unsigned DEC = PRE_MAX;      // decision stage

  // ---------------- configuration registers ----------------
  adc_t        thr   [NCH];
  zs_sign_e    sgn   [NCH];
  adc_t        sbl   [NCH];
  logic        dynamic;
  logic [2:0]  pre_cfg;
  logic [3:0]  post_cfg;
  logic [11:0] mean_tol, var_tol;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        thr[c] <= '0;
        sgn[c] <= SIGN_NONE;
        sbl[c] <= '0;
      end
      dynamic  <= 1'b0;
      pre_cfg  <= 3'(PRE_MAX);
      post_cfg <= 4'(POST_MAX);
      mean_tol <= '0;
      var_tol  <= '0;
    end else if (cfg_we) begin
      if (cfg_addr[9:8] == 2'b00 && cfg_addr[7:0] < 8'(NCH)) begin
        thr[cfg_addr[CW-1:0]] <= cfg_wdata[11:0];
        sgn[cfg_addr[CW-1:0]] <= zs_sign_e'(cfg_wdata[13:12]);
      end else if (cfg_addr[9:8] == 2'b01 && cfg_addr[7:0] < 8'(NCH)) begin
        sbl[cfg_addr[CW-1:0]] <= cfg_wdata[11:0];
      end else if (cfg_addr == CFG_GLOBAL) begin
        dynamic  <= cfg_wdata[8];
        pre_cfg  <= (4'(cfg_wdata[6:4]) > 4'(PRE_MAX)) ? 3'(PRE_MAX) : cfg_wdata[6:4];
        post_cfg <= (cfg_wdata[3:0] > 4'(POST_MAX)) ? 4'(POST_MAX) : cfg_wdata[3:0];
      end else if (cfg_addr == CFG_MEAN_TOL) begin
        mean_tol <= cfg_wdata[11:0];
      end else if (cfg_addr == CFG_VAR_TOL) begin
        var_tol <= cfg_wdata[11:0];
      end
    end
  end

  // ---------------- dynamic baseline ----------------
  sample_t dl_out;
  adc_t    est_bl;
  logic    est_ok;

  baseline_estimator #(.NCH(NCH), .BLOCK(BLOCK)) u_est (
    .clk, .rst_n,
    .in_valid    (in_valid),
    .in_sample   (in_sample),
    .mean_tol    (mean_tol),
    .var_tol     (var_tol),
    .rd_ch       (dl_out.channel),
    .rd_baseline (est_bl),
    .rd_valid    (est_ok),
    .blk_valid   (),
    .blk_ch      (),
    .blk_mean    (),
    .blk_var     (),
    .bl_update   (bl_update)
  );

  // ---------------- delay line ----------------
  sample_t        dline [ZS_DELAY];
  logic [DW-1:0]  dptr;
  logic [DW:0]    dfill;
  logic           primed;

  assign dl_out = dline[dptr];
  assign primed = (dfill == (DW+1)'(ZS_DELAY));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dptr  <= '0;
      dfill <= '0;
    end else if (in_valid) begin
      dline[dptr] <= in_sample;
      dptr        <= (dptr == DW'(ZS_DELAY - 1)) ? '0 : dptr + 1'b1;
      if (!primed) dfill <= dfill + 1'b1;
    end
  end

  // ---------------- baseline latch and threshold ----------------
  adc_t  bl_reg;
  logic  ok_reg;
  adc_t  bl_now;
  logic  ok_now;
  logic  pass_now;
  logic  blk_start;

  assign blk_start = (dl_out.tick[LB-1:0] == '0);

  always_comb begin
    if (blk_start) begin
      bl_now = dynamic ? est_bl : sbl[dl_out.channel[CW-1:0]];
      ok_now = dynamic ? est_ok : 1'b1;
    end else begin
      bl_now = bl_reg;
      ok_now = ok_reg;
    end
  end

  always_comb begin
    automatic logic signed [14:0] a = $signed({3'b0, dl_out.adc});
    automatic logic signed [14:0] b = $signed({3'b0, bl_now});
    automatic logic signed [14:0] t = $signed({3'b0, thr[dl_out.channel[CW-1:0]]});
    automatic zs_sign_e s = sgn[dl_out.channel[CW-1:0]];
    pass_now = ((s == SIGN_POS || s == SIGN_BOTH) && (a > b + t))
            || ((s == SIGN_NEG || s == SIGN_BOTH) && (a < b - t));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bl_reg <= '0;
      ok_reg <= 1'b0;
    end else if (in_valid && primed) begin
      bl_reg <= bl_now;
      ok_reg <= ok_now;
    end
  end

  // ---------------- ROI window ----------------
  typedef struct packed {
    logic    valid;
    logic    pass;
    logic    ok;
    logic    keep;      // meaningful in the last stage only
    sample_t s;
  } stage_t;

  stage_t      w [NS];
  logic [3:0]  post_cnt;   // samples since last pass, for the decision stage

  function automatic logic same_run(sample_t a, sample_t b);
    return (a.channel == b.channel) && (a.frame == b.frame);
  endfunction

  logic keep_dec;
  always_comb begin
    automatic logic look = 1'b0;
    for (int j = 1; j <= PRE_MAX; j++) begin
      if (j <= int'(pre_cfg) && w[DEC-j].valid && w[DEC-j].pass && same_run(w[DEC-j].s, w[DEC].s))
        look = 1'b1;
    end
    keep_dec = w[DEC].valid && w[DEC].ok
            && (w[DEC].pass || look || (post_cnt <= post_cfg));
  end

  logic advance;
  assign advance = in_valid && primed;

  // keep flag of the sample emitted before the one now in the last stage
  logic    prev_keep;
  sample_t prev_s;
  logic    out_zs_prev_keep_same;
  assign out_zs_prev_keep_same = prev_keep && same_run(prev_s, w[DEC+1].s);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_keep <= 1'b0;
      prev_s    <= '0;
    end else if (advance && w[DEC+1].valid) begin
      prev_keep <= w[DEC+1].keep;
      prev_s    <= w[DEC+1].s;
    end
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NS; k++) w[k] <= '0;
      post_cnt  <= 4'hf;
      out_valid <= 1'b0;
      out_zs    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (advance) begin
        w[0] <= '{valid: 1'b1, pass: pass_now && ok_now, ok: ok_now, keep: 1'b0, s: dl_out};
        for (int k = 1; k < NS; k++) w[k] <= w[k-1];
        w[DEC+1].keep <= keep_dec;
        // distance to the last passing sample, seen from the next decision
        if (w[DEC-1].valid && w[DEC].valid && same_run(w[DEC-1].s, w[DEC].s)) begin
          if (w[DEC].pass)            post_cnt <= 4'd1;
          else if (post_cnt != 4'hf)  post_cnt <= post_cnt + 1'b1;
        end else begin
          post_cnt <= 4'hf;
        end
        // emit the last stage, its ROI end decided by the sample behind it
        if (w[DEC+1].valid) begin
          out_valid        <= 1'b1;
          out_zs.s         <= w[DEC+1].s;
          out_zs.keep      <= w[DEC+1].keep;
          out_zs.roi_first <= w[DEC+1].keep && !out_zs_prev_keep_same;
          out_zs.roi_last  <= w[DEC+1].keep && !(keep_dec && same_run(w[DEC].s, w[DEC+1].s));
        end
      end
    end
  end

  initial begin
    assert (ZS_DELAY >= BLOCK + 4) else $error("ZS_DELAY must cover the variance pass");
    assert (PRE_MAX <= 7 && POST_MAX <= 14) else $error("PRE_MAX/POST_MAX out of range");
  end

endmodule
