// baseline_estimator: dynamic baseline of every channel, from 64-sample blocks.
//
// This follows the paper's algorithm. The channel-ordered stream is cut into
// blocks of BLOCK (64) consecutive samples of one channel; block boundaries
// fall on ticks that are multiples of BLOCK, and a frame (3200 ticks) holds a
// whole number of blocks, so a channel's blocks continue from frame to frame.
// For each block:
//   * rounded mean  mu  = (sum of the 64 samples) >> 6
//   * truncated var s2  = (sum over samples of min((adc-mu)^2, 4095)) >> 6,
//     where a term with |adc-mu| >= 63 is fixed to 4095
// The three most recent blocks of a channel (i-1, i, i+1) are compared: if all
// three mean differences are <= mean_tol and all three variance differences are
// <= var_tol, mu_i becomes the channel's baseline and the channel is marked
// valid. Otherwise the previous baseline stays. The window then slides by one
// block.
//
// How it works: samples are written into one of two block buffers while their
// sum accumulates. When a block is complete its mean is known, and a second
// pass over the stored block (one sample per clock, BLOCK clocks, while the
// next block fills the other buffer) accumulates the squared differences.
// The per-channel history (means and variances of the two previous blocks and
// how many blocks have been seen) sits in a table indexed by channel, so the
// window slides independently per channel even though the channels are
// interleaved frame by frame.
//
// Timing: a block's decision (and table update) happens BLOCK+2 clocks after
// its last sample. The baseline table is read combinationally through
// rd_ch/rd_baseline/rd_valid. Reset clears the history: "from the beginning of
// the run" maps to reset. The two-buffer scheme and the table are this
// design's choices; the arithmetic is the paper's.
module baseline_estimator
  import lartpc_pkg::*;
#(
  parameter int unsigned NCH   = 64,
  parameter int unsigned BLOCK = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  sample_t     in_sample,
  input  logic [11:0] mean_tol,
  input  logic [11:0] var_tol,
  // baseline table read port
  input  logic [7:0]  rd_ch,
  output adc_t        rd_baseline,
  output logic        rd_valid,
  // per-block results, one pulse per block
  output logic        blk_valid,
  output logic [7:0]  blk_ch,
  output adc_t        blk_mean,
  output logic [11:0] blk_var,
  output logic        bl_update    // this block's window passed: baseline updated
);

  localparam int unsigned LB  = $clog2(BLOCK);
  localparam int unsigned SW  = ADC_BITS + LB;   // sum of BLOCK 12-bit values
  localparam int unsigned CW  = (NCH > 1) ? $clog2(NCH) : 1;

  adc_t             bbuf [2][BLOCK];
  logic             wbank;
  logic [SW-1:0]    sum;
  logic [LB-1:0]    widx;

  // variance pass
  logic             vbusy;
  logic             vbank;
  logic [LB-1:0]    vidx;
  adc_t             vmu;
  logic [7:0]       vch;
  logic [SW-1:0]    vsum;

  // decision stage
  logic             dvalid;
  logic [7:0]       dch;
  adc_t             dmu;
  logic [11:0]      dvar;

  // per-channel history
  logic [1:0]       hn   [NCH];
  adc_t             hmu1 [NCH];   // block i-1
  adc_t             hmu2 [NCH];   // block i
  logic [11:0]      hv1  [NCH];
  logic [11:0]      hv2  [NCH];
  adc_t             base [NCH];
  logic [NCH-1:0]   bvalid;

  assign widx = in_sample.tick[LB-1:0];

  // squared difference term, clamped
  logic signed [ADC_BITS:0] diff;
  logic [ADC_BITS:0]        adiff;
  logic [11:0]              sq;
  always_comb begin
    diff  = $signed({1'b0, bbuf[vbank][vidx]}) - $signed({1'b0, vmu});
    adiff = diff[ADC_BITS] ? (ADC_BITS+1)'(-diff) : (ADC_BITS+1)'(diff);
    if (adiff >= 13'd63) sq = 12'd4095;
    else                 sq = {6'b0, adiff[5:0]} * {6'b0, adiff[5:0]};
  end

  function automatic logic [11:0] absdiff(logic [11:0] a, logic [11:0] b);
    return (a > b) ? a - b : b - a;
  endfunction

  logic [SW-1:0] vsum_next;
  assign vsum_next = vsum + SW'(sq);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      sum       <= '0;
      vbusy     <= 1'b0;
      vbank     <= 1'b0;
      vidx      <= '0;
      vmu       <= '0;
      vch       <= '0;
      vsum      <= '0;
      dvalid    <= 1'b0;
      dch       <= '0;
      dmu       <= '0;
      dvar      <= '0;
    end else begin
      dvalid <= 1'b0;
      // second pass: squared differences
      if (vbusy) begin
        vsum <= vsum_next;
        vidx <= vidx + 1'b1;
        if (vidx == LB'(BLOCK - 1)) begin
          vbusy  <= 1'b0;
          dvalid <= 1'b1;
          dch    <= vch;
          dmu    <= vmu;
          dvar   <= 12'(vsum_next >> LB);
        end
      end
      // first pass: store and sum
      if (in_valid) begin
        bbuf[wbank][widx] <= in_sample.adc;
        if (widx == LB'(BLOCK - 1)) begin
          automatic logic [SW-1:0] total = sum + SW'(in_sample.adc);
          sum   <= '0;
          wbank <= ~wbank;
          vbusy <= 1'b1;
          vbank <= wbank;
          vidx  <= '0;
          vsum  <= '0;
          vmu   <= adc_t'(total >> LB);
          vch   <= in_sample.channel;
        end else if (widx == '0) begin
          sum <= SW'(in_sample.adc);
        end else begin
          sum <= sum + SW'(in_sample.adc);
        end
      end
    end
  end

  // window comparison and history update
  logic win_ok;
  always_comb begin
    win_ok = (hn[dch[CW-1:0]] == 2'd2)
          && absdiff(dmu,  hmu2[dch[CW-1:0]]) <= mean_tol
          && absdiff(hmu2[dch[CW-1:0]], hmu1[dch[CW-1:0]]) <= mean_tol
          && absdiff(dmu,  hmu1[dch[CW-1:0]]) <= mean_tol
          && absdiff(dvar, hv2[dch[CW-1:0]]) <= var_tol
          && absdiff(hv2[dch[CW-1:0]], hv1[dch[CW-1:0]]) <= var_tol
          && absdiff(dvar, hv1[dch[CW-1:0]]) <= var_tol;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        hn[c]   <= '0;
        hmu1[c] <= '0;
        hmu2[c] <= '0;
        hv1[c]  <= '0;
        hv2[c]  <= '0;
        base[c] <= '0;
      end
      bvalid    <= '0;
      blk_valid <= 1'b0;
      blk_ch    <= '0;
      blk_mean  <= '0;
      blk_var   <= '0;
      bl_update <= 1'b0;
    end else begin
      blk_valid <= dvalid;
      bl_update <= 1'b0;
      if (dvalid) begin
        automatic int unsigned c = int'(dch[CW-1:0]);
        blk_ch   <= dch;
        blk_mean <= dmu;
        blk_var  <= dvar;
        if (win_ok) begin
          base[c]   <= hmu2[c];
          bvalid[c] <= 1'b1;
          bl_update <= 1'b1;
        end
        hmu1[c] <= hmu2[c];
        hv1[c]  <= hv2[c];
        hmu2[c] <= dmu;
        hv2[c]  <= dvar;
        if (hn[c] != 2'd2) hn[c] <= hn[c] + 1'b1;
      end
    end
  end

  assign rd_baseline = base[rd_ch[CW-1:0]];
  assign rd_valid    = bvalid[rd_ch[CW-1:0]];

  initial begin
    assert ((1 << LB) == BLOCK) else $error("BLOCK must be a power of two");
  end

  // the second pass must finish before the next block completes
  a_pass_done: assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid && widx == LB'(BLOCK - 1)) |-> (!vbusy || vidx == LB'(BLOCK - 1)));

endmodule
