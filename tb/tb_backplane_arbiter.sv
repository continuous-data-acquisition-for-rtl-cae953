// tb_backplane_arbiter: three FEMs offer random Trigger and Continuous Stream
// beats; both outputs see random back-pressure. Checks: every beat arrives
// once, in order per FEM and stream, on the right output; never two beats on
// the dataway in one clock; a Continuous Stream beat only moves when the
// Trigger Stream token holder could not send; the Continuous Stream had to
// wait for the Trigger Stream at least once; every FEM was served.
module tb_backplane_arbiter;
  import lartpc_pkg::*;
  localparam int N = 3, BURST = 4, NBEATS = 300;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] t_valid, s_valid, t_ready, s_ready;
  logic [N-1:0][1:0] t_cnt, s_cnt;
  word_t [N-1:0][1:0] t_words, s_words;
  logic trig_out_valid, sn_out_valid;
  logic trig_out_ready = 0, sn_out_ready = 0;
  logic [1:0] trig_out_cnt, sn_out_cnt;
  word_t [1:0] trig_out_words, sn_out_words;
  logic [31:0] trig_beats, sn_beats, sn_deferred;
  logic [7:0] trig_out_fem, sn_out_fem;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  backplane_arbiter #(.N_FEM(N), .MAX_BURST(BURST)) dut (.*);

  // source queues: word = {stream, fem[1:0], seq[12:0]}
  word_t tq[N][$], sq[N][$];
  int tseq[N], sseq[N], texp[N], sexp[N];
  int served_t[N], served_s[N];

  always_comb
    for (int f = 0; f < N; f++) begin
      t_valid[f] = tq[f].size() > 0;
      s_valid[f] = sq[f].size() > 0;
      t_cnt[f] = (tq[f].size() >= 2) ? 2'd2 : 2'd1;
      s_cnt[f] = (sq[f].size() >= 2) ? 2'd2 : 2'd1;
      t_words[f][0] = tq[f].size() > 0 ? tq[f][0] : '0;
      t_words[f][1] = tq[f].size() > 1 ? tq[f][1] : '0;
      s_words[f][0] = sq[f].size() > 0 ? sq[f][0] : '0;
      s_words[f][1] = sq[f].size() > 1 ? sq[f][1] : '0;
    end

  function automatic void check_out(bit trig, logic [1:0] cnt, word_t [1:0] w, logic [7:0] slot);
    for (int k = 0; k < int'(cnt); k++) begin
      automatic int f = int'(w[k][14:13]);
      automatic int s = int'(w[k][12:0]);
      checks++;
      if (w[k][15] != trig || f >= N || int'(slot) != f || s != (trig ? texp[f] : sexp[f])) begin
        failures++;
        $display("FAIL: %s output word %04h", trig ? "trigger" : "continuous", w[k]);
      end else if (trig) texp[f]++;
      else sexp[f]++;
    end
  endfunction

  always @(posedge clk) if (rst_n) begin
    // outputs
    if (trig_out_valid && trig_out_ready) check_out(1, trig_out_cnt, trig_out_words, trig_out_fem);
    if (sn_out_valid && sn_out_ready) check_out(0, sn_out_cnt, sn_out_words, sn_out_fem);
    // dataway rules
    checks++;
    if ((|t_ready) && (|s_ready)) begin failures++; $display("FAIL: two beats in one clock"); end
    if (|s_ready) begin
      checks++;
      if (t_valid[dut.ttok] && (!trig_out_valid || trig_out_ready)) begin
        failures++;
        $display("FAIL: continuous beat taken while the trigger holder could send");
      end
    end
    // sources pop
    for (int f = 0; f < N; f++) begin
      if (t_ready[f]) begin
        for (int k = 0; k < int'(t_cnt[f]); k++) void'(tq[f].pop_front());
        served_t[f]++;
      end
      if (s_ready[f]) begin
        for (int k = 0; k < int'(s_cnt[f]); k++) void'(sq[f].pop_front());
        served_s[f]++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int f = 0; f < N; f++) begin
        if (sseq[f] < NBEATS && $urandom % 3 == 0) begin sq[f].push_back({1'b0, 2'(f), 13'(sseq[f])}); sseq[f]++; end
        if (tseq[f] < NBEATS && i > 200 && i < 1200 && $urandom % 4 == 0) begin
          tq[f].push_back({1'b1, 2'(f), 13'(tseq[f])}); tseq[f]++;
        end
      end
      trig_out_ready = ($urandom % 5 != 0);
      sn_out_ready = ($urandom % 5 != 0);
    end
    trig_out_ready = 1;
    sn_out_ready = 1;
    repeat (100) @(posedge clk);
    for (int f = 0; f < N; f++) begin
      checks++;
      if (texp[f] != tseq[f] || sexp[f] != sseq[f] || served_t[f] == 0 || served_s[f] == 0) begin
        failures++;
        $display("FAIL: FEM %0d delivered t %0d/%0d s %0d/%0d", f, texp[f], tseq[f], sexp[f], sseq[f]);
      end
    end
    checks++;
    if (sn_deferred == 0 || trig_beats == 0 || sn_beats == 0) begin
      failures++;
      $display("FAIL: counters trig %0d sn %0d deferred %0d", trig_beats, sn_beats, sn_deferred);
    end
    $display("trigger beats=%0d continuous beats=%0d deferred=%0d", trig_beats, sn_beats, sn_deferred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
