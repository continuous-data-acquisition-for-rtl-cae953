// tb_stream_fifo: random bursts of 0..4 words in, random read-side readiness;
// every word must come out once, in order, two per beat when available, and a
// burst that does not fit must be dropped whole with the overflow flag set.
module tb_stream_fifo;
  import lartpc_pkg::*;
  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic [2:0] wr_cnt = 0;
  word_t [3:0] wr_words;
  logic rd_valid, rd_ready = 0;
  logic [1:0] rd_cnt;
  word_t [1:0] rd_words;
  logic [$clog2(DEPTH):0] level;
  logic overflow;
  logic [31:0] drop_cnt;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  stream_fifo #(.DEPTH(DEPTH)) dut (.*);

  word_t model[$];
  int seq = 0, dropped = 0, nread = 0, ndrop_events = 0;

  initial begin
    wr_words = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      // phase 2 (i >= 1500): reader mostly stalled, to force overflows
      automatic int n = int'($urandom % 5);
      @(negedge clk);
      wr_cnt = 3'(n);
      for (int k = 0; k < 4; k++) wr_words[k] = word_t'(seq + k);
      rd_ready = (i < 1500) ? ($urandom % 4 != 0) : ($urandom % 6 == 0);
      @(posedge clk);
      // read side check (values sampled before the edge)
      #1;
    end
    @(negedge clk);
    wr_cnt = 0;
    rd_ready = 1;
    repeat (DEPTH + 4) @(posedge clk);
    checks++;
    if (model.size() != 0) begin failures++; $display("FAIL: %0d words never read", model.size()); end
    checks++;
    if (!overflow || int'(drop_cnt) != dropped || ndrop_events == 0) begin
      failures++;
      $display("FAIL: overflow %0b drop_cnt %0d expected %0d", overflow, drop_cnt, dropped);
    end
    $display("read=%0d dropped=%0d", nread, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: evaluate at each edge with the pre-edge values
  always @(posedge clk) if (rst_n) begin
    automatic int n = int'(wr_cnt);
    if (rd_valid && rd_ready) begin
      checks++;
      if (int'(rd_cnt) != ((model.size() >= 2) ? 2 : model.size())) begin
        failures++;
        $display("FAIL: rd_cnt %0d with %0d stored", rd_cnt, model.size());
      end
      for (int k = 0; k < int'(rd_cnt); k++) begin
        checks++;
        if (model.size() == 0 || rd_words[k] != model[0]) begin
          failures++;
          $display("FAIL: read %04h expected %04h", rd_words[k], model.size() ? model[0] : 16'hffff);
        end
        if (model.size()) void'(model.pop_front());
        nread++;
      end
    end
    if (n > 0) begin
      if (n <= DEPTH - int'(level)) begin
        for (int k = 0; k < n; k++) model.push_back(wr_words[k]);
      end else begin
        dropped += n;
        ndrop_events++;
      end
      seq += 4;
    end
    checks++;
    if (int'(level) > DEPTH) begin failures++; $display("FAIL: level %0d", level); end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
