// tb_trigger_formatter: samples of a triggered frame must come out as frame
// header, channel headers and raw ADC words in order; samples of untriggered
// frames must produce nothing.
module tb_trigger_formatter;
  import lartpc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t in_sample;
  logic [2:0] out_cnt;
  word_t [3:0] out_words;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  trigger_formatter dut (.*);

  word_t expq[$];
  int ngot = 0;

  always @(posedge clk) if (rst_n)
    for (int i = 0; i < int'(out_cnt); i++) begin
      checks++;
      ngot++;
      if (expq.size() == 0 || out_words[i] != expq[0]) begin
        failures++;
        $display("FAIL: word %04h, expected %04h", out_words[i], expq.size() ? expq[0] : 16'hxxxx);
      end
      if (expq.size()) void'(expq.pop_front());
    end

  initial begin
    in_sample = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++)
      for (int c = 0; c < 3; c++)
        for (int t = 0; t < 10; t++) begin
          automatic bit trig = (f == 1 || f == 3);
          automatic int v = (f * 1000 + c * 100 + t * 7) % 4096;
          @(negedge clk);
          in_valid = 1;
          in_sample = '0;
          in_sample.frame = 12'(f);
          in_sample.channel = 8'(c);
          in_sample.tick = 12'(t);
          in_sample.adc = adc_t'(v);
          in_sample.triggered = trig;
          in_sample.chan_first = (t == 0);
          in_sample.chan_last = (t == 9);
          in_sample.frame_first = (t == 0 && c == 0);
          if (trig) begin
            if (t == 0 && c == 0) expq.push_back({4'h4, 12'(f)});
            if (t == 0) expq.push_back({4'h1, 12'(c)});
            expq.push_back({4'h0, 12'(v)});
          end
        end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0 || ngot != 2 * (1 + 3 + 30)) begin
      failures++;
      $display("FAIL: %0d words got, %0d missing", ngot, expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
