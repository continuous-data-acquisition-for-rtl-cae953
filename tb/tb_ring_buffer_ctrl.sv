// tb_ring_buffer_ctrl: writes several frames of known samples (time order) and
// checks the channel-ordered readout: every sample of every frame, in order
// channel 0..NCH-1, tick 0..SPF-1, with the right flags, the trigger tag only
// on the triggered frame, and each frame read out within one frame period of
// being completed (the SRAM bandwidth is shared with the writes).
module tb_ring_buffer_ctrl;
  import lartpc_pkg::*;
  localparam int NCH = 4, SPF = 16, NFR = 4, AW = 2 + 2 + 3, RL = 2;
  localparam int TICK = 2 * NCH;        // clocks per 2 MS/s tick (64 with 64 channels)
  localparam int NFRAMES_IN = 6;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, trig_in = 0;
  adc_t [NCH-1:0] in_data;
  logic sram_ce, sram_we;
  logic [AW-1:0] sram_addr;
  logic [35:0] sram_wdata, sram_rdata;
  logic out_valid;
  sample_t out_sample;
  logic wr_overrun, ring_overflow;
  logic [15:0] frames_written;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ring_buffer_ctrl #(.NCH(NCH), .SAMPLES_PER_FRAME(SPF), .NFRAMES(NFR), .ADDR_W(AW), .SRAM_RL(RL)) dut (.*);
  sram_model #(.ADDR_W(AW), .RL(RL)) u_sram (.clk, .ce(sram_ce), .we(sram_we), .addr(sram_addr),
                                              .wdata(sram_wdata), .rdata(sram_rdata));

  function automatic adc_t val(int gtick, int c);
    return adc_t'((gtick * 53 + c * 977 + 11) % 4096);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;

  int frame_done_cyc[int];
  int exp_f = 0, exp_c = 0, exp_t = 0, nout = 0;
  localparam int TRIG_FRAME = 2;

  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NFRAMES_IN * SPF; g++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < NCH; c++) in_data[c] = val(g, c);
      trig_in = (g == TRIG_FRAME * SPF + 5);
      @(negedge clk);
      in_valid = 0;
      trig_in = 0;
      repeat (TICK - 2) @(negedge clk);
    end
    repeat (SPF * TICK) @(posedge clk);
    checks++;
    if (nout != NFRAMES_IN * NCH * SPF) begin
      failures++;
      $display("FAIL: %0d samples read, expected %0d", nout, NFRAMES_IN * NCH * SPF);
    end
    checks++;
    if (frames_written != 16'(NFRAMES_IN)) begin failures++; $display("FAIL: frames_written %0d", frames_written); end
    checks++;
    if (wr_overrun || ring_overflow) begin failures++; $display("FAIL: overrun/overflow flags"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time each frame is completed by the writer
  logic [15:0] fw_q = 0;
  always @(posedge clk) begin
    if (frames_written != fw_q) frame_done_cyc[int'(fw_q)] = cyc;
    fw_q <= frames_written;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int g = exp_f * SPF + exp_t;
    checks++;
    if (out_sample.adc !== val(g, exp_c) || int'(out_sample.channel) != exp_c ||
        int'(out_sample.tick) != exp_t || int'(out_sample.frame) != exp_f) begin
      failures++;
      $display("FAIL: got f%0d c%0d t%0d adc %0d, expected f%0d c%0d t%0d adc %0d",
               out_sample.frame, out_sample.channel, out_sample.tick, out_sample.adc,
               exp_f, exp_c, exp_t, val(g, exp_c));
    end
    checks++;
    if (out_sample.chan_first != (exp_t == 0) || out_sample.chan_last != (exp_t == SPF - 1) ||
        out_sample.frame_first != (exp_t == 0 && exp_c == 0)) begin
      failures++;
      $display("FAIL: flags at f%0d c%0d t%0d", exp_f, exp_c, exp_t);
    end
    checks++;
    if (out_sample.triggered != (exp_f == TRIG_FRAME)) begin
      failures++;
      $display("FAIL: trigger tag %0b on frame %0d", out_sample.triggered, exp_f);
    end
    // latency: the last sample of a frame leaves within one frame period of its completion
    if (exp_c == NCH - 1 && exp_t == SPF - 1) begin
      checks++;
      if (!frame_done_cyc.exists(exp_f) || cyc - frame_done_cyc[exp_f] > SPF * TICK) begin
        failures++;
        $display("FAIL: frame %0d read out too late", exp_f);
      end
    end
    nout++;
    exp_t++;
    if (exp_t == SPF) begin exp_t = 0; exp_c++; end
    if (exp_c == NCH) begin exp_c = 0; exp_f++; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
