// tb_downsampler: checks that one ADC sample set in DECIM is passed on, with
// the data of that strobe, one clock later, and that the output rate is the
// input rate divided by DECIM (16 MS/s in, 2 MS/s out with the defaults).
module tb_downsampler;
  import lartpc_pkg::*;
  localparam int NCH = 4, DECIM = 8, NSTROBE = 80;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  adc_t [NCH-1:0] adc_data;
  logic ds_valid;
  adc_t [NCH-1:0] ds_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  downsampler #(.NCH(NCH), .DECIM(DECIM)) dut (.*);

  function automatic adc_t val(int k, int c);
    return adc_t'((k * 37 + c * 1000 + 5) % 4096);
  endfunction

  int strobe = 0, nout = 0;
  int last_strobe_seen = -1;
  initial begin
    adc_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NSTROBE; k++) begin
      @(negedge clk);
      adc_valid = 1;
      for (int c = 0; c < NCH; c++) adc_data[c] = val(k, c);
      strobe = k;
      @(negedge clk);
      adc_valid = 0;
      // idle clocks between 16 MS/s strobes (8 clocks of 128 MHz)
      repeat (6) @(negedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (nout != NSTROBE / DECIM) begin
      failures++;
      $display("FAIL: %0d output ticks for %0d strobes, expected %0d", nout, NSTROBE, NSTROBE / DECIM);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output check: the kept strobe is the first of each group of DECIM
  always @(posedge clk) if (rst_n && ds_valid) begin
    automatic int k = nout * DECIM;
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (ds_data[c] !== val(k, c)) begin
        failures++;
        $display("FAIL: tick %0d ch %0d got %0d expected %0d", nout, c, ds_data[c], val(k, c));
      end
    end
    checks++;
    if (strobe != k) begin
      failures++;
      $display("FAIL: tick %0d emitted during strobe %0d, expected %0d", nout, strobe, k);
    end
    nout++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
