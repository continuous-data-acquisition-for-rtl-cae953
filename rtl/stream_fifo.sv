// stream_fifo: per-stream word buffer of the FEM, in front of the backplane.
//
// In the paper each FEM keeps the data of each stream in a buffer (a DRAM)
// until the stream's token lets it onto the shared backplane dataway. This
// FIFO is that buffer on the FPGA side: it takes the 0..4 words a formatter
// produces in one clock and hands them out as backplane beats of up to two
// 16-bit words (32 bits per clock: 512 MB/s at 128 MHz, the dataway bandwidth
// the paper quotes). The external DRAM that would extend it is not modelled;
// DEPTH is this design's choice.
//
// Interface: wr_cnt words from wr_words[0..] are written at once, or, when
// fewer than wr_cnt entries are free, all of them are dropped and overflow is
// set (sticky) and drop_cnt counts the lost words. The read side is
// ready/valid: rd_valid with rd_cnt (1 or 2) words in rd_words[0..1], popped
// when rd_ready is high. Data written in one clock can be read the next.
module stream_fifo
  import lartpc_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [2:0]         wr_cnt,
  input  word_t [3:0]        wr_words,
  output logic               rd_valid,
  output logic [1:0]         rd_cnt,
  output word_t [1:0]        rd_words,
  input  logic               rd_ready,
  output logic [$clog2(DEPTH):0] level,
  output logic               overflow,
  output logic [31:0]        drop_cnt
);

  localparam int unsigned AW = $clog2(DEPTH);

  word_t          mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic           accept;
  logic           pop;
  logic [AW:0]    free;

  assign free     = (AW+1)'(DEPTH) - level;
  assign accept   = (wr_cnt != '0) && ((AW+1)'(wr_cnt) <= free);
  assign rd_valid = (level != '0);
  assign rd_cnt   = (level >= (AW+1)'(2)) ? 2'd2 : ((level == '0) ? 2'd0 : 2'd1);
  assign rd_words[0] = mem[rp];
  assign rd_words[1] = mem[rp + 1'b1];
  assign pop      = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (accept) begin
      for (int i = 0; i < 4; i++)
        if (3'(i) < wr_cnt) mem[wp + AW'(i)] <= wr_words[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      level    <= '0;
      overflow <= 1'b0;
      drop_cnt <= '0;
    end else begin
      if (accept) wp <= wp + AW'(wr_cnt);
      if (pop)    rp <= rp + AW'(rd_cnt);
      level <= level + (accept ? (AW+1)'(wr_cnt) : '0) - (pop ? (AW+1)'(rd_cnt) : '0);
      if (wr_cnt != '0 && !accept) begin
        overflow <= 1'b1;
        drop_cnt <= drop_cnt + 32'(wr_cnt);
      end
    end
  end

  initial assert ((1 << AW) == DEPTH && DEPTH >= 4) else $error("DEPTH must be a power of two >= 4");

endmodule
