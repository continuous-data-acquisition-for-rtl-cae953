// backplane_arbiter: the XMIT board's collection of both streams from the FEMs.
//
// In the paper the transmitter board (XMIT) gathers the Trigger Stream and the
// Continuous Readout Stream from every FEM of a crate over one shared
// backplane dataway (512 MB/s) by token passing, with the Trigger Stream given
// priority. Here each stream has its own token that visits the FEMs in slot
// order. The FEM holding a token sends beats of that stream (up to two 16-bit
// words each, one beat per clock: 32 bits at 128 MHz) until its buffer is
// empty or it has sent MAX_BURST beats, then the token moves to the next FEM.
// In every clock the dataway carries at most one beat: the Trigger Stream's
// beat if its token holder has one and its output can take it, otherwise the
// Continuous Stream's.
//
// Interface: per FEM and stream a ready/valid beat input (valid, cnt, words);
// per stream a registered ready/valid beat output towards that stream's
// optical transmitters, tagged with the slot of the FEM it came from (the
// words themselves do not name their FEM). Token order, the release rule and MAX_BURST are this
// design's choices; the paper names the scheme and the priority only.
// The slot tags are 8 bits wide; the bits above log2(N_FEM) stay zero.
module backplane_arbiter
  import lartpc_pkg::*;
#(
  parameter int unsigned N_FEM     = 15,
  parameter int unsigned MAX_BURST = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // Trigger Stream from the FEMs
  input  logic [N_FEM-1:0]        t_valid,
  input  logic [N_FEM-1:0][1:0]   t_cnt,
  input  word_t [N_FEM-1:0][1:0]  t_words,
  output logic [N_FEM-1:0]        t_ready,
  // Continuous Readout Stream from the FEMs
  input  logic [N_FEM-1:0]        s_valid,
  input  logic [N_FEM-1:0][1:0]   s_cnt,
  input  word_t [N_FEM-1:0][1:0]  s_words,
  output logic [N_FEM-1:0]        s_ready,
  // Trigger Stream out
  output logic                    trig_out_valid,
  output logic [1:0]              trig_out_cnt,
  output word_t [1:0]             trig_out_words,
  output logic [7:0]              trig_out_fem,   // slot of the FEM the beat came from
  input  logic                    trig_out_ready,
  // Continuous Readout Stream out
  output logic                    sn_out_valid,
  output logic [1:0]              sn_out_cnt,
  output word_t [1:0]             sn_out_words,
  output logic [7:0]              sn_out_fem,
  input  logic                    sn_out_ready,
  // activity counters
  output logic [31:0]             trig_beats,
  output logic [31:0]             sn_beats,
  output logic [31:0]             sn_deferred   // clocks the Continuous Stream waited for the Trigger Stream
);

  localparam int unsigned FW = (N_FEM > 1) ? $clog2(N_FEM) : 1;
  localparam int unsigned BW = $clog2(MAX_BURST + 1);

  logic [FW-1:0] ttok, stok;
  logic [BW-1:0] tburst, sburst;
  logic          t_go, s_go;
  logic          t_space, s_space;

  assign t_space = !trig_out_valid || trig_out_ready;
  assign s_space = !sn_out_valid || sn_out_ready;
  assign t_go    = t_valid[ttok] && t_space;
  assign s_go    = !t_go && s_valid[stok] && s_space;

  always_comb begin
    t_ready = '0;
    s_ready = '0;
    t_ready[ttok] = t_go;
    s_ready[stok] = s_go;
  end

  function automatic logic [FW-1:0] next_slot(logic [FW-1:0] k);
    return (k == FW'(N_FEM - 1)) ? '0 : k + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ttok           <= '0;
      stok           <= '0;
      tburst         <= '0;
      sburst         <= '0;
      trig_out_valid <= 1'b0;
      trig_out_cnt   <= '0;
      trig_out_words <= '0;
      trig_out_fem   <= '0;
      sn_out_valid   <= 1'b0;
      sn_out_cnt     <= '0;
      sn_out_words   <= '0;
      sn_out_fem     <= '0;
      trig_beats     <= '0;
      sn_beats       <= '0;
      sn_deferred    <= '0;
    end else begin
      if (trig_out_ready) trig_out_valid <= 1'b0;
      if (sn_out_ready)   sn_out_valid   <= 1'b0;

      // Trigger Stream token
      if (t_go) begin
        trig_out_valid <= 1'b1;
        trig_out_cnt   <= t_cnt[ttok];
        trig_out_words <= t_words[ttok];
        trig_out_fem   <= 8'(ttok);
        trig_beats     <= trig_beats + 1'b1;
        if (tburst == BW'(MAX_BURST - 1)) begin
          tburst <= '0;
          ttok   <= next_slot(ttok);
        end else begin
          tburst <= tburst + 1'b1;
        end
      end else if (!t_valid[ttok]) begin
        tburst <= '0;
        ttok   <= next_slot(ttok);
      end

      // Continuous Readout Stream token
      if (s_go) begin
        sn_out_valid <= 1'b1;
        sn_out_cnt   <= s_cnt[stok];
        sn_out_words <= s_words[stok];
        sn_out_fem   <= 8'(stok);
        sn_beats     <= sn_beats + 1'b1;
        if (sburst == BW'(MAX_BURST - 1)) begin
          sburst <= '0;
          stok   <= next_slot(stok);
        end else begin
          sburst <= sburst + 1'b1;
        end
      end else if (!s_valid[stok]) begin
        sburst <= '0;
        stok   <= next_slot(stok);
      end else if (t_go && s_space) begin
        sn_deferred <= sn_deferred + 1'b1;
      end
    end
  end

  // one beat per clock on the shared dataway
  a_one_beat: assert property (@(posedge clk) disable iff (!rst_n) !(t_go && s_go));
  a_onehot_ready: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({t_ready, s_ready}));

endmodule
