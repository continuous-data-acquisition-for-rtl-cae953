// lartpc_pkg: types and constants shared by the LArTPC front-end readout.
//
// The readout digitises 64 wires per Front-End Module (FEM) with 12-bit ADCs,
// keeps them in an SRAM ring buffer at 2 MS/s and reads them back channel by
// channel. Everything downstream of the ring buffer moves one sample per clock
// as a `sample_t`, and the compressed streams are made of 16-bit words.
//
// Word format (16 bits). Following the paper: a word with bit 15 set is a
// Huffman word whose lower 15 bits hold difference codes; any other word keeps
// a 12-bit value in bits 11:0 and a 4-bit label in bits 15:12. The label values
// below (and the existence of frame, channel and ROI header words) are this
// design's own choice.
package lartpc_pkg;

  localparam int unsigned ADC_BITS = 12;
  localparam int unsigned WORD_BITS = 16;

  typedef logic [ADC_BITS-1:0]  adc_t;
  typedef logic [WORD_BITS-1:0] word_t;

  // 4-bit labels of non-Huffman words (bit 15 clear)
  localparam logic [3:0] HDR_ADC     = 4'h0;  // raw ADC sample in bits 11:0
  localparam logic [3:0] HDR_CHANNEL = 4'h1;  // channel number in bits 11:0
  localparam logic [3:0] HDR_ROI     = 4'h2;  // tick (sample index in frame) of ROI start
  localparam logic [3:0] HDR_FRAME   = 4'h4;  // frame number (mod 4096)

  // Threshold sign selection, one per channel
  typedef enum logic [1:0] {
    SIGN_NONE = 2'b00,  // channel masked: no sample passes
    SIGN_POS  = 2'b01,  // pass if adc >  baseline + threshold
    SIGN_NEG  = 2'b10,  // pass if adc <  baseline - threshold
    SIGN_BOTH = 2'b11   // either of the above
  } zs_sign_e;

  // One sample of the channel-ordered readout stream.
  typedef struct packed {
    logic        frame_first;  // first sample of a frame (channel 0, tick 0)
    logic        chan_first;   // first sample of this channel in the frame
    logic        chan_last;    // last sample of this channel in the frame
    logic        triggered;    // the frame received a trigger while it was written
    logic [11:0] frame;        // frame counter (mod 4096)
    logic [7:0]  channel;      // channel number within the FEM
    logic [11:0] tick;         // sample index within the frame
    adc_t        adc;          // ADC value
  } sample_t;

  // One sample after zero suppression, with its region-of-interest flags.
  typedef struct packed {
    sample_t s;
    logic    keep;       // sample belongs to an ROI
    logic    roi_first;  // first sample of an ROI
    logic    roi_last;   // last sample of an ROI
  } zs_sample_t;

  // Configuration register map (16-bit data), per FEM.
  //   0x000 + ch : {sign[1:0] at 13:12, threshold[11:0]}
  //   0x100 + ch : static baseline[11:0]
  //   0x200      : {dynamic[8], pre[6:4], post[3:0]}
  //   0x201      : mean tolerance[11:0]
  //   0x202      : variance tolerance[11:0]
  localparam logic [9:0] CFG_THR_BASE  = 10'h000;
  localparam logic [9:0] CFG_BL_BASE   = 10'h100;
  localparam logic [9:0] CFG_GLOBAL    = 10'h200;
  localparam logic [9:0] CFG_MEAN_TOL  = 10'h201;
  localparam logic [9:0] CFG_VAR_TOL   = 10'h202;

  function automatic word_t make_word(logic [3:0] hdr, logic [11:0] val);
    return {hdr, val};
  endfunction

endpackage
