// fem_pkg: types and constants shared by the TPC front-end module (FEM)
// readout chain and the crate backplane.
//
// Sample data are 12-bit ADC codes. Output words on every stream are 16 bits:
// a 4-bit tag in [15:12] and a 12-bit payload in [11:0]. The paper does not
// give a word format; the tags below are this design's own choice.
package fem_pkg;

  localparam int ADC_BITS = 12;   // "commercial 12-bit ADC"
  localparam int WORD_BITS = 16;  // stream word width (own choice)
  localparam int TICK_BITS = 12;  // tick within a frame, 0..3199
  localparam int FRAME_BITS = 12; // running frame number, low bits

  typedef logic [ADC_BITS-1:0] adc_t;
  typedef logic [WORD_BITS-1:0] word_t;

  // Word tags of the output streams.
  typedef enum logic [3:0] {
    TAG_SAMPLE  = 4'h0,  // payload: raw ADC code of a saved sample
    TAG_FEM     = 4'h1,  // payload: FEM module address (starts a frame)
    TAG_FRAME   = 4'h2,  // payload: frame number
    TAG_CHANNEL = 4'h3,  // payload: channel number within the FEM
    TAG_REGION  = 4'h4,  // payload: tick of the first saved sample that follows
    TAG_TRAILER = 4'hF   // payload: frame number; ends the frame
  } tag_e;

  // One sample as read back from the ring buffer in channel order.
  typedef struct packed {
    logic [FRAME_BITS-1:0] frame;      // running frame number
    logic [5:0]            channel;    // channel within the FEM
    logic [TICK_BITS-1:0]  tick;       // tick within the frame
    adc_t                  adc;        // ADC code
    logic                  first;      // first sample of this channel in the frame
    logic                  last;       // last sample of this channel in the frame
    logic                  frame_first;// first sample of the frame
    logic                  frame_last; // last sample of the frame
    logic                  trig;       // frame was marked by a trigger
  } sample_t;

  function automatic word_t mk_word(tag_e tag, logic [11:0] payload);
    return {tag, payload};
  endfunction

endpackage
