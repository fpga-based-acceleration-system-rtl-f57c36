// trk_pkg: types and constants shared by the visual tracker.
//
// The tracker follows a DSST/SAMF-style correlation filter: a 128x128 grey
// sample is reduced to a 32x32 map of 33 feature channels (1 grey + 32 HOG),
// the channels are transformed with a 32x32 2-D FFT in 8 batches of up to 5
// channels, correlated with a learned filter and transformed back to find the
// peak. Sizes that the paper states (128x128 sample, 32x32 map, 33 channels,
// 8 batches, 5 lanes, 7 scales) are constants here; number formats are this
// design's own choice and are described next to each constant.
package trk_pkg;

  // Sizes taken from the paper.
  localparam int unsigned IMG      = 128;  // interpolated sample side
  localparam int unsigned MAP      = 32;   // feature map side (FFT size)
  localparam int unsigned CELL     = IMG / MAP; // 4x4 pixel HOG cell
  localparam int unsigned NCH      = 33;   // 1 grey + 32 HOG channels
  localparam int unsigned NHOG     = 32;
  localparam int unsigned NBATCH   = 8;    // batches of Fig. 2
  localparam int unsigned LANES    = 5;    // parallel filter layers (Level 0..4)
  localparam int unsigned NSCALE   = 7;    // SAMF scale count
  localparam int unsigned MAPSZ    = MAP * MAP;

  // Own choices: number formats.
  localparam int unsigned PW  = 8;   // pixel width
  localparam int unsigned FW  = 16;  // feature word width (signed)
  localparam int unsigned DW  = 24;  // FFT data width per component (signed)
  localparam int unsigned TW  = 16;  // twiddle width, Q1.14
  localparam int unsigned AW  = 32;  // filter numerator component width
  localparam int unsigned BW  = 40;  // filter denominator width (unsigned)
  localparam int unsigned RW  = 48;  // reciprocal width
  localparam int unsigned NUMW = 64; // numerator accumulator width
  localparam int unsigned RS  = 48;  // reciprocal = 2^RS / (B + lambda)

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [AW-1:0] re;
    logic signed [AW-1:0] im;
  } acplx_t;

  // One feature-map word: all 33 channels of one cell, channel 0 = grey.
  typedef logic signed [NCH-1:0][FW-1:0] feat_word_t;

  typedef enum logic [1:0] {
    ENG_GAUSS  = 2'd0,  // transform the Gaussian label and keep it
    ENG_TRAIN  = 2'd1,  // update the filter from the sample
    ENG_DETECT = 2'd2   // correlate the sample with the filter
  } eng_mode_e;

  // Channel held by lane l of batch b (Fig. 2): batch 0 carries grey and
  // HOG 0-3 (channels 0..4); batch b>0 carries HOG 4b-4..4b-1 (channels 4b+1..4b+4).
  function automatic int unsigned batch_channel(int unsigned b, int unsigned l);
    return (b == 0) ? l : 4 * b + 1 + l;
  endfunction

  function automatic logic batch_lane_used(int unsigned b, int unsigned l);
    return (b == 0) || (l < 4);
  endfunction

endpackage
