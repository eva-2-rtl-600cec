// eva2_pkg: types and default sizes shared by the EVA^2 blocks.
//
// EVA^2 sits beside a CNN accelerator and replaces the first layers of the
// network (the "prefix") on most video frames by warping a stored activation
// along motion vectors found by receptive-field block motion estimation
// (RFBME). The defaults below describe one configuration: a VGG-16 based
// Faster R-CNN ("Faster16") on 1000x562 frames, warping at layer conv5_3
// (stride 16, 512 channels). The frame size and the 16-bit activation format
// follow the paper; the stride, receptive field, padding and channel count
// are those of VGG-16; pixel width, search radius/stride and buffer capacity
// are this design's choices (the paper's operation counts fix only the ratio
// 2*radius/stride = 6).
package eva2_pkg;

  // Frame and pixel buffer
  parameter int FRAME_W_D       = 1000;
  parameter int FRAME_H_D       = 562;
  parameter int PIX_W           = 8;      // grey-scale pixel width
  parameter int PIX_PER_WORD_D  = 8;      // pixels per pixel-buffer word

  // RFBME geometry (all in pixels unless named *_TILES)
  parameter int TILE_D          = 16;     // tile edge = receptive field stride
  parameter int SEARCH_RADIUS_D = 24;
  parameter int SEARCH_STRIDE_D = 8;
  parameter int RF_TILES_D      = 12;     // 196-pixel field / 16, partial tiles dropped
  parameter int PAD_TILES_D     = 6;      // 90-pixel padding / 16, rounded

  // Target activation
  parameter int CHANNELS_D      = 512;
  parameter int ACT_W           = 16;     // 16-bit fixed point activations
  parameter int FRAC_BITS_D     = 4;      // motion vector fraction bits = log2(TILE)
  parameter int GAP_W           = 10;     // zero-gap field; all ones = "lane inactive"
  parameter int ENTRIES_PER_BANK_D = 55552; // 20% of 62*35*512 over 4 banks

  // One run-length encoded activation entry: `gap` zero channels precede
  // `value`; `last` closes the channel list of one spatial position. A
  // position without any non-zero channel is stored as {0, 0, last=1}.
  typedef struct packed {
    logic [GAP_W-1:0]        gap;
    logic signed [ACT_W-1:0] value;
    logic                    last;
  } rle_entry_t;

  // Motion vector of one receptive field, in input pixels.
  typedef struct packed {
    logic signed [7:0] dx;
    logic signed [7:0] dy;
  } mv_t;

  typedef enum logic {
    FRAME_PREDICTED = 1'b0,
    FRAME_KEY       = 1'b1
  } frame_kind_e;

endpackage
