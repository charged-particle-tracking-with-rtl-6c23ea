// trk_pkg: types and constants shared by the NN track-finding pipeline.
//
// Numbers: every coordinate, weight and activation is a signed 16-bit
// fixed-point value with 10 fractional bits (the ap_fixed<16,6> format that
// HLS-generated networks use by default). The range is [-32, 32) and the
// step 2^-10. Hit coordinates are normalised so that 1.0 = 1024 mm, which
// makes one least-significant bit exactly 1 mm and keeps the barrel detector
// (radius about 1 m) at O(1), as the networks expect.
//
// Detector: the barrel part the tracker works on has 10 layers (4 pixel,
// 4 short strip, 2 long strip); a track has at most one hit per layer, so
// at most 10 hits. A seed is the three hits on the three innermost layers.
// The extrapolation network sees the three most recent hits (9 numbers)
// plus a 5-wide one-hot layer code: 14 inputs in all.
package trk_pkg;

  // ---- fixed point -------------------------------------------------------
  localparam int unsigned FX_W = 16;
  localparam int unsigned FX_F = 10;
  typedef logic signed [FX_W-1:0] fx_t;
  localparam fx_t FX_ONE  = fx_t'(1 << FX_F);
  localparam fx_t FX_HALF = fx_t'(1 << (FX_F - 1));
  localparam fx_t FX_MAX  = fx_t'({1'b0, {(FX_W-1){1'b1}}});
  localparam fx_t FX_MIN  = fx_t'({1'b1, {(FX_W-1){1'b0}}});

  // Saturate a wide signed value to fx_t.
  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'(signed'(FX_MAX))) return FX_MAX;
    if (v < 64'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(v);
  endfunction

  // ---- activations -------------------------------------------------------
  typedef enum logic [1:0] {ACT_LINEAR, ACT_RELU, ACT_TANH, ACT_SIGMOID} act_e;

  // ---- detector / tracks -------------------------------------------------
  localparam int unsigned N_LAYERS   = 10;  // barrel: 4 pixel + 4 short strip + 2 long strip
  localparam int unsigned MAX_HITS   = 10;  // one hit per layer
  localparam int unsigned SEED_HITS  = 3;
  localparam int unsigned CODE_W     = 5;   // one-hot layer code fed to the extrapolator
  localparam int unsigned LAYER_W    = 4;
  localparam int unsigned HIT_IDX_W  = 6;   // up to 64 hits per layer in the hit store
  localparam int unsigned NHITS_W    = 4;   // 0..10

  // Extrapolator network 14 x 32 x 32 x 32 x 3
  localparam int unsigned EX_IN  = SEED_HITS * 3 + CODE_W;  // 14
  localparam int unsigned EX_HID = 32;
  localparam int unsigned EX_OUT = 3;
  // Overlap / fake-removal network 30 x 32 x 32 x 1
  localparam int unsigned FK_IN  = MAX_HITS * 3;             // 30
  localparam int unsigned FK_HID = 32;

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } hit_t;

  typedef struct packed {
    logic [LAYER_W-1:0]   layer;
    logic [HIT_IDX_W-1:0] idx;
  } hit_id_t;

  typedef struct packed {
    logic [NHITS_W-1:0]           n_hits;
    hit_id_t [MAX_HITS-1:0]       id;
    hit_t    [MAX_HITS-1:0]       hit;
  } track_t;

  // Search window around the predicted hit: 10, 15 or 20 mm.
  typedef enum logic [1:0] {WIN_10MM = 2'd0, WIN_15MM = 2'd1, WIN_20MM = 2'd2} win_e;

  // Squared window radius in LSB^2 (1 LSB = 1 mm).
  function automatic logic [31:0] win_r2(input win_e w);
    case (w)
      WIN_10MM: return 32'd100;
      WIN_15MM: return 32'd225;
      default:  return 32'd400;
    endcase
  endfunction

  // Event counters of the whole tracker.
  typedef struct packed {
    logic [31:0] predictions;     // network evaluations requested
    logic [31:0] branches;        // extra tracks made when several hits match
    logic [31:0] stop_edge;       // tracks that reached the outermost layer
    logic [31:0] stop_nomatch;    // tracks with no hit in the window
    logic [31:0] stack_overflow;  // branches lost to a full work stack
    logic [31:0] fakes;           // candidates under the score cut
    logic [31:0] duplicates;      // candidates beaten by an overlapping track
    logic [31:0] replaced;        // kept tracks displaced by a better one
    logic [31:0] kept_overflow;   // candidates lost to a full overlap buffer
    logic [31:0] kept;            // candidates accepted into the buffer
  } tracker_stats_t;

endpackage
