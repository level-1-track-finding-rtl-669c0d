// tmtt_pkg: types and constants shared by the time-multiplexed track trigger
// (TMTT) chain: Geometric Processor -> Hough Transform -> Kalman fitter ->
// Duplicate Removal.
//
// Data move between blocks as valid/ready streams of "beats". A beat either
// carries one item (a stub, an HT candidate header, a track) or is an
// end-of-event marker (eoe). One event's items are followed by exactly one
// eoe beat, so every block can tell events apart without a separate timing
// signal.
//
// Number formats (all this design's choice; the source article gives no bit
// formats):
//   r    unsigned, 1 LSB = 1 mm, radius of the stub from the beam line
//   phi  signed, 1 LSB = (phi sub-region width)/4096; one phi nonant (40 deg)
//        is two sub-regions, so 8192 LSB
//   z    signed, 1 LSB = 1 mm
//   layer  3-bit layer identifier (8 distinct layers/disks)
//   ps   1 for a pixel-strip (PS) module stub, 0 for a strip-strip (2S) one
//
// The Hough transform follows the article's track equation
//   phi_track = phi_stub + r * q/pT
// with q/pT expressed as a column value qv = 2*c - 31 (c = column 0..31) and
//   r * q/pT  ->  (r * qv * QSCALE) >>> QSHIFT   [phi LSB]
// QSCALE/QSHIFT = 7/64 makes the outermost column (|qv| = 31) correspond to
// pT of about 2 GeV at r = 1.1 m in a 3.8 T field.
package tmtt_pkg;

  localparam int R_W      = 12;
  localparam int PHI_W    = 14;
  localparam int Z_W      = 13;
  localparam int LAYER_W  = 3;
  localparam int N_LAYERS = 1 << LAYER_W;

  // Hough array of the article: 32 q/pT bins x 64 phi bins.
  localparam int HT_NQ    = 32;
  localparam int HT_NPHI  = 64;
  localparam int QBIN_W   = $clog2(HT_NQ);
  localparam int PBIN_W   = $clog2(HT_NPHI);
  // Width of one phi sub-region in phi LSB and the phi size of one HT bin.
  localparam int SUBREG_PHI_W = 12;               // 4096 LSB per sub-region
  localparam int PBIN_SHIFT   = SUBREG_PHI_W - PBIN_W; // 64 LSB per bin

  localparam int QSCALE = 7;
  localparam int QSHIFT = 6;
  // Fractional bits of the fitted q/pT column value.
  localparam int QV_FRAC = 4;
  // Fraction bits of the fitted cot(theta).
  localparam int COT_FRAC = 8;

  // Sub-regions of a nonant: 2 in phi x 18 in eta (from the article).
  localparam int N_PHI_SUB = 2;
  localparam int N_ETA_SUB = 18;
  localparam int N_SUB     = N_PHI_SUB * N_ETA_SUB;

  // Eta sub-region boundaries as cot(theta) = z/r in units of 1/256:
  // 256*sinh(eta_k), eta_k = -2.4 + k*4.8/18, k = 0..18 (equal steps in eta).
  localparam int ETA_BOUND [N_ETA_SUB+1] = '{
    -1399, -1066, -808, -608, -452, -328, -227, -143, -69, 0,
       69,   143,  227,  328,  452,  608,  808, 1066, 1399};
  // Half-length of the luminous region used to widen eta sub-regions (mm).
  localparam int BEAM_Z0 = 150;

  typedef struct packed {
    logic [R_W-1:0]          r;
    logic signed [PHI_W-1:0] phi;
    logic signed [Z_W-1:0]   z;
    logic [LAYER_W-1:0]      layer;
    logic                    ps;
  } stub_t;

  // A stub stream beat: valid marks a stub, eoe marks end of event.
  typedef struct packed {
    logic  valid;
    logic  eoe;
    stub_t stub;
  } stub_beat_t;

  typedef enum logic [1:0] {
    HT_NONE = 2'd0,
    HT_HDR  = 2'd1,   // new candidate: qbin/pbin valid
    HT_STUB = 2'd2,   // stub of the current candidate
    HT_EOE  = 2'd3    // end of event
  } ht_kind_e;

  typedef struct packed {
    ht_kind_e            kind;
    logic [QBIN_W-1:0]   qbin;
    logic [PBIN_W-1:0]   pbin;
    stub_t               stub;
  } ht_beat_t;

  typedef struct packed {
    logic [QBIN_W-1:0]        qbin;     // HT cell the candidate came from
    logic [PBIN_W-1:0]        pbin;
    logic signed [15:0]       phi0;     // fitted track phi, phi LSB
    logic signed [11:0]       qv;       // fitted q/pT column value, QV_FRAC frac bits
    logic signed [Z_W-1:0]    z0;       // fitted z at r = 0, mm
    logic signed [11:0]       cot;      // fitted cot(theta), COT_FRAC frac bits
    logic [3:0]               nstubs;   // stubs used in the fit
    logic [N_LAYERS-1:0]      layers;   // layers of the stubs used
  } track_t;

  typedef struct packed {
    logic   valid;
    logic   eoe;
    track_t trk;
  } track_beat_t;

  // Column value of Hough column c: odd values -31..31.
  function automatic int col_qv(input int c);
    return 2 * c - (HT_NQ - 1);
  endfunction

  // Phi shift r*q/pT for column value qv.
  function automatic int ht_shift(input int r, input int qv);
    return (r * qv * QSCALE) >>> QSHIFT;
  endfunction

endpackage
