// tmtt_tfp: track-finding processor of the time-multiplexed track trigger
// (TMTT) for one time slice and one phi nonant.
//
// Stubs of the two detector nonants overlapping the processing nonant enter
// the Geometric Processor, which copies each stub into the 2 x 18 = 36
// (phi, eta) sub-regions it may belong to. Every sub-region has its own
// chain: a 32 x 64 Hough transform finds track candidates, the track fitter
// fits each candidate from its Hough cell and stubs, and duplicate removal
// keeps only tracks whose fitted parameters lie in their own cell. The 36
// chains work in parallel and independently.
//
// Interface: two stub_beat_t input streams with ready, one per nonant, each
// closing an event with an end-of-event beat; 36 track_beat_t output streams
// with ready, output s belonging to eta sub-region s/2 and phi sub-region
// s%2, each closing the event with an end-of-event beat. Counters report
// dropped stubs, candidates, rejected fits and removed duplicates, summed
// over the sub-regions. Latency depends on the number of candidates (the
// Hough read-out is serial); see the README.
//
// The block order and the 2 x 18 sub-regions follow the article. Splitting
// the output into one stream per sub-region, instead of merging onto output
// links, and the single link per nonant are this design's choices.
module tmtt_tfp
  import tmtt_pkg::*;
#(
  parameter int MIN_LAYERS = 5,
  parameter int MAX_STUBS  = 64,
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  stub_beat_t  in_beat  [2],
  output logic        in_ready [2],
  output track_beat_t trk_beat [N_SUB],
  input  logic        trk_ready[N_SUB],
  output logic [31:0] n_gp_dup,
  output logic [31:0] n_gp_stall,
  output logic [31:0] n_trunc,
  output logic [31:0] n_cand,
  output logic [31:0] n_fit_rejected,
  output logic [31:0] n_fit_skipped,
  output logic [31:0] n_dup_removed,
  output logic [31:0] n_tracks
);
  stub_beat_t  gp_beat  [N_SUB];
  logic        gp_ready [N_SUB];
  ht_beat_t    ht_beat  [N_SUB];
  logic        ht_ready [N_SUB];
  track_beat_t kf_beat  [N_SUB];
  logic        kf_ready [N_SUB];
  logic [15:0] gp_dup, gp_stall;
  logic [15:0] c_trunc [N_SUB], c_cand [N_SUB], c_rej [N_SUB], c_skip [N_SUB], c_kept [N_SUB], c_rem [N_SUB];

  geometric_processor #(.FIFO_DEPTH(FIFO_DEPTH)) u_gp (
    .clk, .rst,
    .in_beat   (in_beat),
    .in_ready  (in_ready),
    .out_beat  (gp_beat),
    .out_ready (gp_ready),
    .n_dup     (gp_dup),
    .n_stall   (gp_stall)
  );
  assign n_gp_dup   = 32'(gp_dup);
  assign n_gp_stall = 32'(gp_stall);

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    ht_array #(.MIN_LAYERS(MIN_LAYERS), .MAX_STUBS(MAX_STUBS)) u_ht (
      .clk, .rst,
      .in_beat   (gp_beat[s]),
      .in_ready  (gp_ready[s]),
      .out_beat  (ht_beat[s]),
      .out_ready (ht_ready[s]),
      .n_trunc   (c_trunc[s]),
      .n_cand    (c_cand[s])
    );
    kf_fitter u_kf (
      .clk, .rst,
      .in_beat    (ht_beat[s]),
      .in_ready   (ht_ready[s]),
      .out_beat   (kf_beat[s]),
      .out_ready  (kf_ready[s]),
      .n_rejected (c_rej[s]),
      .n_skipped  (c_skip[s])
    );
    dup_removal u_dr (
      .clk, .rst,
      .in_beat   (kf_beat[s]),
      .in_ready  (kf_ready[s]),
      .out_beat  (trk_beat[s]),
      .out_ready (trk_ready[s]),
      .n_kept    (c_kept[s]),
      .n_removed (c_rem[s])
    );
  end

  always_comb begin
    n_trunc = '0; n_cand = '0; n_fit_rejected = '0; n_fit_skipped = '0; n_dup_removed = '0; n_tracks = '0;
    for (int s = 0; s < N_SUB; s++) begin
      n_trunc        += 32'(c_trunc[s]);
      n_cand         += 32'(c_cand[s]);
      n_fit_rejected += 32'(c_rej[s]);
      n_fit_skipped  += 32'(c_skip[s]);
      n_dup_removed  += 32'(c_rem[s]);
      n_tracks       += 32'(c_kept[s]);
    end
  end

endmodule
