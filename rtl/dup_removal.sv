// dup_removal: duplicate removal of the TMTT chain.
//
// Because Hough cells are finite, one particle usually fires several
// neighbouring cells, and each of them is fitted. After the fit, only the
// candidate whose own cell contains the fitted parameters is kept: the fitted
// q/pT column value qv (QV_FRAC fraction bits) is mapped back to its column,
// floor((qv + 32) / 2), and the fitted phi0 to its row, floor(phi0 / 64);
// a track is kept if (column, row) equals the cell it came from. Fitted
// parameters outside the array match no cell and are dropped. This looks at
// one track at a time, with no comparison between tracks, as in the article.
//
// Interface: track_beat_t valid/ready stream in and out, registered output
// (one clock of latency, one beat per clock, back-pressure passes through).
// End-of-event beats are forwarded. n_kept / n_removed count tracks since
// reset.
module dup_removal
  import tmtt_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  track_beat_t in_beat,
  output logic        in_ready,
  output track_beat_t out_beat,
  input  logic        out_ready,
  output logic [15:0] n_kept,
  output logic [15:0] n_removed
);
  // Cell of the fitted parameters.
  logic keep;
  always_comb begin
    int c, p;
    c    = (int'(in_beat.trk.qv) + ((HT_NQ) << QV_FRAC)) >>> (QV_FRAC + 1);
    p    = int'(in_beat.trk.phi0) >>> PBIN_SHIFT;
    keep = (c >= 0) && (c < HT_NQ) && (p >= 0) && (p < HT_NPHI) &&
           (c == int'(in_beat.trk.qbin)) && (p == int'(in_beat.trk.pbin));
  end

  assign in_ready = !out_beat.valid && !out_beat.eoe || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_beat  <= '0;
      n_kept    <= '0;
      n_removed <= '0;
    end else if (in_ready) begin
      out_beat       <= in_beat;
      out_beat.valid <= in_beat.valid && keep;
      if (in_beat.valid) begin
        if (keep) n_kept    <= n_kept + 1'b1;
        else      n_removed <= n_removed + 1'b1;
      end
    end
  end

endmodule
