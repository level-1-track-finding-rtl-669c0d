// geometric_processor: the Geometric Processor (GP) of the TMTT chain.
//
// It receives the stubs of two adjacent detector nonants (one stub stream per
// nonant) and distributes them over the 2 (phi) x 18 (eta) sub-regions of its
// processing nonant, as the article describes. A stub is copied to every
// sub-region it can belong to, so stubs near a boundary are duplicated:
//  * phi: a stub can belong to phi sub-region p if some track with |q/pT|
//    inside the Hough range and phi inside the sub-region passes through it,
//    i.e. if its phi lies within the sub-region widened on each side by the
//    largest bending r*q/pT the Hough transform can reach at its radius.
//  * eta: a stub can belong to eta sub-region e if a straight line from some
//    z0 in [-BEAM_Z0, +BEAM_Z0] through the stub has cot(theta) inside the
//    sub-region's range ETA_BOUND[e] .. ETA_BOUND[e+1].
// The stub is re-expressed in the coordinates of its phi sub-region (phi 0 at
// the sub-region's low edge), which is the reformatting step of the GP.
//
// Input nonant k has its own phi origin; PHI_OFFSET0/1 move it into
// processing-nonant coordinates (processing nonant = [-4096, 4096) phi LSB).
// Stubs that fall in no sub-region are dropped.
//
// Interface: valid/ready streams of stub_beat_t. Each input ends every event
// with an eoe beat. After a link's eoe the GP holds that link (ready low)
// until the other link's eoe has arrived too, then writes one eoe beat into
// every sub-region output, so each output sees whole events. Each output has
// a FIFO (FIFO_DEPTH); the inputs are stalled while any FIFO has fewer than
// two free entries (n_stall counts held stubs; n_dup counts stubs copied to
// more than one sub-region). Latency: a stub accepted in clock t is visible at the
// FIFO output in clock t+1.
//
// The article's demonstrator brings each nonant in on 36 optical links; this
// block takes one stub per clock per nonant. The nonant phi offsets, number
// formats, eta boundaries and the beam-spot length are this design's own
// choices.
module geometric_processor
  import tmtt_pkg::*;
#(
  parameter int PHI_OFFSET0 = -4096,
  parameter int PHI_OFFSET1 = 4096,
  parameter int FIFO_DEPTH  = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  stub_beat_t in_beat  [2],
  output logic       in_ready [2],
  output stub_beat_t out_beat [N_SUB],
  input  logic       out_ready[N_SUB],
  output logic [15:0] n_dup,     // stubs copied into more than one sub-region
  output logic [15:0] n_stall    // clocks a link offered a stub but was held
);
  localparam int FW = $clog2(FIFO_DEPTH);
  localparam int MAXQV = HT_NQ - 1;

  logic [1:0] seen_eoe;
  logic       push_eoe;
  logic       space_ok;
  logic [FW:0] free [N_SUB];
  logic       wr   [2][N_SUB];
  stub_beat_t wd   [2][N_SUB];
  logic       fifo_valid [N_SUB];
  stub_beat_t fifo_beat  [N_SUB];

  assign push_eoe = &seen_eoe;

  always_comb begin
    space_ok = 1'b1;
    for (int s = 0; s < N_SUB; s++)
      if (free[s] < 2) space_ok = 1'b0;
  end

  for (genvar k = 0; k < 2; k++) begin : g_in
    assign in_ready[k] = space_ok && !seen_eoe[k] && !push_eoe;

    always_comb begin
      int phi_proc, lo, loc, maxs, r, z;
      logic fire;
      logic phi_ok [N_PHI_SUB];
      logic eta_ok [N_ETA_SUB];
      fire     = in_ready[k] && in_beat[k].valid;
      r        = int'(in_beat[k].stub.r);
      z        = int'(in_beat[k].stub.z);
      phi_proc = int'(in_beat[k].stub.phi) + ((k == 0) ? PHI_OFFSET0 : PHI_OFFSET1);
      maxs     = (r * MAXQV * QSCALE) >>> QSHIFT;
      for (int p = 0; p < N_PHI_SUB; p++) begin
        lo        = -(1 << SUBREG_PHI_W) + p * (1 << SUBREG_PHI_W);
        loc       = phi_proc - lo;
        phi_ok[p] = (loc >= -maxs) && (loc < (1 << SUBREG_PHI_W) + maxs);
      end
      for (int e = 0; e < N_ETA_SUB; e++)
        eta_ok[e] = ((z + BEAM_Z0) * 256 >= ETA_BOUND[e] * r) &&
                    ((z - BEAM_Z0) * 256 <  ETA_BOUND[e+1] * r);
      for (int e = 0; e < N_ETA_SUB; e++)
        for (int p = 0; p < N_PHI_SUB; p++) begin
          lo = -(1 << SUBREG_PHI_W) + p * (1 << SUBREG_PHI_W);
          wr[k][e*N_PHI_SUB+p]           = fire && phi_ok[p] && eta_ok[e];
          wd[k][e*N_PHI_SUB+p]           = in_beat[k];
          wd[k][e*N_PHI_SUB+p].eoe       = 1'b0;
          wd[k][e*N_PHI_SUB+p].stub.phi  = PHI_W'(phi_proc - lo);
        end
    end
  end

  // Number of sub-regions each link's current stub goes to.
  int ncopy [2];
  always_comb
    for (int k = 0; k < 2; k++) begin
      ncopy[k] = 0;
      for (int s = 0; s < N_SUB; s++) ncopy[k] += int'(wr[k][s]);
    end

  always_ff @(posedge clk) begin
    if (rst) begin
      n_dup   <= '0;
      n_stall <= '0;
    end else begin
      n_dup   <= n_dup + 16'(ncopy[0] > 1) + 16'(ncopy[1] > 1);
      n_stall <= n_stall + 16'(in_beat[0].valid && !in_ready[0])
                         + 16'(in_beat[1].valid && !in_ready[1]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      seen_eoe <= '0;
    end else if (push_eoe) begin
      seen_eoe <= '0;
    end else begin
      for (int k = 0; k < 2; k++)
        if (in_ready[k] && in_beat[k].eoe && !in_beat[k].valid) seen_eoe[k] <= 1'b1;
    end
  end

  localparam stub_beat_t EOE_BEAT = '{valid: 1'b0, eoe: 1'b1, stub: '0};

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    stub_fifo2w #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk      (clk),
      .rst      (rst),
      .wr0      (wr[0][s] || push_eoe),
      .wd0      (push_eoe ? EOE_BEAT : wd[0][s]),
      .wr1      (wr[1][s] && !push_eoe),
      .wd1      (wd[1][s]),
      .free     (free[s]),
      .rd_valid (fifo_valid[s]),
      .rd_beat  (fifo_beat[s]),
      .rd_ready (out_ready[s])
    );
    always_comb begin
      out_beat[s] = fifo_beat[s];
      if (!fifo_valid[s]) begin
        out_beat[s].valid = 1'b0;
        out_beat[s].eoe   = 1'b0;
      end
    end
  end

endmodule
