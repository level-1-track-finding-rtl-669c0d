// kf_fitter: track fitter for Hough-transform candidates (the "TF"/Kalman
// filter step of the TMTT chain).
//
// For each candidate the fit starts from the coarse parameters of its Hough
// cell (cell centre: phi0 = pbin*64+32, q/pT column value qv = 2*qbin-31).
// The candidate's stubs are then taken one per clock. Each stub is compared
// with the trajectory predicted by the current estimate,
//     phi_pred = phi0 - r*qv*QSCALE/2^QSHIFT ,
// and skipped if |phi - phi_pred| > GATE. A consistent stub is added with
// weight W_PS (PS module) or W_2S (2S module) and the estimate is updated
// from all stubs accepted so far. The state is kept as weighted sums
// (S1, Sx, Sxx, Sy, Sxy with x = -r, y = phi) and the estimate is their
// weighted least-squares solution once two stubs are in; for a static,
// two-parameter straight-line model without a prior this is exactly what a
// Kalman filter updating stub by stub converges to, while needing no matrix
// state. Until two stubs are accepted the Hough cell parameters are used.
//
// The same accepted stubs also feed a straight-line fit in the r-z plane,
// z = z0 + r*cot(theta), with its own sums (U1, Ur, Urr, Uz, Urz). PS modules
// measure z far better than 2S modules (whose strips are centimetres long),
// so PS stubs get weight WZ_PS and 2S stubs WZ_2S. The r-z fit does not gate
// stubs; it is evaluated when the track is closed, and gives z0 = 0 and
// cot = 0 if all accepted stubs sit at one radius.
//
// When the next header or the end-of-event beat arrives, the finished
// candidate is sent out if at least MIN_FIT stubs were accepted; otherwise
// it is dropped (counted in n_rejected; skipped stubs in n_skipped). The end-of-event beat is forwarded.
//
// Interface: input is the HT output stream (ht_beat_t, valid when kind is not
// HT_NONE, with in_ready), output a track_beat_t valid/ready stream. One beat
// is consumed per clock; a finished track leaves one clock after its last
// stub. The fitted values are rounded to the nearest LSB; qv carries QV_FRAC
// fraction bits and cot COT_FRAC fraction bits, z0 is in mm.
// The sums and estimates are 64-bit; the estimates are cut to the output
// field widths, so their upper bits are unused by design (a valid track's
// parameters always fit the fields).
//
// The article gives the principle (start from the HT parameters, add stubs
// one by one weighted by their uncertainty, skip inconsistent stubs) and
// that the final track carries z0 and eta as well; the least-squares form,
// the weights, the gate and MIN_FIT are this design's choices.
module kf_fitter
  import tmtt_pkg::*;
#(
  parameter int GATE    = 160,
  parameter int W_PS    = 2,
  parameter int W_2S    = 1,
  parameter int MIN_FIT = 4,
  parameter int WZ_PS   = 64,
  parameter int WZ_2S   = 1
) (
  input  logic        clk,
  input  logic        rst,
  input  ht_beat_t    in_beat,
  output logic        in_ready,
  output track_beat_t out_beat,
  input  logic        out_ready,
  output logic [15:0] n_rejected,   // candidates with too few stubs
  output logic [15:0] n_skipped     // stubs skipped by the gate
);
  logic                active;
  logic [QBIN_W-1:0]   qbin;
  logic [PBIN_W-1:0]   pbin;
  longint              s1, sx, sxx, sy, sxy;
  longint              u1, ur, urr, uz, urz;
  logic [6:0]          nacc;
  logic [N_LAYERS-1:0] layers;

  function automatic longint rdiv(input longint n, input longint d);
    if (n >= 0) return (2 * n + d) / (2 * d);
    return -((-2 * n + d) / (2 * d));
  endfunction

  // Current estimate.
  longint det, num_a, num_b, est_phi0, est_qv;
  always_comb begin
    det   = s1 * sxx - sx * sx;
    num_a = sxx * sy - sx * sxy;
    num_b = s1 * sxy - sx * sy;
    if (nacc >= 2 && det > 0) begin
      est_phi0 = rdiv(num_a, det);
      est_qv   = rdiv(num_b * (longint'(1) << (QSHIFT + QV_FRAC)), longint'(QSCALE) * det);
    end else begin
      est_phi0 = longint'(pbin) * (1 << PBIN_SHIFT) + (1 << (PBIN_SHIFT - 1));
      est_qv   = longint'(col_qv(int'(qbin))) * (1 << QV_FRAC);
    end
  end

  // r-z estimate, used when the track is closed.
  longint detz, est_z0, est_cot;
  always_comb begin
    detz = u1 * urr - ur * ur;
    if (detz > 0) begin
      est_z0  = rdiv(urr * uz - ur * urz, detz);
      est_cot = rdiv((u1 * urz - ur * uz) * (longint'(1) << COT_FRAC), detz);
    end else begin
      est_z0  = 0;
      est_cot = 0;
    end
  end

  // Gate for the incoming stub.
  longint pred, res, w, x, y, wz, zr, zz;
  logic   consistent;
  always_comb begin
    x    = -longint'(in_beat.stub.r);
    y    = longint'(in_beat.stub.phi);
    w    = in_beat.stub.ps ? longint'(W_PS) : longint'(W_2S);
    wz   = in_beat.stub.ps ? longint'(WZ_PS) : longint'(WZ_2S);
    zr   = longint'(in_beat.stub.r);
    zz   = longint'(in_beat.stub.z);
    pred = est_phi0 + ((x * est_qv * QSCALE) >>> (QSHIFT + QV_FRAC));
    res  = y - pred;
    consistent = (res <= longint'(GATE)) && (res >= -longint'(GATE));
  end

  logic closing;   // header/eoe arrives while a candidate is open
  logic good;
  assign closing = active && (in_beat.kind == HT_HDR || in_beat.kind == HT_EOE);
  assign good    = nacc >= 7'(MIN_FIT);

  always_comb begin
    out_beat = '0;
    if (closing) begin
      out_beat.valid       = good;
      out_beat.trk.qbin    = qbin;
      out_beat.trk.pbin    = pbin;
      out_beat.trk.phi0    = 16'(est_phi0);
      out_beat.trk.qv      = 12'(est_qv);
      out_beat.trk.z0      = Z_W'(est_z0);
      out_beat.trk.cot     = 12'(est_cot);
      out_beat.trk.nstubs  = (nacc > 15) ? 4'd15 : nacc[3:0];
      out_beat.trk.layers  = layers;
    end else if (in_beat.kind == HT_EOE) begin
      out_beat.eoe = 1'b1;
    end
  end

  always_comb begin
    unique case (in_beat.kind)
      HT_STUB: in_ready = 1'b1;
      HT_HDR:  in_ready = !active;
      HT_EOE:  in_ready = !active && out_ready;
      default: in_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active     <= 1'b0;
      qbin       <= '0;
      pbin       <= '0;
      nacc       <= '0;
      layers     <= '0;
      {s1, sx, sxx, sy, sxy} <= '0;
      {u1, ur, urr, uz, urz} <= '0;
      n_rejected <= '0;
      n_skipped  <= '0;
    end else if (closing) begin
      if (!good || out_ready) begin
        active <= 1'b0;
        if (!good) n_rejected <= n_rejected + 1'b1;
      end
    end else if (in_beat.kind == HT_HDR) begin
      active <= 1'b1;
      qbin   <= in_beat.qbin;
      pbin   <= in_beat.pbin;
      nacc   <= '0;
      layers <= '0;
      {s1, sx, sxx, sy, sxy} <= '0;
      {u1, ur, urr, uz, urz} <= '0;
    end else if (in_beat.kind == HT_STUB && active && consistent) begin
      s1     <= s1 + w;
      sx     <= sx + w * x;
      sxx    <= sxx + w * x * x;
      sy     <= sy + w * y;
      sxy    <= sxy + w * x * y;
      u1     <= u1 + wz;
      ur     <= ur + wz * zr;
      urr    <= urr + wz * zr * zr;
      uz     <= uz + wz * zz;
      urz    <= urz + wz * zr * zz;
      if (nacc != 7'h7f) nacc <= nacc + 1'b1;
      layers[in_beat.stub.layer] <= 1'b1;
    end else if (in_beat.kind == HT_STUB && active) begin
      n_skipped <= n_skipped + 1'b1;
    end
  end

endmodule
