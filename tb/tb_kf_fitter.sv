// tb_kf_fitter: self-checking test of kf_fitter.
//
// Builds Hough candidates from simulated tracks: a track with parameters
// (phi0, qv) leaves one stub on each of six barrel layers at
// phi = phi0 - r*qv*7/64 plus a small random offset. The header carries the
// Hough cell containing the true parameters. Some candidates get an extra
// stub far off the trajectory, which the fitter must skip; some have only
// three stubs and must be rejected. The expected fit is a weighted
// least-squares straight line in (-r, phi) computed here in real numbers
// over the stubs that should be accepted, and likewise in (r, z) for z0 and
// cot(theta) with the r-z weights (PS 64, 2S 1). Checks the fitted phi0, qv,
// z0 and cot to within one LSB, the stub count and layer mask, end-of-event forwarding,
// the one-track-per-clock-after-last-stub timing and the counters. The
// output is randomly back-pressured.
module tb_kf_fitter;
  import tmtt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  ht_beat_t    in_beat;
  track_beat_t out_beat;
  logic in_ready, out_ready;
  logic [15:0] n_rejected, n_skipped;
  int checks = 0, failures = 0;

  kf_fitter dut (.*);

  localparam int RAD [6] = '{250, 350, 500, 680, 880, 1080};

  typedef struct {
    track_t trk;
    real    phi0;
    real    qv;
    real    z0;
    real    cot;
    bit     any_fit;   // only the cell is checked
  } exp_t;
  exp_t expq[$];
  int exp_rej = 0, exp_skip = 0;
  bit   saw_eoe;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  always @(posedge clk) if (!rst && out_ready && (out_beat.valid || out_beat.eoe)) begin
    if (out_beat.eoe) saw_eoe = 1;
    else begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: unexpected track"); end
      else begin
        e = expq.pop_front();
        if (e.any_fit) begin
          if (out_beat.trk.pbin != e.trk.pbin) begin failures++; $display("FAIL: timing track"); end
        end else if (out_beat.trk.qbin != e.trk.qbin || out_beat.trk.pbin != e.trk.pbin ||
            out_beat.trk.nstubs != e.trk.nstubs || out_beat.trk.layers != e.trk.layers ||
            rabs(real'(out_beat.trk.phi0) - e.phi0) > 1.01 ||
            rabs(real'(out_beat.trk.qv) - e.qv * 16.0) > 1.01 ||
            rabs(real'(out_beat.trk.z0) - e.z0) > 1.01 ||
            rabs(real'(out_beat.trk.cot) - e.cot * 256.0) > 1.01) begin
          failures++;
          $display("FAIL: got phi0=%0d qv=%0d z0=%0d cot=%0d n=%0d exp phi0=%f qv16=%f z0=%f cot256=%f n=%0d",
                   out_beat.trk.phi0, out_beat.trk.qv, out_beat.trk.z0, out_beat.trk.cot,
                   out_beat.trk.nstubs, e.phi0, e.qv*16.0, e.z0, e.cot*256.0, e.trk.nstubs);
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(ht_beat_t b);
    in_beat = b;
    out_ready = ($urandom_range(0, 3) != 0);
    #1;
    while (!in_ready) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
    end
    @(negedge clk);
    in_beat = '0;
  endtask

  initial begin
    in_beat = '0;
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      real phi0, qv, s1, sx, sxx, sy, sxy, det;
      real z0t, cott, u1, ur, urr, uz, urz, detz;
      int  nl, qbin, pbin;
      bit  outlier;
      ht_beat_t b;
      exp_t e;
      qv   = real'($urandom_range(0, 6000)) / 100.0 - 30.0;
      phi0 = real'($urandom_range(200, 3900));
      z0t  = real'($urandom_range(0, 300)) - 150.0;
      cott = real'($urandom_range(0, 700)) / 100.0 - 3.5;   // keeps |z| < 4096 mm
      qbin = int'($floor((qv + 32.0) / 2.0));
      pbin = int'($floor(phi0 / 64.0));
      nl   = (t % 5 == 4) ? 3 : 6;
      outlier = (t % 3 == 1);
      b = '0; b.kind = HT_HDR; b.qbin = 5'(qbin); b.pbin = 6'(pbin);
      send(b);
      s1 = 0; sx = 0; sxx = 0; sy = 0; sxy = 0;
      u1 = 0; ur = 0; urr = 0; uz = 0; urz = 0;
      e.trk = '0;
      e.any_fit = 0;
      e.trk.qbin = 5'(qbin); e.trk.pbin = 6'(pbin);
      for (int l = 0; l < nl; l++) begin
        real x, y, w, wz;
        int  phi, z;
        phi = int'(phi0 - real'(RAD[l]) * qv * 7.0 / 64.0) + int'($urandom_range(0, 4)) - 2;
        b = '0; b.kind = HT_STUB;
        // PS stubs (inner layers) measure z to ~1 mm, 2S stubs to ~25 mm.
        z = int'(z0t + real'(RAD[l]) * cott) +
            ((l < 3) ? int'($urandom_range(0, 2)) - 1 : int'($urandom_range(0, 50)) - 25);
        b.stub.r = 12'(RAD[l]); b.stub.phi = 14'(phi); b.stub.layer = 3'(l); b.stub.ps = (l < 3);
        b.stub.z = 13'(z);
        send(b);
        w  = (l < 3) ? 2.0 : 1.0;
        wz = (l < 3) ? 64.0 : 1.0;
        x = -real'(RAD[l]); y = real'(phi);
        s1 += w; sx += w*x; sxx += w*x*x; sy += w*y; sxy += w*x*y;
        u1 += wz; ur += wz*RAD[l]; urr += wz*RAD[l]*RAD[l]; uz += wz*z; urz += wz*RAD[l]*z;
        e.trk.layers[l] = 1'b1;
        if (outlier && l == 2) begin
          b.stub.phi = 14'(phi + 600); b.stub.layer = 3'd7;
          send(b);
          exp_skip++;
        end
      end
      det = s1*sxx - sx*sx;
      e.phi0 = (sxx*sy - sx*sxy) / det;
      e.qv   = (s1*sxy - sx*sy) / det * 64.0 / 7.0;
      detz   = u1*urr - ur*ur;
      e.z0   = (urr*uz - ur*urz) / detz;
      e.cot  = (u1*urz - ur*uz) / detz;
      e.trk.nstubs = 4'(nl);
      if (nl >= 4) expq.push_back(e); else exp_rej++;
      if (t % 10 == 9) begin
        b = '0; b.kind = HT_EOE;
        saw_eoe = 0;
        send(b);
        repeat (2) @(negedge clk);
        checks++;
        if (!saw_eoe) begin failures++; $display("FAIL: eoe not forwarded"); end
      end
    end
    // Timing: the finished track appears in the clock after its last stub.
    begin
      ht_beat_t b;
      exp_t e;
      e.trk = '0; e.trk.pbin = 6'd20; e.any_fit = 1; e.phi0 = 0; e.qv = 0; e.z0 = 0; e.cot = 0;
      expq.push_back(e);
      out_ready = 1;
      b = '0; b.kind = HT_HDR; b.qbin = 5'd15; b.pbin = 6'd20;
      in_beat = b; @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        b = '0; b.kind = HT_STUB; b.stub.r = 12'(RAD[l]);
        b.stub.phi = 14'(20*64+32 + RAD[l]*7/64); b.stub.layer = 3'(l);
        in_beat = b; @(negedge clk);
      end
      b = '0; b.kind = HT_EOE;
      in_beat = b;
      #1;
      checks++;
      if (!out_beat.valid || out_beat.trk.pbin != 6'd20) begin
        failures++; $display("FAIL: track not out right after its last stub");
      end
      @(negedge clk);
      @(negedge clk);
      in_beat = '0;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d tracks missing", expq.size()); end
    checks++;
    if (int'(n_rejected) != exp_rej || int'(n_skipped) != exp_skip) begin
      failures++; $display("FAIL: rejected %0d skipped %0d exp %0d %0d", n_rejected, n_skipped, exp_rej, exp_skip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
