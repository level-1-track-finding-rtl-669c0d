// tb_single_muon: single-muon workload for the whole track-finding processor
// at its default size.
//
// Each event holds one muon and nothing else, as in the single-muon samples
// used to compare hardware tracks with a software emulation. A muon has a
// random phi0 over the whole processing nonant, a q/pT column value in
// +-27 (pT above roughly 2.3 GeV), cot(theta) in +-1.2 and z0 in +-100 mm,
// and leaves one stub on each of six barrel layers at
//     phi = phi0 - r*qv*7/64,   z = z0 + r*cot(theta)
// (inner three layers PS modules, outer three 2S). The stubs reach the link
// of the detector nonant they lie in, in that link's phi origin. Events
// follow each other back to back; the outputs are always ready.
//
// Checks: every muon is found, with fitted phi0 within 12 phi LSB, qv within
// 0.6, z0 within 3 mm and cot(theta) within 0.02 of the truth; every output
// track matches its event's muon (no fakes); every output closes every
// event. Reported: efficiency, tracks per muon after duplicate removal, and
// the latency from each event's first stub to its first track. A muon is
// usually reported twice: the beam-spot margin copies its stubs into two
// neighbouring eta sub-regions, each of which finds it, and duplicate
// removal works within one Hough array only. Latency grows along the run
// because events arrive faster than a Hough array reads one out.
module tb_single_muon;
  import tmtt_pkg::*;

  localparam int NEV = 40;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  stub_beat_t  in_beat  [2];
  logic        in_ready [2];
  track_beat_t trk_beat [N_SUB];
  logic        trk_ready[N_SUB];
  logic [31:0] n_gp_dup, n_gp_stall, n_trunc, n_cand, n_fit_rejected, n_fit_skipped,
               n_dup_removed, n_tracks;
  int checks = 0, failures = 0;

  tmtt_tfp dut (.*);

  localparam int RAD [6] = '{250, 350, 500, 680, 880, 1080};

  real mu_phi0 [NEV], mu_qv [NEV], mu_z0 [NEV], mu_cot [NEV];
  int  n_found [NEV], t_first_in [NEV], t_first_out [NEV];
  stub_beat_t linkq [2][$];
  int n_eoe [N_SUB];
  int cyc = 0, n_fake = 0, n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic build_event(int ev);
    for (int l = 0; l < 6; l++) begin
      stub_beat_t b;
      real phi;
      int k;
      phi = mu_phi0[ev] - real'(RAD[l]) * mu_qv[ev] * 7.0 / 64.0;
      k   = (phi < 0.0) ? 0 : 1;
      b = '0;
      b.valid      = 1;
      b.stub.r     = 12'(RAD[l]);
      b.stub.phi   = 14'(int'(phi) + ((k == 0) ? 4096 : -4096));
      b.stub.z     = 13'(int'(mu_z0[ev] + real'(RAD[l]) * mu_cot[ev]));
      b.stub.layer = 3'(l);
      b.stub.ps    = (l < 3);
      linkq[k].push_back(b);
    end
    for (int k = 0; k < 2; k++) begin
      stub_beat_t b;
      b = '0; b.eoe = 1;
      linkq[k].push_back(b);
    end
  endtask

  for (genvar s = 0; s < N_SUB; s++) begin : g_out
    assign trk_ready[s] = 1'b1;
    always @(posedge clk) begin
      if (!rst) begin
        if (trk_beat[s].eoe) n_eoe[s]++;
        else if (trk_beat[s].valid) begin
          track_t t;
          logic signed [15:0] tphi;
          logic signed [11:0] tqv, tcot;
          logic signed [12:0] tz0;
          int ev;
          real ph;
          t    = trk_beat[s].trk;
          tphi = t.phi0;
          tqv  = t.qv;
          tz0  = t.z0;
          tcot = t.cot;
          ev   = n_eoe[s];
          ph   = real'(tphi) - 4096.0 + 4096.0 * (s % 2);
          n_out++;
          if (ev < NEV && rabs(mu_phi0[ev] - ph) <= 12.0 &&
              rabs(mu_qv[ev] - real'(tqv) / 16.0) <= 0.6 &&
              rabs(mu_z0[ev] - real'(tz0)) <= 3.0 &&
              rabs(mu_cot[ev] - real'(tcot) / 256.0) <= 0.02) begin
            n_found[ev]++;
            if (t_first_out[ev] < 0) t_first_out[ev] = cyc;
          end else begin
            n_fake++;
            $display("FAIL: out %0d ev %0d track phi0 %0d qv %0d z0 %0d cot %0d does not match its muon",
                     s, ev, tphi, tqv, tz0, tcot);
          end
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit done [2];
  for (genvar k = 0; k < 2; k++) begin : g_drv
    initial begin
      in_beat[k] = '0;
      done[k] = 0;
      wait (!rst);
      @(negedge clk);
      for (int ev = 0; ev < NEV; ev++) begin
        while (1) begin
          stub_beat_t b;
          b = linkq[k].pop_front();
          in_beat[k] = b;
          #1;
          while (!in_ready[k]) begin @(negedge clk); #1; end
          if (b.valid && (t_first_in[ev] < 0 || cyc < t_first_in[ev])) t_first_in[ev] = cyc;
          @(negedge clk);
          in_beat[k] = '0;
          if (b.eoe) break;
        end
      end
      done[k] = 1;
    end
  end

  initial begin
    int nf, ndup, lat_min, lat_max;
    for (int s = 0; s < N_SUB; s++) n_eoe[s] = 0;
    for (int ev = 0; ev < NEV; ev++) begin
      mu_phi0[ev] = real'($urandom_range(0, 7200)) - 3600.0;
      mu_qv[ev]   = real'($urandom_range(0, 5400)) / 100.0 - 27.0;
      mu_cot[ev]  = real'($urandom_range(0, 240)) / 100.0 - 1.2;
      mu_z0[ev]   = real'($urandom_range(0, 200)) - 100.0;
      n_found[ev] = 0; t_first_in[ev] = -1; t_first_out[ev] = -1;
      build_event(ev);
    end
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done[0] && done[1]);
    begin
      bit all;
      all = 0;
      while (!all && cyc < 500000) begin
        @(negedge clk);
        all = 1;
        for (int s = 0; s < N_SUB; s++) if (n_eoe[s] != NEV) all = 0;
      end
    end
    repeat (10) @(negedge clk);
    for (int s = 0; s < N_SUB; s++) begin
      checks++;
      if (n_eoe[s] != NEV) begin failures++; $display("FAIL: out %0d saw %0d eoe", s, n_eoe[s]); end
    end
    nf = 0; ndup = 0; lat_min = 1 << 30; lat_max = 0;
    for (int ev = 0; ev < NEV; ev++) begin
      checks++;
      if (n_found[ev] == 0) begin
        failures++;
        $display("FAIL: muon %0d (phi0 %f qv %f z0 %f cot %f) not found", ev, mu_phi0[ev],
                 mu_qv[ev], mu_z0[ev], mu_cot[ev]);
      end else begin
        int lat;
        nf++;
        ndup += n_found[ev] - 1;
        lat = t_first_out[ev] - t_first_in[ev];
        if (lat < lat_min) lat_min = lat;
        if (lat > lat_max) lat_max = lat;
      end
    end
    checks++;
    if (n_fake != 0) failures++;
    $display("efficiency %0d / %0d, extra tracks per found muon %0d / %0d, unmatched tracks %0d",
             nf, NEV, ndup, nf, n_fake);
    $display("mechanisms: gp_dup=%0d ht_cand=%0d dr_removed=%0d tracks=%0d",
             n_gp_dup, n_cand, n_dup_removed, n_tracks);
    $display("latency first stub -> first track: %0d..%0d clocks", lat_min, lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
