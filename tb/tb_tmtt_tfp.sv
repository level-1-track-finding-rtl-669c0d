// tb_tmtt_tfp: end-to-end test of the TMTT track-finding processor at its
// default size (36 sub-regions of 32 x 64 Hough cells).
//
// Events are generated here: each particle has a true track phi0 (in
// processing-nonant coordinates), q/pT column value qv, cot(theta) and z0,
// and leaves one stub on each of six barrel layers at
//     phi = phi0 - r*qv*7/64,   z = z0 + r*cot(theta).
// A stub goes to the link of the detector nonant it lies in (phi < 0: link 0,
// else link 1) in that link's own phi origin. Random noise stubs are added.
// Event 0 and 1 are ordinary events; event 2 crowds many particles into one
// sub-region so the Hough stub memory overflows.
//
// Checks: every particle of the ordinary events is found as an output track
// whose fitted phi0 (relative to its phi sub-region) and qv agree with the
// truth within 12 phi LSB and 0.6 (and, for tracks fitted from exactly its
// six stubs, with z0 within 3 mm and cot(theta) within 0.02); every output closes every event with one
// end-of-event beat; and each mechanism of the chain happened at least once:
// stub duplication and link stall in the GP, stub truncation in the HT,
// stubs skipped and candidates rejected by the fitter, and tracks removed by
// duplicate removal. The latency from the first stub of event 0 to its first
// track is printed. Outputs are randomly back-pressured.
module tb_tmtt_tfp;
  import tmtt_pkg::*;

  localparam int NEV = 3;

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

  typedef struct { real phi0, qv, z0, cot; int ev; bit found; } part_t;
  part_t parts[$];
  stub_beat_t linkq [2][$];
  stub_beat_t evq [2][$];   // stubs of the event being built
  int n_eoe [N_SUB];
  int cyc = 0, first_in = -1, first_out = -1;
  int n_out_tracks = 0;
  int z_checked = 0, z_bad = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic add_stub(int ev, real phi_proc, int r, int z, int layer);
    stub_beat_t b;
    int k;
    b = '0;
    k = (phi_proc < 0.0) ? 0 : 1;
    b.valid      = 1;
    b.stub.r     = 12'(r);
    b.stub.phi   = 14'(int'(phi_proc) + ((k == 0) ? 4096 : -4096));
    b.stub.z     = 13'(z);
    b.stub.layer = 3'(layer);
    b.stub.ps    = (r < 600);
    evq[k].push_back(b);
  endtask

  task automatic add_particle(int ev, real phi0, real qv, real cot, real z0, bit keep);
    part_t p;
    for (int l = 0; l < 6; l++)
      add_stub(ev, phi0 - real'(RAD[l]) * qv * 7.0 / 64.0, RAD[l],
               int'(z0 + real'(RAD[l]) * cot), l);
    p.phi0 = phi0; p.qv = qv; p.z0 = z0; p.cot = cot; p.ev = ev; p.found = 0;
    if (keep) parts.push_back(p);
  endtask

  task automatic build_event(int ev);
    if (ev < 2) begin
      for (int t = 0; t < 6; t++)
        add_particle(ev, real'($urandom_range(0, 7200)) - 3600.0,
                     real'($urandom_range(0, 5400)) / 100.0 - 27.0,
                     real'($urandom_range(0, 500)) / 100.0 - 2.5,
                     real'($urandom_range(0, 200)) - 100.0, 1);
    end else begin
      // Crowded: many particles in one sub-region (eta near 0, phi > 0).
      for (int t = 0; t < 14; t++)
        add_particle(ev, 1000.0 + real'($urandom_range(0, 2000)),
                     real'($urandom_range(0, 4000)) / 100.0 - 20.0,
                     0.1, 0.0, 0);
    end
    for (int i = 0; i < 20; i++) begin
      int l;
      l = $urandom_range(0, 5);
      add_stub(ev, real'($urandom_range(0, 8000)) - 4000.0, RAD[l],
               int'($urandom_range(0, 2 * RAD[l])) - RAD[l], l);
    end
    for (int k = 0; k < 2; k++) begin
      stub_beat_t b;
      // Shuffle the stubs of this event on each link.
      evq[k].shuffle();
      foreach (evq[k][i]) linkq[k].push_back(evq[k][i]);
      evq[k].delete();
      b = '0; b.eoe = 1;
      linkq[k].push_back(b);
    end
  endtask

  // Output side.
  for (genvar s = 0; s < N_SUB; s++) begin : g_out
    always @(posedge clk) begin
      trk_ready[s] <= ($urandom_range(0, 3) != 0);
      if (!rst && trk_ready[s]) begin
        if (trk_beat[s].eoe) n_eoe[s]++;
        else if (trk_beat[s].valid) begin
          real lo, ph, q;
          track_t t;
          logic signed [15:0] tphi;
          logic signed [11:0] tqv, tcot;
          logic signed [12:0] tz0;
          t    = trk_beat[s].trk;
          tphi = t.phi0;
          tqv  = t.qv;
          tz0  = t.z0;
          tcot = t.cot;
          n_out_tracks++;
          if ($test$plusargs("trace")) $display("out %0d ev %0d: phi0 %0d qv %0d cell %0d/%0d n %0d raw %h", s, n_eoe[s], tphi, tqv, t.qbin, t.pbin, t.nstubs, t);
          if (first_out < 0) first_out = cyc;
          lo = -4096.0 + 4096.0 * (s % 2);
          ph = real'(tphi) + lo;
          q  = real'(tqv) / 16.0;
          foreach (parts[i])
            if (parts[i].ev == n_eoe[s] && rabs(parts[i].phi0 - ph) <= 12.0 &&
                rabs(parts[i].qv - q) <= 0.6) begin
              parts[i].found = 1;
              if (t.nstubs == 4'd6) begin
                z_checked++;
                if (rabs(parts[i].z0 - real'(tz0)) > 3.0 ||
                    rabs(parts[i].cot - real'(tcot) / 256.0) > 0.02) begin
                  z_bad++;
                  $display("FAIL: r-z fit z0 %0d cot %0d, truth %f %f", tz0, tcot, parts[i].z0, parts[i].cot);
                end
              end
            end
        end
      end
    end
  end

  initial begin
    #50000000;
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
        wait (linkq[k].size() != 0);
        while (1) begin
          stub_beat_t b;
          b = linkq[k].pop_front();
          in_beat[k] = b;
          #1;
          while (!in_ready[k]) begin @(negedge clk); #1; end
          if (first_in < 0 && b.valid) first_in = cyc;
          @(negedge clk);
          in_beat[k] = '0;
          if (b.eoe) break;
        end
      end
      done[k] = 1;
    end
  end

  initial begin
    for (int s = 0; s < N_SUB; s++) n_eoe[s] = 0;
    for (int ev = 0; ev < NEV; ev++) build_event(ev);
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done[0] && done[1]);
    begin
      bit all;
      all = 0;
      while (!all && cyc < 200000) begin
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
    foreach (parts[i]) begin
      checks++;
      if (!parts[i].found) begin
        failures++;
        $display("FAIL: particle %0d (ev %0d phi0 %f qv %f) not found", i, parts[i].ev, parts[i].phi0, parts[i].qv);
      end
    end
    $display("mechanisms: gp_dup=%0d gp_stall=%0d ht_trunc=%0d ht_cand=%0d fit_skipped=%0d fit_rejected=%0d dr_removed=%0d tracks=%0d",
             n_gp_dup, n_gp_stall, n_trunc, n_cand, n_fit_skipped, n_fit_rejected, n_dup_removed, n_tracks);
    checks++; if (n_gp_dup == 0)       begin failures++; $display("FAIL: no GP duplication"); end
    checks++; if (n_gp_stall == 0)     begin failures++; $display("FAIL: no GP stall"); end
    checks++; if (n_trunc == 0)        begin failures++; $display("FAIL: no HT truncation"); end
    checks++; if (n_fit_skipped == 0)  begin failures++; $display("FAIL: no stub skipped by the fit"); end
    checks++; if (n_fit_rejected == 0) begin failures++; $display("FAIL: no candidate rejected by the fit"); end
    checks++; if (n_dup_removed == 0)  begin failures++; $display("FAIL: no duplicate removed"); end
    checks++; if (z_checked == 0 || z_bad != 0) begin failures++; $display("FAIL: r-z fit checked %0d bad %0d", z_checked, z_bad); end
    checks++; if (int'(n_tracks) != n_out_tracks) begin failures++; $display("FAIL: track count %0d vs %0d", n_tracks, n_out_tracks); end
    $display("r-z fits checked: %0d", z_checked);
    $display("latency first stub in -> first track out: %0d clocks", first_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
