// tb_ht_array: self-checking test of the Hough transform array.
//
// Each event holds a few simulated tracks (one stub per layer on six barrel
// layers, phi = phi0 - r*qv*7/64) plus random noise stubs; one event has
// more stubs than the stub memory holds, so truncation happens. A reference
// model fills its own 32 x 64 array with real-number arithmetic (a stub
// hits every row its line crosses between the column edges qv = 2c-32 and
// 2c-30, with r*q/pT = r*qv*7/64), selects the cells with at
// least MIN_LAYERS distinct layers and lists, column by column and row by
// row, each candidate header followed by its stubs in arrival order. The
// testbench compares the HT output stream beat by beat with that list, under
// random output back-pressure, and checks the end-of-event beat, the input
// stall during read-out, and the truncation and candidate counters.
module tb_ht_array;
  import tmtt_pkg::*;

  localparam int MAXS = 64;
  localparam int MINL = 5;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  stub_beat_t in_beat;
  ht_beat_t   out_beat;
  logic in_ready, out_ready;
  logic [15:0] n_trunc, n_cand;
  int checks = 0, failures = 0;

  ht_array #(.MIN_LAYERS(MINL), .MAX_STUBS(MAXS)) dut (.*);

  localparam int RAD [6] = '{250, 350, 500, 680, 880, 1080};

  ht_beat_t expq[$];
  int exp_trunc = 0, exp_cand = 0, stalls = 0;

  // Does the stub's line cross cell (c, p)? The line runs between its values
  // at the column edges qv = 2c-32 and 2c-30.
  function automatic bit ref_hit(stub_t s, int c, int p);
    real a, b, lo, hi;
    a  = real'(s.phi) + $floor(real'(int'(s.r) * (2*c - 32) * 7) / 64.0);
    b  = real'(s.phi) + $floor(real'(int'(s.r) * (2*c - 30) * 7) / 64.0);
    lo = (a < b) ? a : b;
    hi = (a < b) ? b : a;
    return (hi >= 64.0 * p) && (lo < 64.0 * (p + 1));
  endfunction

  task automatic build_expected(stub_t st[$]);
    for (int c = 0; c < 32; c++)
      for (int p = 0; p < 64; p++) begin
        bit [7:0] m;
        int n;
        m = '0;
        foreach (st[i]) if (ref_hit(st[i], c, p)) m[st[i].layer] = 1'b1;
        n = $countones(m);
        if (n >= MINL) begin
          ht_beat_t b;
          b = '0; b.kind = HT_HDR; b.qbin = 5'(c); b.pbin = 6'(p);
          expq.push_back(b);
          exp_cand++;
          foreach (st[i]) if (ref_hit(st[i], c, p)) begin
            b.kind = HT_STUB; b.stub = st[i];
            expq.push_back(b);
          end
        end
      end
    begin
      ht_beat_t b;
      b = '0; b.kind = HT_EOE; b.qbin = 5'd31;
      expq.push_back(b);
    end
  endtask

  always @(posedge clk) if (!rst && out_ready && out_beat.kind != HT_NONE) begin
    ht_beat_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL: unexpected beat %p", out_beat); end
    else begin
      e = expq.pop_front();
      if (out_beat.kind != e.kind ||
          (e.kind != HT_EOE && (out_beat.qbin != e.qbin || out_beat.pbin != e.pbin)) ||
          (e.kind == HT_STUB && out_beat.stub != e.stub)) begin
        failures++;
        $display("FAIL: got %s q%0d p%0d exp %s q%0d p%0d", out_beat.kind.name(), out_beat.qbin,
                 out_beat.pbin, e.kind.name(), e.qbin, e.pbin);
      end
    end
  end

  always @(posedge clk) out_ready <= ($urandom_range(0, 4) != 0);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(stub_beat_t b);
    in_beat = b;
    #1;
    while (!in_ready) begin
      stalls++;
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    in_beat = '0;
  endtask

  initial begin
    in_beat = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    for (int ev = 0; ev < 4; ev++) begin
      stub_t st[$], all[$];
      int ntrk, nnoise;
      st.delete(); all.delete();
      ntrk   = (ev == 3) ? 8 : 1 + ev;
      nnoise = (ev == 3) ? 30 : 8;
      for (int t = 0; t < ntrk; t++) begin
        real phi0, qv;
        qv   = real'($urandom_range(0, 5800)) / 100.0 - 29.0;
        phi0 = real'($urandom_range(300, 3800));
        for (int l = 0; l < 6; l++) begin
          stub_t s;
          s = '0;
          s.r = 12'(RAD[l]);
          s.phi = 14'(int'(phi0 - real'(RAD[l]) * qv * 7.0 / 64.0));
          s.layer = 3'(l);
          s.ps = (l < 3);
          all.push_back(s);
        end
      end
      for (int i = 0; i < nnoise; i++) begin
        stub_t s;
        int l;
        l = $urandom_range(0, 5);
        s = '0; s.r = 12'(RAD[l]); s.layer = 3'(l); s.phi = 14'($urandom_range(0, 4095));
        all.insert($urandom_range(0, all.size()), s);
      end
      foreach (all[i]) begin
        if (i < MAXS) st.push_back(all[i]); else exp_trunc++;
      end
      build_expected(st);
      foreach (all[i]) begin
        stub_beat_t b;
        b = '0; b.valid = 1; b.stub = all[i];
        send(b);
      end
      begin
        stub_beat_t b;
        b = '0; b.eoe = 1;
        send(b);
      end
    end
    // Wait for the last event to drain.
    begin
      int n;
      n = 0;
      while (expq.size() != 0 && n < 100000) begin @(negedge clk); n++; end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d beats missing", expq.size()); end
    checks++;
    if (int'(n_trunc) != exp_trunc || int'(n_cand) != exp_cand) begin
      failures++; $display("FAIL: trunc %0d cand %0d exp %0d %0d", n_trunc, n_cand, exp_trunc, exp_cand);
    end
    checks++;
    if (stalls == 0 || exp_trunc == 0) begin failures++; $display("FAIL: no stall or no truncation"); end
    $display("candidates %0d truncated %0d stall clocks %0d", exp_cand, exp_trunc, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
