// tb_dup_removal: self-checking test of dup_removal.
//
// Drives random fitted tracks, some whose fitted parameters lie in their own
// Hough cell and some just outside it (a neighbouring column or row, or off
// the array), plus end-of-event beats, with random back-pressure on the
// output. The expected keep/remove decision is worked out with real-number
// arithmetic from the cell definition (column c spans q/pT column values
// [2c-32, 2c-30), row p spans phi [64p, 64p+64)). Checks the output order and
// contents, the one-clock latency and the kept/removed counters.
module tb_dup_removal;
  import tmtt_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  track_beat_t in_beat, out_beat;
  logic in_ready, out_ready;
  logic [15:0] n_kept, n_removed;
  int checks = 0, failures = 0;

  dup_removal dut (.*);

  track_beat_t expq[$];
  int exp_kept = 0, exp_removed = 0;

  function automatic bit ref_keep(track_t t);
    real qv, ph;
    int c, p;
    qv = real'(t.qv) / 16.0;
    ph = real'(t.phi0);
    c  = int'($floor((qv + 32.0) / 2.0));
    p  = int'($floor(ph / 64.0));
    return c == int'(t.qbin) && p == int'(t.pbin) && c >= 0 && c < 32 && p >= 0 && p < 64;
  endfunction

  // Output checker.
  int sent_cycle[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst && out_ready && (out_beat.valid || out_beat.eoe)) begin
    track_beat_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL: unexpected output");
    end else begin
      e = expq.pop_front();
      if (out_beat !== e) begin
        failures++;
        $display("FAIL: got %p exp %p", out_beat, e);
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_beat = '0;
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    // Latency check: one beat with output always ready.
    @(negedge clk);
    in_beat = '0;
    in_beat.valid = 1;
    in_beat.trk.qbin = 5; in_beat.trk.pbin = 10;
    in_beat.trk.qv = 12'((2*5-31)*16); in_beat.trk.phi0 = 16'(10*64+5);
    expq.push_back(in_beat); exp_kept++;
    @(negedge clk);
    in_beat = '0;
    checks++;
    if (!out_beat.valid || out_beat.trk.pbin != 10) begin
      failures++; $display("FAIL: latency is not one clock");
    end
    @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      track_beat_t b;
      b = '0;
      if (i % 37 == 36) b.eoe = 1;
      else begin
        int c, p, dq, dp;
        b.valid = 1;
        c = $urandom_range(0, 31); p = $urandom_range(0, 63);
        b.trk.qbin = 5'(c); b.trk.pbin = 6'(p);
        dq = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 4)) - 2 : 0;
        dp = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 4)) - 2 : 0;
        b.trk.qv   = 12'((2*(c+dq) - 32) * 16 + int'($urandom_range(0, 31)));
        b.trk.phi0 = 16'((p+dp) * 64 + int'($urandom_range(0, 63)));
        b.trk.nstubs = 4'($urandom_range(4, 6));
      end
      in_beat = b;
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      while (!in_ready) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
      end
      begin
        track_beat_t e;
        e = b;
        if (b.valid) begin
          e.valid = ref_keep(b.trk);
          if (e.valid) exp_kept++; else exp_removed++;
        end
        if (e.valid || e.eoe) expq.push_back(e);
      end
      @(negedge clk);
    end
    in_beat = '0;
    out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    checks++;
    if (int'(n_kept) != exp_kept || int'(n_removed) != exp_removed) begin
      failures++; $display("FAIL: counters %0d/%0d exp %0d/%0d", n_kept, n_removed, exp_kept, exp_removed);
    end
    $display("kept %0d removed %0d", exp_kept, exp_removed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
