// tb_geometric_processor: self-checking test of the Geometric Processor.
//
// Two driver processes send random stubs on the two nonant links (random
// gaps, several events, each closed by an end-of-event beat); the 36 outputs
// are drained with random back-pressure so the FIFOs fill and the links
// stall. For every stub a reference model, written with real numbers and
// sinh() for the eta boundaries, decides which sub-regions it belongs to and
// what its phi becomes there. Stubs of link k carry layer numbers with lowest
// bit k, so each output can check the arrivals from each link in order. At
// every end-of-event beat the output must have received exactly the stubs
// expected for it in that event. Also checks the number of end-of-event beats per output,
// the duplication counter and that stalls happened.
module tb_geometric_processor;
  import tmtt_pkg::*;

  localparam int NEV = 4;
  localparam int NSTUB = 60;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  stub_beat_t in_beat [2];
  logic       in_ready[2];
  stub_beat_t out_beat[N_SUB];
  logic       out_ready[N_SUB];
  logic [15:0] n_dup, n_stall;
  int checks = 0, failures = 0;

  geometric_processor dut (.*);

  localparam int RAD [6] = '{250, 350, 500, 680, 880, 1080};
  localparam int OFFS [2] = '{-4096, 4096};

  typedef struct { stub_t s; int ev; } exp_t;
  exp_t  expq [N_SUB][2][$];
  int    n_eoe [N_SUB];
  int    exp_dup = 0;
  real   bound [19];

  initial for (int e = 0; e < 19; e++)
    bound[e] = $floor(256.0 * $sinh(-2.4 + e * 4.8 / 18.0) + 0.5) / 256.0;

  task automatic reference(int k, int ev, stub_t s);
    real phi_proc, maxs, loc, r, z;
    int  n;
    n = 0;
    r = real'(s.r); z = real'(s.z);
    phi_proc = real'(s.phi) + OFFS[k];
    maxs = $floor(r * 31.0 * 7.0 / 64.0);
    for (int e = 0; e < 18; e++)
      for (int p = 0; p < 2; p++) begin
        loc = phi_proc - (-4096.0 + 4096.0 * p);
        if (loc >= -maxs && loc < 4096.0 + maxs &&
            (z + 150.0) / r >= bound[e] && (z - 150.0) / r < bound[e+1]) begin
          exp_t o;
          o.s = s; o.s.phi = 14'(int'(loc)); o.ev = ev;
          expq[e*2+p][k].push_back(o);
          n++;
        end
      end
    if (n > 1) exp_dup++;
  endtask

  for (genvar s = 0; s < N_SUB; s++) begin : g_out
    always @(posedge clk) begin
      out_ready[s] <= ($urandom_range(0, 2) != 0);
      if (!rst && out_ready[s]) begin
        if (out_beat[s].valid) begin
          int k;
          k = int'(out_beat[s].stub.layer[0]);
          checks++;
          if (expq[s][k].size() == 0) begin
            failures++; $display("FAIL: out %0d unexpected stub from link %0d", s, k);
          end else begin
            exp_t e;
            e = expq[s][k].pop_front();
            if (out_beat[s].stub != e.s || e.ev != n_eoe[s]) begin
              failures++; $display("FAIL: out %0d got %p exp %p", s, out_beat[s].stub, e.s);
            end
          end
        end else if (out_beat[s].eoe) begin
          checks++;
          if ((expq[s][0].size() != 0 && expq[s][0][0].ev == n_eoe[s]) ||
              (expq[s][1].size() != 0 && expq[s][1][0].ev == n_eoe[s])) begin
            failures++; $display("FAIL: out %0d eoe with stubs missing", s);
          end
          n_eoe[s]++;
        end
      end
    end
  end

  initial begin
    #10000000;
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
        for (int i = 0; i < NSTUB + 1; i++) begin
          stub_beat_t b;
          b = '0;
          if (i == NSTUB) b.eoe = 1;
          else begin
            int l, rr;
            l  = $urandom_range(0, 2) * 2 + k;
            rr = RAD[$urandom_range(0, 5)];
            b.valid      = 1;
            b.stub.r     = 12'(rr);
            b.stub.layer = 3'(l);
            b.stub.ps    = (rr < 600);
            b.stub.phi   = 14'(int'($urandom_range(0, 8191)) - 4096);
            b.stub.z     = 13'(int'($urandom_range(0, 6 * rr)) - 3 * rr);
            if (int'(b.stub.z) > 4000 || int'(b.stub.z) < -4000) b.stub.z = '0;
          end
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_beat[k] = b;
          #1;
          while (!in_ready[k]) begin @(negedge clk); #1; end
          if (b.valid) reference(k, ev, b.stub);
          @(negedge clk);
          in_beat[k] = '0;
        end
      end
      done[k] = 1;
    end
  end

  initial begin
    for (int s = 0; s < N_SUB; s++) n_eoe[s] = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done[0] && done[1]);
    repeat (200) @(negedge clk);
    for (int s = 0; s < N_SUB; s++) begin
      checks++;
      if (n_eoe[s] != NEV) begin failures++; $display("FAIL: out %0d saw %0d eoe", s, n_eoe[s]); end
    end
    checks++;
    if (int'(n_dup) != exp_dup) begin failures++; $display("FAIL: n_dup %0d exp %0d", n_dup, exp_dup); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: no stall happened"); end
    $display("duplicated %0d stalled %0d", n_dup, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
