// ht_array: r-phi Hough transform for one sub-region, as in the TMTT chain.
//
// Each stub (r, phi) defines a line phi_track = phi + r*q/pT in the Hough
// space (q/pT, phi_track). The space is divided into NQ x NPHI cells (32 x 64
// in the article). For every q/pT column the array evaluates the line at the
// column's two edges, qv = 2c - 32 and 2c - 30, and marks every cell of the
// column the line passes through (one or a few rows); all NQ columns are
// filled in parallel, so one stub is absorbed per clock. A
// cell keeps a bit mask of the layers its stubs came from, and a cell whose
// stubs cover at least MIN_LAYERS different layers is a track candidate.
//
// Operation per event (one event at a time):
//  FILL   accept stubs (in_ready high) and store them in a stub memory of
//         MAX_STUBS entries; stubs beyond that are dropped (truncation,
//         counted in n_trunc). The event ends with an eoe beat.
//  SCAN   visit the columns in order 0..NQ-1; inside a column emit every
//         candidate row, lowest first. For each candidate send a header beat
//         (HT_HDR with qbin/pbin) and then, replaying the stub memory, every
//         stored stub whose line passes through that cell (HT_STUB beats).
//  EOE    send one HT_EOE beat, then clear the array (one clock) and return
//         to FILL.
// While scanning, the input is stalled (in_ready low). The output is a
// valid/ready stream: a beat is taken when out_kind != HT_NONE and out_ready.
//
// Following the article: the 32 x 64 array, the line equation, and the 4-or-5
// stub threshold (MIN_LAYERS, default 5). This design's choices: counting
// distinct layers rather than raw stubs, serial read-out of candidates and a
// single event buffer.
module ht_array
  import tmtt_pkg::*;
#(
  parameter int MIN_LAYERS = 5,
  parameter int MAX_STUBS  = 64
) (
  input  logic       clk,
  input  logic       rst,
  input  stub_beat_t in_beat,
  output logic       in_ready,
  output ht_beat_t   out_beat,
  input  logic       out_ready,
  output logic [15:0] n_trunc,     // stubs dropped since reset
  output logic [15:0] n_cand       // candidates emitted since reset
);
  localparam int SW = $clog2(MAX_STUBS);

  typedef enum logic [2:0] {S_FILL, S_LOAD, S_PICK, S_HDR, S_STUBS, S_EOE, S_CLEAR} state_e;
  state_e state;

  logic [N_LAYERS-1:0] lmask [HT_NQ][HT_NPHI];
  stub_t               smem [MAX_STUBS];
  logic [SW:0]         nstub;
  logic [QBIN_W-1:0]   col;
  logic [PBIN_W-1:0]   row;
  logic [HT_NPHI-1:0]  pending;
  logic [SW:0]         sidx;

  // Rows crossed by a stub's line inside column c: the line is evaluated at
  // both column edges, qv = 2c-32 and 2c-30, and every row between the two
  // values is hit. Returns {inside, first row, last row}.
  function automatic logic [2*PBIN_W:0] rows_of(input stub_t s, input int c);
    int pa, pb, lo, hi;
    pa = int'(s.phi) + ht_shift(int'(s.r), col_qv(c) - 1);
    pb = int'(s.phi) + ht_shift(int'(s.r), col_qv(c) + 1);
    lo = (pa < pb) ? pa : pb;
    hi = (pa < pb) ? pb : pa;
    if (hi < 0 || lo >= (HT_NPHI << PBIN_SHIFT)) return '0;
    if (lo < 0) lo = 0;
    if (hi >= (HT_NPHI << PBIN_SHIFT)) hi = (HT_NPHI << PBIN_SHIFT) - 1;
    return {1'b1, PBIN_W'(lo >>> PBIN_SHIFT), PBIN_W'(hi >>> PBIN_SHIFT)};
  endfunction

  function automatic logic row_hit(input logic [2*PBIN_W:0] rr, input int p);
    return rr[2*PBIN_W] && p >= int'(rr[2*PBIN_W-1:PBIN_W]) && p <= int'(rr[PBIN_W-1:0]);
  endfunction

  function automatic int popcount(input logic [N_LAYERS-1:0] m);
    int n;
    n = 0;
    for (int i = 0; i < N_LAYERS; i++) n += int'(m[i]);
    return n;
  endfunction

  // Candidate rows of the current column.
  logic [HT_NPHI-1:0] cand_rows;
  always_comb
    for (int p = 0; p < HT_NPHI; p++)
      cand_rows[p] = popcount(lmask[col][p]) >= MIN_LAYERS;

  // Lowest pending row.
  logic [PBIN_W-1:0] first_row;
  always_comb begin
    first_row = '0;
    for (int p = HT_NPHI - 1; p >= 0; p--)
      if (pending[p]) first_row = PBIN_W'(p);
  end

  logic in_fire;
  assign in_ready = (state == S_FILL);
  assign in_fire  = in_ready && in_beat.valid;

  // Stub under replay and whether it belongs to the current cell.
  stub_t            rs;
  logic [2*PBIN_W:0] rrow;
  logic             rmatch;
  assign rs     = smem[sidx[SW-1:0]];
  assign rrow   = rows_of(rs, int'(col));
  assign rmatch = row_hit(rrow, int'(row));

  always_comb begin
    out_beat      = '0;
    out_beat.kind = HT_NONE;
    out_beat.qbin = col;
    out_beat.pbin = row;
    unique case (state)
      S_HDR:   out_beat.kind = HT_HDR;
      S_STUBS: if (sidx < nstub && rmatch) begin
                 out_beat.kind = HT_STUB;
                 out_beat.stub = rs;
               end
      S_EOE:   out_beat.kind = HT_EOE;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_FILL;
      nstub   <= '0;
      col     <= '0;
      row     <= '0;
      pending <= '0;
      sidx    <= '0;
      n_trunc <= '0;
      n_cand  <= '0;
      for (int c = 0; c < HT_NQ; c++)
        for (int p = 0; p < HT_NPHI; p++) lmask[c][p] <= '0;
    end else begin
      unique case (state)
        S_FILL: begin
          if (in_fire) begin
            if (nstub < (SW+1)'(MAX_STUBS)) begin
              smem[nstub[SW-1:0]] <= in_beat.stub;
              nstub <= nstub + 1'b1;
              for (int c = 0; c < HT_NQ; c++) begin
                logic [2*PBIN_W:0] rr;
                rr = rows_of(in_beat.stub, c);
                for (int p = 0; p < HT_NPHI; p++)
                  if (row_hit(rr, p)) lmask[c][p][in_beat.stub.layer] <= 1'b1;
              end
            end else begin
              n_trunc <= n_trunc + 1'b1;
            end
          end else if (in_ready && in_beat.eoe) begin
            col   <= '0;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          pending <= cand_rows;
          state   <= S_PICK;
        end
        S_PICK: begin
          if (pending != '0) begin
            row   <= first_row;
            state <= S_HDR;
          end else if (col == QBIN_W'(HT_NQ - 1)) begin
            state <= S_EOE;
          end else begin
            col   <= col + 1'b1;
            state <= S_LOAD;
          end
        end
        S_HDR: if (out_ready) begin
          n_cand <= n_cand + 1'b1;
          sidx   <= '0;
          state  <= S_STUBS;
        end
        S_STUBS: begin
          if (sidx >= nstub) begin
            pending[row] <= 1'b0;
            state        <= S_PICK;
          end else if (!rmatch || out_ready) begin
            sidx <= sidx + 1'b1;
          end
        end
        S_EOE: if (out_ready) state <= S_CLEAR;
        S_CLEAR: begin
          for (int c = 0; c < HT_NQ; c++)
            for (int p = 0; p < HT_NPHI; p++) lmask[c][p] <= '0;
          nstub <= '0;
          state <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
