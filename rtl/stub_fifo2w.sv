// stub_fifo2w: stub-beat FIFO with two write ports and one valid/ready read
// port, used by the Geometric Processor for each sub-region output, where the
// two input nonant links may both deliver a stub for the same sub-region in
// the same clock.
//
// Both writes of a clock are stored in port order (wr0 first). The writer must
// check `free` (entries still empty) before writing; writing into a full FIFO
// is an error caught by an assertion. The read side shows the oldest entry on
// rd_beat with rd_valid and pops it when rd_ready is high. Storage is a
// register array; DEPTH must be a power of two.
module stub_fifo2w
  import tmtt_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       wr0,
  input  stub_beat_t wd0,
  input  logic       wr1,
  input  stub_beat_t wd1,
  output logic [$clog2(DEPTH):0] free,
  output logic       rd_valid,
  output stub_beat_t rd_beat,
  input  logic       rd_ready
);
  localparam int AW = $clog2(DEPTH);

  stub_beat_t mem [DEPTH];
  logic [AW:0] wptr, rptr, count;
  logic        pop;
  logic [1:0]  npush;

  assign pop      = rd_valid && rd_ready;
  assign npush    = 2'(wr0) + 2'(wr1);
  assign count    = wptr - rptr;
  assign free     = (AW+1)'(DEPTH) - count;
  assign rd_valid = (count != 0);
  assign rd_beat  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (wr0 && wr1) begin
        mem[wptr[AW-1:0]]          <= wd0;
        mem[AW'(wptr[AW-1:0] + 1)] <= wd1;
      end else if (wr0) begin
        mem[wptr[AW-1:0]] <= wd0;
      end else if (wr1) begin
        mem[wptr[AW-1:0]] <= wd1;
      end
      wptr <= wptr + (AW+1)'(npush);
      if (pop) rptr <= rptr + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) (32'(npush) <= 32'(free)))
    else $error("stub_fifo2w: write into full FIFO");

endmodule
