// capsacc_accumulator: one per array column. A FIFO of DEPTH 25-bit partial
// sums; the multiplexer in front of it writes either the new sum from the
// array (acc=0) or that sum plus the FIFO head (acc=1), as in the paper.
// The FIFO head is the output. push writes, pop removes the head; an
// accumulate step is push with acc=1 together with pop, so the updated sum
// goes to the tail and the FIFO length is unchanged.
// Depth is this design's choice (512 >= one 20x20 Conv1 feature map).
// Timing: head is valid whenever count > 0; a pushed value is visible at the
// head the cycle after the push if the FIFO was empty.
module capsacc_accumulator
  import capsacc_pkg::*;
#(
  parameter int unsigned SW    = SUM_W,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push,
  input  logic                 acc,
  input  logic                 pop,
  input  logic signed [SW-1:0] din,
  output logic signed [SW-1:0] head,
  output logic [AW:0]          count
);
  logic signed [SW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic signed [SW-1:0] wval;

  assign head = mem[rp];
  assign wval = acc ? (din + head) : din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
  always_ff @(posedge clk) if (push) mem[wp] <= wval;

  // An accumulate step must read a valid head; never pop an empty FIFO.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (push && !pop) |-> count != (AW+1)'(DEPTH));
  a_acc_needs_head: assert property (@(posedge clk) disable iff (!rst_n) (push && acc) |-> count != 0);
endmodule
