// capsacc_pe: one processing element of the CapsAcc systolic array.
// Four registers as in the paper: Data Reg (holds the value coming from the
// left and forwards it right), Weight1 Reg (one stage of the vertical weight
// chain), Weight2 Reg (the weight held for reuse) and Sum Reg. Each cycle
// Sum Reg <= Data Reg * Weight2 Reg + psum_in: an 8x8-bit signed product and a
// 25-bit signed sum, one result per cycle.
// Control (this design's choice): Weight1 shifts down when w_shift is high.
// A swap flag travels right next to the data; when it arrives, Weight2 takes
// Weight1 in the same edge that latches the data, so a new weight tile takes
// effect along the same diagonal wave as the data.
// Timing: data_out/swap_out are one cycle after data_in; psum_out is one cycle
// after the Data Reg value it uses.
module capsacc_pe
  import capsacc_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned SW = SUM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] data_in,
  input  logic                 swap_in,
  input  logic signed [DW-1:0] weight_in,
  input  logic                 w_shift,
  input  logic signed [SW-1:0] psum_in,
  output logic signed [DW-1:0] data_out,
  output logic                 swap_out,
  output logic signed [DW-1:0] weight_out,
  output logic signed [SW-1:0] psum_out
);
  logic signed [DW-1:0] data_r, w1_r, w2_r;
  logic                 swap_r;
  logic signed [SW-1:0] sum_r;
  logic signed [2*DW-1:0] prod;

  assign prod = data_r * w2_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_r <= '0; swap_r <= 1'b0; w1_r <= '0; w2_r <= '0; sum_r <= '0;
    end else begin
      data_r <= data_in;
      swap_r <= swap_in;
      if (w_shift) w1_r <= weight_in;
      if (swap_in) w2_r <= w1_r;
      sum_r  <= psum_in + SW'(prod);
    end
  end

  assign data_out   = data_r;
  assign swap_out   = swap_r;
  assign weight_out = w1_r;
  assign psum_out   = sum_r;
endmodule
