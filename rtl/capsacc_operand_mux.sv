// capsacc_operand_mux: one of the two multiplexers in front of the systolic
// array. Each cycle it registers, per lane, either operand a (sel[i]=0) or
// operand b (sel[i]=1); lanes at or above n_lanes are forced to zero so that
// unused array rows contribute nothing. A flag bit per lane travels with the
// selection (the swap flag on the data side, the shift enable on the weight
// side). The select is per lane because the data lanes arrive skewed.
// On the data side a = Data Buffer, b = horizontal feedback; on the weight
// side a = Weight Buffer, b = Routing Buffer (as in the paper's top-level
// figure). The output register and the lane mask are this design's choices.
// Timing: one cycle from inputs to outputs.
module capsacc_operand_mux #(
  parameter int unsigned LANES = 16,
  parameter int unsigned W     = 8,
  parameter int unsigned FW    = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sel   [LANES],
  input  logic [5:0]    n_lanes,
  input  logic [W-1:0]  a [LANES],
  input  logic [W-1:0]  b [LANES],
  input  logic [FW-1:0] flags_in [LANES],
  output logic [W-1:0]  y [LANES],
  output logic [FW-1:0] flags_out [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LANES); i++) begin
        y[i] <= '0;
        flags_out[i] <= '0;
      end
    end else begin
      for (int i = 0; i < int'(LANES); i++) begin
        y[i] <= (i < int'(n_lanes)) ? (sel[i] ? b[i] : a[i]) : '0;
        flags_out[i] <= flags_in[i];
      end
    end
  end
endmodule
