// capsacc_skew: triangular delay lines. Lane i is delayed by i cycles
// (REVERSE=0, used to skew the array inputs) or by LANES-1-i cycles
// (REVERSE=1, used to re-align the column outputs). Lane 0 (or LANES-1) has no
// register and passes straight through. All registers reset to zero.
// Skewing is not described in the paper; it is what lock-step systolic
// operation needs.
module capsacc_skew #(
  parameter int unsigned LANES   = 16,
  parameter int unsigned W       = 8,
  parameter bit          REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din  [LANES],
  output logic [W-1:0] dout [LANES]
);
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - i) : i;
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_dly
      logic [W-1:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < int'(D); k++) sr[k] <= '0;
        end else begin
          sr[0] <= din[i];
          for (int k = 1; k < int'(D); k++) sr[k] <= sr[k-1];
        end
      end
      assign dout[i] = sr[D-1];
    end
  end
endmodule
