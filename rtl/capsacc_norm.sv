// capsacc_norm: Euclidean norm of an n-element vector, built like a MAC whose
// multiplier is a squarer: each element is squared and added into the Square
// Reg; after the n-th element the sum goes through a square-root look-up table
// with a 12-bit input and an 8-bit output (the paper's sizes).
// Formats (this design's choice): input signed Q3.4 (value/16), squares and
// Square Reg Q.8, LUT index = sum>>4 saturated to 4095 (Q8.4), output unsigned
// Q4.4: rom[i] = min(255, round(4*sqrt(i))).
// Interface: in_valid/in_data stream, n = vector length (1..16). out_valid is a
// one-cycle pulse. Timing: the result is valid n+1 cycles after the first
// element (paper: a valid output every n+1 cycles). A new vector may start in
// the cycle after the previous vector's last element.
module capsacc_norm #(
  parameter int unsigned LUT_IN_W = 12,
  parameter int unsigned OUT_W    = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [7:0]   in_data,
  input  logic [4:0]          n,
  output logic                out_valid,
  output logic [OUT_W-1:0]    out_norm
);
  localparam int unsigned LUT_N = 1 << LUT_IN_W;
  logic [OUT_W-1:0] rom [LUT_N];
  initial begin
    for (int i = 0; i < int'(LUT_N); i++) begin
      int r;
      r = 0;
      // r = round(4*sqrt(i)) = floor(sqrt(16*i) + 0.5): largest r with (2r-1)^2 <= 64*i
      while ((2*(r+1)-1)*(2*(r+1)-1) <= 64*i) r++;
      rom[i] = (r > (1 << OUT_W) - 1) ? OUT_W'((1 << OUT_W) - 1) : OUT_W'(r);
    end
  end

  logic [19:0] sq_reg;     // Square Reg
  logic [4:0]  cnt;
  logic        done;       // Square Reg holds a complete sum this cycle
  logic [15:0] sq;
  logic [19:0] idx_full;
  logic [LUT_IN_W-1:0] idx;

  assign sq       = 16'($signed(in_data) * $signed(in_data));
  assign idx_full = sq_reg >> 4;
  assign idx      = (idx_full > 20'(LUT_N-1)) ? LUT_IN_W'(LUT_N-1) : idx_full[LUT_IN_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sq_reg <= '0; cnt <= '0; done <= 1'b0; out_valid <= 1'b0; out_norm <= '0;
    end else begin
      out_valid <= done;
      if (done) out_norm <= rom[idx];
      done <= 1'b0;
      if (in_valid) begin
        // the first element of a vector restarts the sum
        sq_reg <= ((cnt == 0) ? 20'd0 : sq_reg) + 20'(sq);
        if (cnt == n - 5'd1) begin
          cnt  <= '0;
          done <= 1'b1;
        end else begin
          cnt <= cnt + 5'd1;
        end
      end
    end
  end
endmodule
