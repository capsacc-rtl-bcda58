// capsacc_squash: the squashing function v = s*||s||/(1+||s||^2) (Eq. 1 of the
// CapsuleNet formulation) as a look-up table indexed by a 6-bit element and a
// 5-bit norm, giving an 8-bit output (the paper's sizes). The norm comes from
// capsacc_norm and is not recomputed here.
// Formats (this design's choice): element input signed Q3.4 whose top six bits
// (Q3.2) index the table; norm input unsigned Q4.4 whose value >>3, saturated
// to 31 (Q4.1), indexes the table; output signed Q0.7, saturated.
// Table: with s6 and n5 the two indices, rom = round(64*s6*n5 / (4+n5^2)).
// The two low bits of the element are dropped on purpose (6-bit index).
// Timing: output registered, one cycle after in_valid.
module capsacc_squash #(
  parameter int unsigned S_W   = 6,
  parameter int unsigned N_W   = 5,
  parameter int unsigned OUT_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [7:0]       in_s,
  input  logic [7:0]              in_norm,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_v
);
  localparam int unsigned LUT_N = 1 << (S_W + N_W);
  logic [OUT_W-1:0] rom [LUT_N];
  initial begin
    for (int i = 0; i < int'(LUT_N); i++) begin
      int s6, n5, num, den, q;
      s6 = i >> N_W;
      if (s6 >= (1 << (S_W-1))) s6 = s6 - (1 << S_W);
      n5 = i % (1 << N_W);
      num = 64 * s6 * n5;
      den = 4 + n5 * n5;
      // round half away from zero
      q = (num >= 0) ? (2*num + den) / (2*den) : -((-2*num + den) / (2*den));
      if (q > 127) q = 127;
      if (q < -128) q = -128;
      rom[i] = OUT_W'(q);
    end
  end

  logic [S_W-1:0] s_idx;
  logic [N_W-1:0] n_idx;
  logic [7:0]     n_sh;
  assign s_idx = in_s[7 -: S_W];
  assign n_sh  = in_norm >> 3;
  assign n_idx = (n_sh > 8'((1 << N_W) - 1)) ? N_W'((1 << N_W) - 1) : n_sh[N_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_v <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_v <= $signed(rom[{s_idx, n_idx}]);
    end
  end
endmodule
