// capsacc_softmax: softmax of an n-element vector. The paper's datapath: an
// exponential look-up table with an 8-bit input, an adder and Exp Reg
// accumulating the sum, and a divider of each exponential by the sum. The
// exponential output feeds both the adder and the divider, so the vector is
// presented twice: phase 0 (n cycles) accumulates, phase 1 (n cycles) divides;
// the whole vector takes 2n cycles as in the paper.
// Formats (this design's choice): input signed Q3.4; exponential unsigned Q8.8
// saturated to 16 bits, rom[x] = round(256*exp(x/16)); output signed Q0.7,
// out = min(127, floor(128*e/sum)), 0 when the sum is 0.
// Timing: each phase-1 input gives a registered output one cycle later. The
// unit counts the phases itself: the first n valid inputs are phase 0.
module capsacc_softmax #(
  parameter int unsigned IN_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [IN_W-1:0] in_x,
  input  logic [4:0]            n,
  output logic                  out_valid,
  output logic signed [7:0]     out_c
);
  // rom[i] = round(256*exp(x/16)) with x = i read as a signed 8-bit value,
  // saturated to 16'hFFFF. Computed in integers: exp(x/256) by a 14-term
  // Taylor series in Q30, then squared four times in Q24 (exp(x/16) =
  // exp(x/256)^16). This rounds to the same table as exact arithmetic.
  function automatic logic [15:0] exp_entry(input int i);
    longint y, term, s, v, r;
    int xi;
    xi = (i >= 128) ? i - 256 : i;
    y = longint'(xi) <<< 22;
    term = 64'sd1 <<< 30;
    s = term;
    for (int k = 1; k < 15; k++) begin
      term = (term * y) >>> 30;
      term = term / longint'(k);
      s = s + term;
    end
    v = s >>> 6;
    for (int k = 0; k < 4; k++) v = (v * v) >>> 24;
    r = (v + (64'sd1 <<< 15)) >>> 16;
    return (r > 65535) ? 16'hFFFF : 16'(r);
  endfunction

  logic [15:0] rom [256];
  initial begin
    for (int i = 0; i < 256; i++) rom[i] = exp_entry(i);
  end

  if (IN_W != 8) begin : g_bad_width
    $error("capsacc_softmax: the exponential table is built for IN_W = 8");
  end

  logic [15:0] e;
  logic [19:0] exp_reg;   // Exp Reg
  logic [4:0]  cnt;
  logic        phase;
  logic [22:0] q;

  assign e = rom[$unsigned(in_x)];
  assign q = (exp_reg == 0) ? 23'd0 : ({e, 7'd0} / 23'(exp_reg));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exp_reg <= '0; cnt <= '0; phase <= 1'b0; out_valid <= 1'b0; out_c <= '0;
    end else begin
      out_valid <= in_valid && phase;
      if (in_valid) begin
        if (!phase) begin
          exp_reg <= ((cnt == 0) ? 20'd0 : exp_reg) + 20'(e);
        end else begin
          out_c <= (q > 23'd127) ? 8'sd127 : $signed(q[7:0]);
        end
        if (cnt == n - 5'd1) begin
          cnt   <= '0;
          phase <= !phase;
        end else begin
          cnt <= cnt + 5'd1;
        end
      end
    end
  end
endmodule
