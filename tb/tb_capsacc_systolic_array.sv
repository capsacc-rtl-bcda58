// tb_capsacc_systolic_array: loads a random weight tile into a 16x16 array
// (16 shifts, last row first, then a swap flag that follows the data), feeds
// skewed random data vectors and checks each column's bottom sum against a
// matrix-vector product, and the cycle at which it appears (ROWS+c+1 after the
// vector's row-0 input cycle). A second tile is then loaded while the first
// one is still in use, to check the swap wave.
module tb_capsacc_systolic_array;
  localparam int R = 16, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0] data_in [R], weight_in [C], data_out [R];
  logic swap_in [R], w_shift [C];
  logic signed [24:0] psum_out [C];
  capsacc_systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int W [2][R][C];
  int D [2][8][R];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // stimulus schedule (cycle -> inputs), computed up front
  localparam int NT = 8;            // vectors per tile
  localparam int T0 = R;            // first tile streams from this cycle
  localparam int P  = 2 * R;        // tile period
  initial begin
    foreach (W[k, r, c]) W[k][r][c] = int'($urandom_range(255)) - 128;
    foreach (D[k, t, r]) D[k][t][r] = int'($urandom_range(255)) - 128;
    for (int r = 0; r < R; r++) begin data_in[r] = 0; swap_in[r] = 0; end
    for (int c = 0; c < C; c++) begin weight_in[c] = 0; w_shift[c] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
  end

  // drive at negedge according to the cycle count (cycle counted from reset release)
  int base = -1;
  always @(negedge clk) if (rst_n) begin
    int x;
    if (base < 0) base = cyc;
    x = cyc - base;
    for (int c = 0; c < C; c++) begin
      // tile k shifts in cycles [k*P + c, k*P + c + R), row R-1 first
      int k, s; k = (x - c) / P; s = (x - c) % P;
      w_shift[c] = 0; weight_in[c] = 0;
      if (x - c >= 0 && k < 2 && s < R) begin
        w_shift[c] = 1; weight_in[c] = 8'(W[k][R-1-s][c]);
      end
    end
    for (int r = 0; r < R; r++) begin
      int k, t; k = (x - r - T0) / P; t = (x - r - T0) % P;
      data_in[r] = 0; swap_in[r] = 0;
      if (x - r - T0 >= 0 && k < 2 && t < NT) begin
        data_in[r] = 8'(D[k][t][r]); swap_in[r] = (t == 0);
      end
    end
  end

  // check bottom outputs
  always @(negedge clk) if (rst_n && base >= 0) begin
    int x;
    x = cyc - base;
    for (int c = 0; c < C; c++) begin
      // vector t of tile k enters row 0 at T0 + k*P + t (+c for column c) and
      // leaves column c at that cycle + R + 1 (sampled here one cycle later)
      int y, k, t, e;
      y = x - c - R - 1 - T0; k = y / P; t = y % P;
      if (y >= 0 && k < 2 && t < NT) begin
        e = 0;
        for (int r = 0; r < R; r++) e += W[k][r][c] * D[k][t][r];
        checks++;
        if (psum_out[c] !== 25'(e)) begin
          failures++;
          if (failures < 5) $display("x=%0d col %0d tile %0d vec %0d: got %0d exp %0d", x, c, k, t, psum_out[c], e);
        end
      end
    end
    if (x == T0 + 2 * P + R + C + 4) begin
      if (checks != 2 * NT * C) begin failures++; $display("expected %0d checks", 2*NT*C); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
