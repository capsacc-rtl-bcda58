// tb_capsacc_norm: random vectors of random length (1..16), presented back to
// back with no gap. For each vector the output value is compared with the
// reference norm and out_valid must rise exactly n+1 cycles after the cycle in
// which the first element was presented.
module tb_capsacc_norm;
  import capsacc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [7:0] in_data = 0;
  logic [4:0] n = 1;
  logic out_valid;
  logic [7:0] out_norm;
  capsacc_norm dut (.*);
  int checks = 0, failures = 0;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int exp_cyc [$], exp_val [$];
  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_cyc.size() == 0) failures += 2;
    else begin
      int ec, ev;
      ec = exp_cyc.pop_front(); ev = exp_val.pop_front();
      if (cyc != ec) begin failures++; $display("norm: output at %0d expected %0d", cyc, ec); end
      if (int'(out_norm) != ev) begin failures++; $display("norm: %0d expected %0d", out_norm, ev); end
    end
  end
  initial begin
    int xs[]; int len; int big;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < 300; v++) begin
      len = $urandom_range(16, 1);
      big = $urandom_range(3);
      xs = new[len];
      for (int i = 0; i < len; i++) xs[i] = big == 0 ? $signed(8'($urandom)) : $signed(8'($urandom)) >>> $urandom_range(5, 1);
      exp_cyc.push_back(cyc + len + 1);
      exp_val.push_back(norm_ref(xs, len));
      n = 5'(len);
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_data = 8'(xs[i]);
        @(negedge clk);
      end
      in_valid = 0;
      if ($urandom_range(3) == 0) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_cyc.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
