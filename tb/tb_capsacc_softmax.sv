// tb_capsacc_softmax: random vectors (length 1..16) presented twice, as the
// unit needs; each output is compared with the reference softmax, the first
// output must come n+1 cycles after the first element and the last one 2n
// cycles after it.
module tb_capsacc_softmax;
  import capsacc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [7:0] in_x = 0;
  logic [4:0] n = 1;
  logic out_valid;
  logic signed [7:0] out_c;
  capsacc_softmax dut (.*);
  int checks = 0, failures = 0;
  initial begin #4000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int exp_cyc [$], exp_val [$];
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_cyc.size() == 0) failures += 2;
    else begin
      int ec, ev;
      ec = exp_cyc.pop_front(); ev = exp_val.pop_front();
      if (cyc != ec) begin failures++; $display("softmax: output at %0d expected %0d", cyc, ec); end
      if (int'(out_c) != ev) begin failures++; $display("softmax: %0d expected %0d", out_c, ev); end
    end
  end
  initial begin
    int xs[]; int len; int t0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < 200; v++) begin
      len = $urandom_range(16, 1);
      xs = new[len];
      for (int i = 0; i < len; i++) xs[i] = $signed(8'($urandom)) >>> $urandom_range(2);
      t0 = cyc;
      for (int i = 0; i < len; i++) begin
        exp_cyc.push_back(t0 + len + 1 + i);
        exp_val.push_back(softmax_ref(xs, len, i));
      end
      n = 5'(len);
      for (int p = 0; p < 2; p++)
        for (int i = 0; i < len; i++) begin
          in_valid = 1; in_x = 8'(xs[i]);
          @(negedge clk);
        end
      in_valid = 0;
      if ($urandom_range(2) == 0) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (exp_cyc.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
