// tb_capsacc_squash: sweeps every element value against a range of norm
// values, compares each output with the reference squash and checks that the
// output is valid exactly one cycle after the input.
module tb_capsacc_squash;
  import capsacc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [7:0] in_s = 0;
  logic [7:0] in_norm = 0;
  logic out_valid;
  logic signed [7:0] out_v;
  capsacc_squash dut (.*);
  int checks = 0, failures = 0;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int e, sv, nv;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid = (k % 7 != 3);
      sv = k < 256 * 8 ? (k % 256) - 128 : $signed(8'($urandom));
      nv = k < 256 * 8 ? (k / 256) * 36 : $urandom_range(255);
      in_s = 8'(sv); in_norm = 8'(nv);
      e = squash_ref(sv, nv);
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) failures++;
      if (in_valid) begin
        checks++;
        if (int'(out_v) != e) begin
          failures++;
          if (failures < 10) $display("squash s=%0d n=%0d got %0d expected %0d", sv, nv, out_v, e);
        end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
