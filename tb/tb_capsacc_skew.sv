// tb_capsacc_skew: random words into both variants of the delay lines
// (forward: lane i delayed i cycles; reverse: lane i delayed LANES-1-i) and a
// comparison with a history buffer of the inputs.
module tb_capsacc_skew;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] din [L], d_f [L], d_r [L];
  capsacc_skew #(.LANES(L), .W(8), .REVERSE(1'b0)) u_f (.clk, .rst_n, .din, .dout(d_f));
  capsacc_skew #(.LANES(L), .W(8), .REVERSE(1'b1)) u_r (.clk, .rst_n, .din, .dout(d_r));
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [7:0] hist [$][L];
  initial begin
    logic [7:0] v [L];
    for (int i = 0; i < L; i++) din[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) v[i] = 8'($urandom);
      din = v;
      hist.push_front(v);
      #1;
      for (int i = 0; i < L; i++) begin
        if (cyc >= L) begin
          checks += 2;
          if (d_f[i] !== hist[i][i]) failures++;
          if (d_r[i] !== hist[L-1-i][i]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
