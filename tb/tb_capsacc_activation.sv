// tb_capsacc_activation: random 25-bit sums, shifts and vector lengths in
// every mode. Vectors are fed whenever in_ready is high; each output is
// compared in order with the reference (reduction, ReLU, norm, squash of each
// element with the vector's norm, softmax), and its cycle is checked: None and
// ReLU one cycle after the element, Norm n+1 cycles after the first element,
// Squash element j at n+2+j, Softmax element j at n+1+j.
module tb_capsacc_activation;
  import capsacc_pkg::*;
  import capsacc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  act_e mode = ACT_NONE;
  logic [4:0] shift = 0, vec_len = 1;
  logic in_valid = 0, in_ready, out_valid;
  logic signed [24:0] in_sum = 0;
  logic [7:0] out_data;
  capsacc_activation dut (.*);
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
      if (cyc != ec) begin failures++; if (failures < 10) $display("mode %0d: output at %0d expected %0d", mode, cyc, ec); end
      if (out_data != 8'(ev)) begin failures++; if (failures < 10) $display("mode %0d: %0d expected %0d", mode, out_data, 8'(ev)); end
    end
  end
  initial begin
    int xs[]; longint sums[]; int len, t0, nrm, m;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < 400; v++) begin
      m = $urandom_range(4);
      mode = act_e'(m);
      len = (m >= 2) ? $urandom_range(16, 1) : $urandom_range(4, 1);
      vec_len = 5'(len);
      shift = 5'($urandom_range(12));
      xs = new[len]; sums = new[len];
      for (int i = 0; i < len; i++) begin
        sums[i] = longint'($signed(25'($urandom))) >>> $urandom_range(16);
        xs[i] = reduce(sums[i], shift);
      end
      nrm = norm_ref(xs, len);
      while (!in_ready) @(negedge clk);
      t0 = cyc;
      for (int i = 0; i < len; i++) begin
        unique case (mode)
          ACT_NONE:    begin exp_cyc.push_back(t0 + i + 1); exp_val.push_back(xs[i]); end
          ACT_RELU:    begin exp_cyc.push_back(t0 + i + 1); exp_val.push_back(xs[i] < 0 ? 0 : xs[i]); end
          ACT_SQUASH:  begin exp_cyc.push_back(t0 + len + 2 + i); exp_val.push_back(squash_ref(xs[i], nrm)); end
          ACT_SOFTMAX: begin exp_cyc.push_back(t0 + len + 1 + i); exp_val.push_back(softmax_ref(xs, len, i)); end
          default: ;
        endcase
      end
      if (mode == ACT_NORM) begin exp_cyc.push_back(t0 + len + 1); exp_val.push_back(nrm); end
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_sum = 25'(sums[i]);
        @(negedge clk);
        checks++;
        if (i < len - 1 && !in_ready) failures++;   // a vector is accepted without a gap
      end
      in_valid = 0;
      // let the outputs of this mode finish before switching mode
      while (exp_cyc.size() != 0) @(negedge clk);
      while (!in_ready) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
