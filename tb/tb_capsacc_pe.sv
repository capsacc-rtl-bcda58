// tb_capsacc_pe: drives one processing element with random operands and
// checks every cycle against a cycle model: Data Reg and swap flag forward by
// one cycle, Weight1 shifts on w_shift, Weight2 loads Weight1 on swap, and
// P.Sum Reg = previous Data Reg * Weight2 + psum_in (one result per cycle).
module tb_capsacc_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0] data_in = 0, weight_in = 0, data_out, weight_out;
  logic swap_in = 0, w_shift = 0, swap_out;
  logic signed [24:0] psum_in = 0, psum_out;
  capsacc_pe dut (.*);
  int checks = 0, failures = 0;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int m_d = 0, m_w1 = 0, m_w2 = 0, m_s = 0; bit m_sw = 0;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      data_in = 8'($urandom); weight_in = 8'($urandom);
      swap_in = ($urandom_range(3) == 0); w_shift = $urandom_range(1);
      psum_in = 25'($signed(21'($urandom)));
      @(posedge clk);
      // model update at this edge
      begin
        int nd, nw1, nw2, ns;
        nd = data_in; nw1 = w_shift ? weight_in : m_w1; nw2 = swap_in ? m_w1 : m_w2;
        ns = int'(psum_in) + m_d * m_w2;
        m_d = nd; m_w1 = nw1; m_w2 = nw2; m_s = ns; m_sw = swap_in;
      end
      #1;
      checks++;
      if (data_out !== 8'(m_d) || weight_out !== 8'(m_w1) || swap_out !== m_sw ||
          psum_out !== 25'(m_s)) begin
        failures++;
        if (failures < 5) $display("cyc %0d: got d=%0d w=%0d s=%0d exp d=%0d w=%0d s=%0d", i,
                                   data_out, weight_out, psum_out, m_d, m_w1, m_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
