// tb_capsacc_sram: random writes and reads against an array model, checking
// the one-cycle read latency, read-during-write of another address and that
// the read register holds its value when re is low.
module tb_capsacc_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  capsacc_sram #(.WORDS(64), .WIDTH(32)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [31:0] m [64];
  initial begin
    logic [31:0] last;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = $urandom; m[i] = wdata;
    end
    @(negedge clk); we = 0; re = 1; raddr = 0;
    @(negedge clk); re = 0;
    last = m[0];
    for (int cyc = 0; cyc < 2000; cyc++) begin
      logic [31:0] e;
      @(negedge clk);
      re = 1'($urandom); raddr = 6'($urandom);
      we = 1'($urandom); waddr = 6'($urandom);
      if (we && waddr == raddr) we = 0;
      wdata = $urandom;
      e = re ? m[raddr] : last;
      if (we) m[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== e) failures++;
      last = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
