// tb_capsacc_operand_mux: random per-lane selects, lane counts and operands;
// checks the registered output (one cycle later) lane by lane, including the
// zero mask above n_lanes and the flag that travels with each lane.
module tb_capsacc_operand_mux;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel [L];
  logic [5:0] n_lanes;
  logic [7:0] a [L], b [L], y [L];
  logic [0:0] flags_in [L], flags_out [L];
  capsacc_operand_mux #(.LANES(L), .W(8), .FW(1)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [7:0] e [L]; logic [0:0] ef [L];
    n_lanes = 0;
    for (int i = 0; i < L; i++) begin sel[i] = 0; a[i] = 0; b[i] = 0; flags_in[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 500; cyc++) begin
      @(negedge clk);
      n_lanes = 6'($urandom_range(16));
      for (int i = 0; i < L; i++) begin
        sel[i] = 1'($urandom); a[i] = 8'($urandom); b[i] = 8'($urandom); flags_in[i] = 1'($urandom);
        e[i] = (i < n_lanes) ? (sel[i] ? b[i] : a[i]) : 8'd0;
        ef[i] = flags_in[i];
      end
      @(negedge clk);
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== e[i] || flags_out[i] !== ef[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
