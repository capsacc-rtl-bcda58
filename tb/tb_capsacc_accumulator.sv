// tb_capsacc_accumulator: fills the FIFO with one pass of random sums, adds
// three more passes (push with acc=1 plus pop), then drains it; checks the
// head against a queue model on every pop and the final sums.
module tb_capsacc_accumulator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, acc = 0, pop = 0;
  logic signed [24:0] din = 0, head;
  logic [9:0] count;
  capsacc_accumulator #(.DEPTH(512)) dut (.*);
  int checks = 0, failures = 0;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint q [$];
  initial begin
    localparam int T = 400;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        din = 25'($signed(20'($urandom)));
        push = 1; acc = (pass > 0); pop = (pass > 0);
        if (pass > 0) begin
          longint h; h = q.pop_front();
          checks++;
          if (head !== 25'(h)) failures++;
          q.push_back(h + din);
        end else q.push_back(din);
      end
      @(negedge clk); push = 0; acc = 0; pop = 0;
      checks++;
      if (count != 10'(T)) failures++;
    end
    for (int t = 0; t < T; t++) begin
      longint h;
      @(negedge clk); pop = 1;
      h = q.pop_front();
      checks++;
      if (head !== 25'(h)) failures++;
    end
    @(negedge clk); pop = 0;
    checks++;
    if (count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
