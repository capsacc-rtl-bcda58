// tb_capsacc_conv1: the first convolution layer of the MNIST CapsuleNet on
// the full-size accelerator: a 28x28 8-bit image, 9x9 filters, stride 1,
// 20x20 outputs, 32 of the layer's 256 output channels (two passes of 16
// channels; the second reuses the data already in the Data Buffer).
// Mapping: tile k is filter row k (9 tiles of 9 array rows); data row
// k*400 + p holds the 9 image pixels under filter row k for output pixel p;
// weight row k*9 + r holds tap (k, r) of the 16 channels in its lanes. The
// accumulators sum the 9 tiles; the result is shifted, saturated and passed
// through ReLU.
// Checks: every output pixel of every channel against a direct 2-D
// convolution computed here, and the throughput the array is built for:
// during the pass the accumulators take one new column-sum row in every
// cycle, K*T = 3600 pushes in 3600 consecutive cycles.
module tb_capsacc_conv1;
  import capsacc_pkg::*;
  import capsacc_ref_pkg::*;

  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, done;
  cmd_t cmd;
  logic host_dmem_we = 0, host_wmem_we = 0, host_dmem_re = 0, host_rbuf_re = 0;
  logic [15:0] host_dmem_addr = 0, host_dmem_raddr = 0;
  logic [18:0] host_wmem_addr = 0;
  logic [127:0] host_dmem_wdata = 0, host_wmem_wdata = 0, host_dmem_rdata, host_rbuf_rdata;
  logic [10:0] host_rbuf_raddr = 0;

  capsacc_top dut (.*);

  int checks = 0, failures = 0;
  logic [127:0] dmem_m [int];
  logic [127:0] wmem_m [int];

  initial begin
    #40_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lane(input logic [127:0] row, input int i);
    return int'($signed(row[8*i +: 8]));
  endfunction
  function automatic int ulane(input logic [127:0] row, input int i);
    return int'(row[8*i +: 8]);
  endfunction

  task automatic write_dmem(input int a, input logic [127:0] v);
    @(negedge clk); host_dmem_we = 1; host_dmem_addr = 16'(a); host_dmem_wdata = v;
    @(negedge clk); host_dmem_we = 0;
    dmem_m[a] = v;
  endtask
  task automatic write_wmem(input int a, input logic [127:0] v);
    @(negedge clk); host_wmem_we = 1; host_wmem_addr = 19'(a); host_wmem_wdata = v;
    @(negedge clk); host_wmem_we = 0;
    wmem_m[a] = v;
  endtask
  task automatic read_dmem(input int a, output logic [127:0] v);
    @(negedge clk); host_dmem_re = 1; host_dmem_raddr = 16'(a);
    @(negedge clk); host_dmem_re = 0; v = host_dmem_rdata;
  endtask
  task automatic read_rbuf(input int a, output logic [127:0] v);
    @(negedge clk); host_rbuf_re = 1; host_rbuf_raddr = 11'(a);
    @(negedge clk); host_rbuf_re = 0; v = host_rbuf_rdata;
  endtask

  localparam int IMG = 28, KS = 9, OUT = IMG - KS + 1, T = OUT * OUT, SHIFT = 9;
  localparam int NCH = 32;
  int img [IMG][IMG];
  int w [NCH][KS][KS];

  // throughput monitor: pushes of the current pass and the cycles they span
  int cyc = 0, n_push = 0, first_push = -1, last_push = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.acc_push) begin
      n_push++;
      if (first_push < 0) first_push = cyc;
      last_push = cyc;
    end
  end

  initial begin
    cmd_t c;
    logic [127:0] row, got;
    int t_start, bad;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < IMG; y++) for (int x = 0; x < IMG; x++) img[y][x] = int'($urandom_range(255)) - 128;
    for (int ch = 0; ch < NCH; ch++) for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++)
      w[ch][ky][kx] = int'($urandom_range(255)) - 128;
    // unrolled windows: data row k*T + p, lane r = img[y+k][x+r]
    for (int k = 0; k < KS; k++)
      for (int p = 0; p < T; p++) begin
        row = '0;
        for (int r = 0; r < KS; r++) row[8*r +: 8] = 8'(img[p / OUT + k][p % OUT + r]);
        write_dmem(k * T + p, row);
      end
    // weights: group g at rows g*81 + k*9 + r, lane c = channel g*16 + c
    for (int g = 0; g < NCH / 16; g++)
      for (int k = 0; k < KS; k++)
        for (int r = 0; r < KS; r++) begin
          row = '0;
          for (int cc = 0; cc < 16; cc++) row[8*cc +: 8] = 8'(w[g*16 + cc][k][r]);
          write_wmem(g * 81 + k * KS + r, row);
        end
    for (int g = 0; g < NCH / 16; g++) begin
      c = '0;
      c.wsrc = WSRC_WBUF; c.w_addr = 19'(g * 81); c.d_addr = 16'd0; c.d_reuse = (g != 0);
      c.n_rows = 5'(KS); c.n_vec = 10'(T); c.n_tiles = 5'(KS); c.acc = 1'b1;
      c.act = ACT_RELU; c.shift = 5'(SHIFT); c.vec_len = 5'd1; c.dst = DST_DMEM;
      c.o_addr = 16'(8000 + g * T);
      n_push = 0; first_push = -1; last_push = -1;
      @(negedge clk); cmd = c; cmd_valid = 1; t_start = cyc;
      @(negedge clk); cmd_valid = 0;
      wait (done); @(negedge clk);
      $display("conv1 group %0d: pass took %0d cycles", g, cyc - t_start);
      checks++;
      if (n_push != KS * T) begin failures++; $display("pushes %0d, expected %0d", n_push, KS * T); end
      checks++;
      if (last_push - first_push + 1 != KS * T) begin
        failures++; $display("pushes spread over %0d cycles, expected %0d", last_push - first_push + 1, KS * T);
      end
      bad = 0;
      for (int p = 0; p < T; p++) begin
        read_dmem(8000 + g * T + p, got);
        for (int cc = 0; cc < 16; cc++) begin
          longint s; int e;
          s = 0;
          for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++)
            s += longint'(img[p / OUT + ky][p % OUT + kx]) * w[g*16 + cc][ky][kx];
          e = reduce(s, SHIFT);
          if (e < 0) e = 0;
          checks++;
          if (ulane(got, cc) != e) begin
            failures++; bad++;
            if (bad < 5) $display("group %0d pixel %0d channel %0d: got %0d expected %0d", g, p, cc, ulane(got, cc), e);
          end
        end
      end
      $display("conv1 group %0d: %0d of %0d outputs wrong", g, bad, 16 * T);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
