// tb_capsacc_top: end-to-end test of the CapsAcc accelerator at its default
// parameters (16x16 array, full memory sizes). The host loads random data and
// weight rows, then runs a sequence of passes that exercise every mechanism:
// Weight and Data Buffer fills and their reuse, accumulation over tiles and
// per-tile results, a reduction split over three passes whose sums stay in
// the accumulators in between, horizontal feedback reuse (a ClassCaps-style prediction
// pass), the Routing Buffer as weight source and as destination, and all five
// activation paths (None, ReLU, Norm, Squash, Softmax). Every output row is
// read back through the host port and compared with a behavioural model of
// the pass that keeps its own copy of the memories. Each mechanism is counted
// and one that never happened counts as a failure.
module tb_capsacc_top;
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
  // behavioural copies of the memories
  logic [127:0] dmem_m [int];
  logic [127:0] wmem_m [int];
  logic [127:0] rbuf_m [int];

  // mechanism counters
  int n_wfill = 0, n_dfill = 0, n_wreuse = 0, n_dreuse = 0, n_accum = 0, n_fb = 0;
  int n_rbuf_src = 0, n_rbuf_dst = 0, n_act[5] = '{default: 0}, n_pertile = 0, n_keep = 0, n_cont = 0;
  always @(posedge clk) begin
    if (dut.wmem_re) n_wfill++;
    if (dut.dmem_re && !cmd_ready) n_dfill++;
    if (dut.acc_push && dut.acc_add) n_accum++;
    if (dut.dfb_q) n_fb++;
    if (dut.rbuf_re) n_rbuf_src++;
    if (dut.wb_rbuf_we) n_rbuf_dst++;
  end

  initial begin
    #20_000_000;
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

  function automatic logic [127:0] rand_row(input int n_lanes, input int mag);
    logic [127:0] r = '0;
    for (int i = 0; i < n_lanes; i++) r[8*i +: 8] = 8'(int'($urandom_range(2*mag)) - mag);
    return r;
  endfunction

  // model of one pass; returns the output rows in write order
  longint carry [$][N];   // sums a keep pass left in the accumulators
  function automatic void model(input cmd_t c, output logic [127:0] outs[$]);
    longint sums [$][N];
    int K = int'(c.n_tiles), T = int'(c.n_vec), R = int'(c.n_rows), V = int'(c.vec_len);
    int nres = c.acc ? T : K * T;
    longint s[N];
    int x8 [][N];
    outs = {};
    sums = {};
    for (int q = 0; q < nres; q++) begin
      for (int col = 0; col < N; col++) s[col] = (c.acc && c.cont) ? carry[q][col] : 0;
      for (int k = 0; k < K; k++) begin
        int t; logic [127:0] drow, wrow;
        if (!c.acc && (q / T) != k) continue;
        t = q % T;
        drow = (c.fb) ? dmem_m[int'(c.d_addr) + t] : dmem_m[int'(c.d_addr) + k*T + t];
        for (int r = 0; r < R; r++) begin
          int wa = k*R + r;
          wrow = (c.wsrc == WSRC_RBUF) ? rbuf_m[int'(c.w_addr) + wa] : wmem_m[int'(c.w_addr) + wa];
          for (int col = 0; col < N; col++) s[col] += longint'(lane(drow, r)) * lane(wrow, col);
        end
      end
      sums.push_back(s);
    end
    if (c.acc && c.keep) begin
      carry = sums;
      return;
    end
    x8 = new[nres];
    for (int q = 0; q < nres; q++)
      for (int col = 0; col < N; col++) x8[q][col] = reduce(sums[q][col], int'(c.shift));
    if (c.act == ACT_NONE || c.act == ACT_RELU) begin
      for (int q = 0; q < nres; q++) begin
        logic [127:0] o = '0;
        for (int col = 0; col < N; col++)
          o[8*col +: 8] = 8'((c.act == ACT_RELU && x8[q][col] < 0) ? 0 : x8[q][col]);
        outs.push_back(o);
      end
    end else begin
      for (int g = 0; g < nres / V; g++) begin
        logic [127:0] o [16];
        int nv [N];
        for (int i = 0; i < 16; i++) o[i] = '0;
        for (int col = 0; col < N; col++) begin
          int xs [] = new[V];
          for (int i = 0; i < V; i++) xs[i] = x8[g*V + i][col];
          nv[col] = norm_ref(xs, V);
          for (int i = 0; i < V; i++) begin
            int v = (c.act == ACT_SQUASH) ? squash_ref(xs[i], nv[col]) : softmax_ref(xs, V, i);
            o[i][8*col +: 8] = 8'(v);
          end
          o[0][8*col +: 8] = (c.act == ACT_NORM) ? 8'(nv[col]) : o[0][8*col +: 8];
        end
        if (c.act == ACT_NORM) outs.push_back(o[0]);
        else for (int i = 0; i < V; i++) outs.push_back(o[i]);
      end
    end
  endfunction

  task automatic run_pass(input string name, input cmd_t c);
    logic [127:0] exp_rows [$];
    logic [127:0] got;
    int bad = 0;
    model(c, exp_rows);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    wait (done); @(negedge clk);
    n_act[int'(c.act)]++;
    if (c.w_reuse) n_wreuse++;
    if (c.d_reuse) n_dreuse++;
    if (!c.acc && c.n_tiles > 1) n_pertile++;
    if (c.acc && c.keep) n_keep++;
    if (c.acc && c.cont) n_cont++;
    foreach (exp_rows[i]) begin
      if (c.dst == DST_DMEM) read_dmem(int'(c.o_addr) + i, got);
      else                   read_rbuf(int'(c.o_addr) + i, got);
      checks++;
      if (got !== exp_rows[i]) begin
        failures++; bad++;
        if (bad < 4) $display("%s: row %0d got %h exp %h", name, i, got, exp_rows[i]);
      end
      if (c.dst == DST_DMEM) dmem_m[int'(c.o_addr) + i] = exp_rows[i];
      else                   rbuf_m[int'(c.o_addr) + i] = exp_rows[i];
    end
    $display("%s: %0d rows, %0d wrong (t=%0t)", name, exp_rows.size(), bad, $time);
  endtask

  function automatic cmd_t mk(input wsrc_e wsrc, input int w_addr, input int d_addr, input bit fb,
                              input int rows, input int T, input int K, input bit acc, input act_e act,
                              input int shift, input int vlen, input dst_e dst, input int o_addr);
    cmd_t c = '0;
    c.wsrc = wsrc; c.w_addr = 19'(w_addr); c.d_addr = 16'(d_addr); c.fb = fb;
    c.n_rows = 5'(rows); c.n_vec = 10'(T); c.n_tiles = 5'(K); c.acc = acc; c.act = act;
    c.shift = 5'(shift); c.vec_len = 5'(vlen); c.dst = dst; c.o_addr = 16'(o_addr);
    return c;
  endfunction

  initial begin
    cmd_t c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // data rows 0..199, weight rows 0..299
    for (int i = 0; i < 200; i++) write_dmem(i, rand_row(16, 40));
    for (int i = 0; i < 300; i++) write_wmem(i, rand_row(16, 40));

    // 1. convolution-style pass: 3 tiles of 9 rows, 20 vectors, ReLU
    c = mk(WSRC_WBUF, 0, 0, 0, 9, 20, 3, 1, ACT_RELU, 6, 1, DST_DMEM, 1000);
    run_pass("conv_relu", c);
    // 2. same tiles and data reused, per-tile results, no activation
    c.w_reuse = 1; c.d_reuse = 1; c.acc = 0; c.act = ACT_NONE; c.o_addr = 1100;
    run_pass("reuse_pertile", c);
    // 3. prediction pass with horizontal feedback: 8-row input vector reused by 10 tiles
    c = mk(WSRC_WBUF, 100, 60, 1, 8, 1, 10, 0, ACT_NONE, 5, 1, DST_DMEM, 1200);
    run_pass("feedback", c);
    // 4. feedback with several vectors per tile
    c = mk(WSRC_WBUF, 180, 64, 1, 8, 12, 4, 0, ACT_RELU, 5, 1, DST_DMEM, 1300);
    run_pass("feedback_multi", c);
    // 5. softmax into the Routing Buffer (coupling coefficients)
    c = mk(WSRC_WBUF, 0, 100, 0, 16, 20, 2, 1, ACT_SOFTMAX, 7, 10, DST_RBUF, 0);
    run_pass("softmax_to_rbuf", c);
    // 6. weights from the Routing Buffer, squash into the Routing Buffer
    c = mk(WSRC_RBUF, 0, 140, 0, 16, 16, 1, 1, ACT_SQUASH, 6, 16, DST_RBUF, 100);
    run_pass("rbuf_squash", c);
    // 7. weights from the Routing Buffer again (squash outputs), norm into data memory
    c = mk(WSRC_RBUF, 100, 0, 0, 16, 32, 1, 1, ACT_NORM, 5, 16, DST_DMEM, 1400);
    run_pass("rbuf_norm", c);
    // 8. one reduction split over three passes: the sums stay in the
    //    accumulators between them (keep), later passes add to them (cont)
    c = mk(WSRC_WBUF, 0, 0, 0, 16, 24, 2, 1, ACT_NONE, 9, 1, DST_DMEM, 1500);
    c.keep = 1;
    run_pass("split_first", c);
    c = mk(WSRC_WBUF, 32, 48, 0, 16, 24, 3, 1, ACT_NONE, 9, 1, DST_DMEM, 1500);
    c.keep = 1; c.cont = 1;
    run_pass("split_middle", c);
    c = mk(WSRC_WBUF, 80, 120, 0, 11, 24, 1, 1, ACT_RELU, 9, 1, DST_DMEM, 1500);
    c.cont = 1;
    run_pass("split_last", c);

    if (n_wfill == 0)    begin failures++; $display("weight fill never happened"); end
    if (n_dfill == 0)    begin failures++; $display("data fill never happened"); end
    if (n_wreuse == 0)   begin failures++; $display("weight reuse never happened"); end
    if (n_dreuse == 0)   begin failures++; $display("data reuse never happened"); end
    if (n_accum == 0)    begin failures++; $display("accumulation never happened"); end
    if (n_pertile == 0)  begin failures++; $display("per-tile results never happened"); end
    if (n_keep == 0)     begin failures++; $display("sums kept across passes never happened"); end
    if (n_cont == 0)     begin failures++; $display("pass continuing kept sums never happened"); end
    if (n_fb == 0)       begin failures++; $display("feedback never happened"); end
    if (n_rbuf_src == 0) begin failures++; $display("routing buffer as source never happened"); end
    if (n_rbuf_dst == 0) begin failures++; $display("routing buffer as destination never happened"); end
    for (int a = 0; a < 5; a++)
      if (n_act[a] == 0) begin failures++; $display("activation %0d never used", a); end
    $display("mechanisms: wfill=%0d dfill=%0d wreuse=%0d dreuse=%0d accum=%0d pertile=%0d keep=%0d cont=%0d fb=%0d rbuf_src=%0d rbuf_dst=%0d act=%p",
             n_wfill, n_dfill, n_wreuse, n_dreuse, n_accum, n_pertile, n_keep, n_cont, n_fb, n_rbuf_src, n_rbuf_dst, n_act);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
