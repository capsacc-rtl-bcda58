// tb_capsacc_classcaps: the ClassCaps layer and one routing step of the
// MNIST CapsuleNet on the full-size accelerator, for NI = 32 of the layer's
// 1152 input capsules (8-D) and all 10 output capsules (16-D).
//  1. Predictions u_hat(j|i) = W(ij) u(i): one pass per input capsule with
//     the horizontal feedback: u(i) is read once from the Data Buffer and
//     re-injected for the other 9 weight tiles (8 rows, T = 1, K = 10).
//  2. Coupling coefficients c(i,j) are written into the Routing Buffer by a
//     pass that multiplies them by a scaled identity (row i, lane j).
//  3. Sums s_j = sum_i c(i,j) u_hat(j|i) with the coefficients from the
//     Routing Buffer as weights (16 input capsules per tile, lane j) and the
//     160 (j, dimension) prediction components as data vectors; the
//     reduction over the 32 capsules is split over two chained passes (keep,
//     then cont); Squash over the 16 dimensions writes v_j to the Routing
//     Buffer. Only lane j of the vectors of class j is used.
//  4. Agreements a(i,j) = u_hat(j|i) . v_j with the squashed v_j read from
//     the Routing Buffer as weights (one tile per class, T = NI).
//  5. Softmax over the 10 agreements of each input capsule: a pass with a
//     one-tap identity weight routes them to column 0 in sequence.
// The host re-lays out the data between the steps (predictions into rows of
// 16 capsules, agreements into one sequence per capsule). Every result
// is checked against values computed here from the integer inputs, and the
// feedback pass is checked to read the Data Buffer once per capsule.
module tb_capsacc_classcaps;
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

  localparam int NI = 32, NJ = 10, DI = 8, DO = 16;
  localparam int SH_U = 6;   // reduction shift of the predictions
  localparam int SH_S = 8;   // reduction shift of the sums
  int u [NI][DI];
  int W [NI][NJ][DO][DI];
  int uh [NI][NJ][DO];       // 8-bit predictions as the accelerator stores them
  int cc [NI][NJ];
  int vj [NJ][DO];
  int agr [NI][NJ];
  localparam int SH_A = 7;   // reduction shift of the agreements

  int n_dbuf_reads = 0;
  always @(posedge clk) if (dut.dbuf_re) n_dbuf_reads++;

  task automatic run(input cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    wait (done); @(negedge clk);
  endtask

  initial begin
    cmd_t c;
    logic [127:0] row, got;
    int bad, nrm, x8 [DO], e, reads0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) for (int r = 0; r < DI; r++) u[i][r] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) for (int d = 0; d < DO; d++) for (int r = 0; r < DI; r++)
      W[i][j][d][r] = int'($urandom_range(63)) - 32;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NJ; j++) cc[i][j] = int'($urandom_range(24));

    // ---- 1. predictions, one feedback pass per input capsule ----
    for (int i = 0; i < NI; i++) begin
      row = '0;
      for (int r = 0; r < DI; r++) row[8*r +: 8] = 8'(u[i][r]);
      write_dmem(i, row);
      for (int j = 0; j < NJ; j++) for (int r = 0; r < DI; r++) begin
        row = '0;
        for (int d = 0; d < DO; d++) row[8*d +: 8] = 8'(W[i][j][d][r]);
        write_wmem(i * NJ * DI + j * DI + r, row);
      end
    end
    bad = 0;
    for (int i = 0; i < NI; i++) begin
      c = '0;
      c.wsrc = WSRC_WBUF; c.w_addr = 19'(i * NJ * DI); c.d_addr = 16'(i); c.fb = 1'b1;
      c.n_rows = 5'(DI); c.n_vec = 10'd1; c.n_tiles = 5'(NJ); c.acc = 1'b0;
      c.act = ACT_NONE; c.shift = 5'(SH_U); c.vec_len = 5'd1; c.dst = DST_DMEM; c.o_addr = 16'(1000 + i * NJ);
      reads0 = n_dbuf_reads;
      run(c);
      checks++;
      if (n_dbuf_reads - reads0 != 1) begin failures++; $display("capsule %0d: %0d Data Buffer reads", i, n_dbuf_reads - reads0); end
      for (int j = 0; j < NJ; j++) begin
        read_dmem(1000 + i * NJ + j, got);
        for (int d = 0; d < DO; d++) begin
          longint s; s = 0;
          for (int r = 0; r < DI; r++) s += longint'(W[i][j][d][r]) * u[i][r];
          uh[i][j][d] = reduce(s, SH_U);
          checks++;
          if (lane(got, d) != uh[i][j][d]) begin
            failures++; bad++;
            if (bad < 5) $display("u_hat(%0d|%0d)[%0d] got %0d expected %0d", j, i, d, lane(got, d), uh[i][j][d]);
          end
        end
      end
    end
    $display("predictions: %0d of %0d wrong", bad, NI * NJ * DO);

    // ---- 2. coupling coefficients into the Routing Buffer (x * 64 >> 6) ----
    for (int i = 0; i < NI; i++) begin
      row = '0;
      for (int j = 0; j < NJ; j++) row[8*j +: 8] = 8'(cc[i][j]);
      write_dmem(2000 + i, row);
    end
    for (int r = 0; r < 16; r++) begin
      row = '0; row[8*r +: 8] = 8'd64;
      write_wmem(10000 + r, row);
    end
    c = '0;
    c.wsrc = WSRC_WBUF; c.w_addr = 19'd10000; c.d_addr = 16'd2000;
    c.n_rows = 5'd16; c.n_vec = 10'(NI); c.n_tiles = 5'd1; c.acc = 1'b1;
    c.act = ACT_NONE; c.shift = 5'd6; c.vec_len = 5'd1; c.dst = DST_RBUF; c.o_addr = 16'd0;
    run(c);
    bad = 0;
    for (int i = 0; i < NI; i++) begin
      read_rbuf(i, got);
      for (int j = 0; j < NJ; j++) begin
        checks++;
        if (lane(got, j) != cc[i][j]) begin failures++; bad++; end
      end
    end
    $display("coupling coefficients: %0d of %0d wrong", bad, NI * NJ);

    // ---- 3. s_j and squash, two chained passes of 16 input capsules ----
    // data row 3000 + k*160 + (j*16 + d), lane r = u_hat(j | 16k + r)[d]
    for (int k = 0; k < NI / 16; k++)
      for (int t = 0; t < NJ * DO; t++) begin
        row = '0;
        for (int r = 0; r < 16; r++) row[8*r +: 8] = 8'(uh[16*k + r][t / DO][t % DO]);
        write_dmem(3000 + k * NJ * DO + t, row);
      end
    for (int k = 0; k < NI / 16; k++) begin
      c = '0;
      c.wsrc = WSRC_RBUF; c.w_addr = 19'(16 * k); c.d_addr = 16'(3000 + k * NJ * DO);
      c.n_rows = 5'd16; c.n_vec = 10'(NJ * DO); c.n_tiles = 5'd1; c.acc = 1'b1;
      c.keep = (k != NI / 16 - 1); c.cont = (k != 0);
      c.act = ACT_SQUASH; c.shift = 5'(SH_S); c.vec_len = 5'(DO); c.dst = DST_RBUF; c.o_addr = 16'd100;
      run(c);
    end
    bad = 0;
    for (int j = 0; j < NJ; j++) begin
      for (int d = 0; d < DO; d++) begin
        longint s; s = 0;
        for (int i = 0; i < NI; i++) s += longint'(cc[i][j]) * uh[i][j][d];
        x8[d] = reduce(s, SH_S);
      end
      nrm = norm_ref(x8, DO);
      for (int d = 0; d < DO; d++) begin
        read_rbuf(100 + j * DO + d, got);
        e = squash_ref(x8[d], nrm);
        checks++;
        if (lane(got, j) != e) begin
          failures++; bad++;
          if (bad < 5) $display("v_%0d[%0d] got %0d expected %0d", j, d, lane(got, j), e);
        end
      end
    end
    $display("squashed capsule outputs: %0d of %0d wrong", bad, NJ * DO);

    // ---- 4. agreements a(i,j) = u_hat(j|i) . v_j, v_j from the Routing Buffer ----
    // tile j = Routing Buffer rows 100 + 16j .. +15 (row d, lane j = v_j[d]);
    // data row 4000 + j*NI + i = u_hat(j|i); a(i,j) is lane j of output j*NI + i
    for (int j = 0; j < NJ; j++)
      for (int i = 0; i < NI; i++) begin
        row = '0;
        for (int d = 0; d < DO; d++) row[8*d +: 8] = 8'(uh[i][j][d]);
        write_dmem(4000 + j * NI + i, row);
      end
    for (int j = 0; j < NJ; j++) for (int d = 0; d < DO; d++) begin
      read_rbuf(100 + j * DO + d, got);
      vj[j][d] = lane(got, j);
    end
    c = '0;
    c.wsrc = WSRC_RBUF; c.w_addr = 19'd100; c.d_addr = 16'd4000;
    c.n_rows = 5'(DO); c.n_vec = 10'(NI); c.n_tiles = 5'(NJ); c.acc = 1'b0;
    c.act = ACT_NONE; c.shift = 5'(SH_A); c.vec_len = 5'd1; c.dst = DST_DMEM; c.o_addr = 16'd5000;
    run(c);
    bad = 0;
    for (int j = 0; j < NJ; j++)
      for (int i = 0; i < NI; i++) begin
        longint s; s = 0;
        for (int d = 0; d < DO; d++) s += longint'(uh[i][j][d]) * vj[j][d];
        agr[i][j] = reduce(s, SH_A);
        read_dmem(5000 + j * NI + i, got);
        checks++;
        if (lane(got, j) != agr[i][j]) begin
          failures++; bad++;
          if (bad < 5) $display("a(%0d,%0d) got %0d expected %0d", i, j, lane(got, j), agr[i][j]);
        end
      end
    $display("agreements: %0d of %0d wrong", bad, NI * NJ);

    // ---- 5. softmax over j: data row 6000 + i*NJ + j, lane 0 = b(i,j) = a(i,j);
    // a one-tap identity weight sends lane 0 to column 0, whose 10
    // consecutive outputs are the softmax of one capsule's agreements ----
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NJ; j++) begin
        row = '0; row[7:0] = 8'(agr[i][j]);
        write_dmem(6000 + i * NJ + j, row);
      end
    c = '0;
    c.wsrc = WSRC_WBUF; c.w_addr = 19'd10000; c.d_addr = 16'd6000;
    c.n_rows = 5'd1; c.n_vec = 10'(NI * NJ); c.n_tiles = 5'd1; c.acc = 1'b1;
    c.act = ACT_SOFTMAX; c.shift = 5'd6; c.vec_len = 5'(NJ); c.dst = DST_DMEM; c.o_addr = 16'd7000;
    run(c);
    bad = 0;
    for (int i = 0; i < NI; i++) begin
      int bs [];
      bs = new[NJ];
      for (int j = 0; j < NJ; j++) bs[j] = agr[i][j];
      for (int j = 0; j < NJ; j++) begin
        read_dmem(7000 + i * NJ + j, got);
        e = softmax_ref(bs, NJ, j);
        checks++;
        if (lane(got, 0) != e) begin
          failures++; bad++;
          if (bad < 5) $display("c(%0d,%0d) got %0d expected %0d", i, j, lane(got, 0), e);
        end
      end
    end
    $display("softmax coupling coefficients: %0d of %0d wrong", bad, NI * NJ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
