// tb_capsacc_control: random pass descriptors, with a simple activation model
// behind the drain (always ready, one output per pop, or one per vector in
// Norm mode). For every pass the test checks the number and addresses of the
// fill reads, the cycle and address of every weight-row read (tile k, phase
// p at run start + k*P + p, row k*n_rows + n_rows-1-p), the cycle of every
// issued vector (run start + n_rows + k*P + t), the swap and feedback flags,
// that each accumulator push comes ROWS+COLS+2 cycles after its vector, the
// add/pop pattern, the write-back count and addresses, and the done pulse.
module tb_capsacc_control;
  import capsacc_pkg::*;
  localparam int ROWS = 16, COLS = 16, LAT = ROWS + COLS + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, done;
  cmd_t cmd, cur;
  logic wmem_re, wbuf_we, dmem_re, dbuf_we, wbuf_re, rbuf_re, wshift_q, dbuf_re, dvalid_q, dfb_q, dswap_q;
  logic [18:0] wmem_raddr;
  logic [7:0] wbuf_waddr, wbuf_raddr;
  logic [15:0] dmem_raddr, wb_addr;
  logic [12:0] dbuf_waddr, dbuf_raddr;
  logic [10:0] rbuf_raddr;
  logic acc_push, acc_add, acc_pop, act_in_valid, wb_dmem_we, wb_rbuf_we;
  logic act_in_ready = 1, act_out_valid = 0;
  capsacc_control dut (.*);
  int checks = 0, failures = 0;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("control: %s (t=%0t)", what, $time); end
  endtask

  // activation model
  int pops_seen = 0;
  always @(posedge clk) begin
    act_out_valid <= 1'b0;
    if (act_in_valid) begin
      pops_seen = pops_seen + 1;
      if (cur.act != ACT_NORM || pops_seen % int'(cur.vec_len) == 0) act_out_valid <= 1'b1;
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cmd_t c; int K, R, T, P, t_run, nw, nd, nwe, ndv, npush, npopd, nwb, naddp, nswap, nfb, t_issue [$], t_w;
    bit got_done; int fill_w, fill_d, exp_pops, exp_outs;
    cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 60; pass++) begin
      c = '0;
      c.fb = ($urandom_range(3) == 0);
      R = $urandom_range(c.fb ? 8 : 16, 1);
      T = c.fb ? $urandom_range(17, 1) : $urandom_range(40, 1);
      K = $urandom_range(c.fb ? 10 : 6, 1);
      c.n_rows = 5'(R); c.n_vec = 10'(T); c.n_tiles = 5'(K);
      c.wsrc = wsrc_e'($urandom_range(1));
      c.w_reuse = ($urandom_range(3) == 0);
      c.d_reuse = ($urandom_range(3) == 0);
      c.w_addr = 19'($urandom_range(1000));
      c.d_addr = 16'($urandom_range(1000));
      c.acc = $urandom_range(1);
      c.cont = c.acc && ($urandom_range(2) == 0);
      c.keep = c.acc && ($urandom_range(2) == 0);
      c.act = act_e'($urandom_range(4));
      c.vec_len = 5'(T <= 16 ? T : 1);   // Norm model: one output per vec_len pops
      c.dst = dst_e'($urandom_range(1));
      c.o_addr = 16'($urandom_range(5000));
      exp_pops = (c.acc && c.keep) ? 0 : c.acc ? T : K * T;
      exp_outs = (c.act == ACT_NORM) ? exp_pops / int'(c.vec_len) : exp_pops;
      P = c.fb ? COLS + 1 : (T > 2 * R ? T : 2 * R);
      fill_w = (c.wsrc == WSRC_WBUF && !c.w_reuse) ? K * R : 0;
      fill_d = c.d_reuse ? 0 : (c.fb ? T : K * T);
      while (!cmd_ready) @(negedge clk);
      cmd = c; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0;
      pops_seen = 0;
      nw = 0; nd = 0; nwe = 0; ndv = 0; npush = 0; npopd = 0; nwb = 0; naddp = 0; nswap = 0; nfb = 0;
      t_run = -1; got_done = 0; t_issue.delete();
      for (int guard = 0; guard < 20000 && !got_done; guard++) begin
        if (wmem_re) begin chk(wmem_raddr == c.w_addr + 19'(nw), "weight fill address"); nw++; end
        if (dmem_re) begin chk(dmem_raddr == c.d_addr + 16'(nd), "data fill address"); nd++; end
        if (wbuf_re || rbuf_re) begin
          int k, p;
          if (t_run < 0) t_run = cyc;
          chk(!(wbuf_re && rbuf_re), "one weight source");
          chk((c.wsrc == WSRC_RBUF) == rbuf_re, "weight source");
          k = nwe / R; p = nwe % R;
          chk(cyc == t_run + k * P + p, "weight read cycle");
          if (wbuf_re) chk(int'(wbuf_raddr) == k * R + R - 1 - p, "weight buffer row");
          else         chk(int'(rbuf_raddr) == (int'(c.w_addr) + k * R + R - 1 - p) % 2048, "routing buffer row");
          nwe++;
        end
        if (dvalid_q) begin
          int k, t;
          k = ndv / T; t = ndv % T;
          chk(cyc - 1 == t_run + R + k * P + t, "vector issue cycle");
          chk(dswap_q == (t == 0), "swap flag");
          chk(dfb_q == (c.fb && k != 0), "feedback flag");
          if (dswap_q) nswap++;
          if (dfb_q) nfb++;
          t_issue.push_back(cyc - 1);
          ndv++;
        end
        if (acc_push) begin
          int ti;
          ti = t_issue.size() > 0 ? t_issue.pop_front() : -1000;
          chk(cyc == ti + LAT, "accumulator push latency");
          chk(acc_add == (c.acc && (c.cont || npush >= T)), "add flag");
          if (acc_add) begin naddp++; chk(acc_pop, "add pops the head"); end
          npush++;
        end
        if (acc_pop && !acc_add) npopd++;
        if (wb_dmem_we || wb_rbuf_we) begin
          chk(wb_rbuf_we == (c.dst == DST_RBUF), "write-back target");
          chk(wb_addr == c.o_addr + 16'(nwb), "write-back address");
          nwb++;
        end
        if (done) got_done = 1;
        @(negedge clk);
      end
      chk(got_done, "done pulse");
      chk(nw == fill_w, "weight fill count");
      chk(nd == fill_d, "data fill count");
      chk(nwe == K * R, "weight read count");
      chk(ndv == K * T, "vector count");
      chk(nswap == K, "swap count");
      chk(nfb == (c.fb ? (K - 1) * T : 0), "feedback count");
      chk(npush == K * T, "push count");
      chk(naddp == (c.acc ? (c.cont ? K : K - 1) * T : 0), "add count");
      chk(npopd == exp_pops, "drain pop count");
      chk(nwb == exp_outs, $sformatf("write-back count %0d vs %0d act=%0d acc=%0d K=%0d T=%0d", nwb, exp_outs, c.act, c.acc, K, T));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
