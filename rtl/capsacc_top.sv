// capsacc_top: the CapsAcc accelerator. A ROWS x COLS weight-stationary
// systolic array (16x16) is fed on the left by the data-side multiplexer
// (Data Buffer or the horizontal feedback of the array's own right-hand data
// outputs) and at the top by the weight-side multiplexer (Weight Buffer or
// Routing Buffer). Each column's sums go through an accumulator FIFO and an
// activation unit (ReLU / Norm / Squash / Softmax); the 8-bit results are
// written back to the Data Memory or to the Routing Buffer, which closes the
// routing-by-agreement loop: coupling coefficients and capsule outputs held in
// the Routing Buffer become the next pass's weights. The control unit runs one
// pass descriptor (cmd_t) at a time.
// Around the paper's blocks this design adds input skew and output de-skew
// delay lines, a register in the feedback path (loop = COLS+1 cycles), and a
// host port: the host writes the Data and Weight Memories and reads the Data
// Memory and the Routing Buffer while the accelerator is idle.
// Memory sizes follow the paper's 8 MB of on-chip memory (1 MiB data +
// 7 MiB weights); buffer sizes are this design's choices.
// Row format everywhere: lane i of a row is bits [8*i +: 8].
// Lint notes: most descriptor fields of `cur`, the control unit's dvalid_q
// and the accumulators' count outputs are not needed at this level and stay
// unconnected; rst_n is also used in assertion disable clauses, which lint
// reports as a synchronous use of the asynchronous reset.
module capsacc_top
  import capsacc_pkg::*;
#(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned DMEM_ROWS = 65536,
  parameter int unsigned WMEM_ROWS = 458752,
  parameter int unsigned DBUF_ROWS = 8192,
  parameter int unsigned WBUF_ROWS = 256,
  parameter int unsigned RBUF_ROWS = 2048,
  parameter int unsigned ACC_DEPTH = 512
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // pass descriptors
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_t                 cmd,
  output logic                 done,
  // host access (only while cmd_ready is high)
  input  logic                 host_dmem_we,
  input  logic [15:0]          host_dmem_addr,
  input  logic [8*ROWS-1:0]    host_dmem_wdata,
  input  logic                 host_wmem_we,
  input  logic [18:0]          host_wmem_addr,
  input  logic [8*COLS-1:0]    host_wmem_wdata,
  input  logic                 host_dmem_re,
  input  logic [15:0]          host_dmem_raddr,
  output logic [8*ROWS-1:0]    host_dmem_rdata,
  input  logic                 host_rbuf_re,
  input  logic [$clog2(RBUF_ROWS)-1:0] host_rbuf_raddr,
  output logic [8*COLS-1:0]    host_rbuf_rdata
);
  localparam int unsigned DMEM_AW = $clog2(DMEM_ROWS);
  localparam int unsigned WMEM_AW = $clog2(WMEM_ROWS);
  localparam int unsigned DBUF_AW = $clog2(DBUF_ROWS);
  localparam int unsigned WBUF_AW = $clog2(WBUF_ROWS);
  localparam int unsigned RBUF_AW = $clog2(RBUF_ROWS);
  localparam int unsigned ACC_AW  = $clog2(ACC_DEPTH);

  // The write-back row (COLS lanes) is stored in Data Memory rows (ROWS lanes).
  if (ROWS != COLS) begin : g_square
    $error("capsacc_top: ROWS must equal COLS");
  end

  cmd_t cur;

  // ---------------- control unit ----------------
  logic               wmem_re, wbuf_we, dmem_re, dbuf_we, wbuf_re, rbuf_re, dbuf_re;
  logic [18:0]        wmem_raddr;
  logic [15:0]        dmem_raddr;
  logic [WBUF_AW-1:0] wbuf_waddr, wbuf_raddr;
  logic [DBUF_AW-1:0] dbuf_waddr, dbuf_raddr;
  logic [RBUF_AW-1:0] rbuf_raddr;
  logic               wshift_q, dvalid_q, dfb_q, dswap_q;
  logic               acc_push, acc_add, acc_pop;
  logic               act_in_valid, act_in_ready, act_out_valid;
  logic               wb_dmem_we, wb_rbuf_we;
  logic [15:0]        wb_addr;

  capsacc_control #(.ROWS(ROWS), .COLS(COLS), .WBUF_AW(WBUF_AW), .DBUF_AW(DBUF_AW),
                    .RBUF_AW(RBUF_AW), .ACC_DEPTH(ACC_DEPTH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cur, .done,
    .wmem_re, .wmem_raddr, .wbuf_we, .wbuf_waddr, .dmem_re, .dmem_raddr, .dbuf_we, .dbuf_waddr,
    .wbuf_re, .wbuf_raddr, .rbuf_re, .rbuf_raddr, .wshift_q,
    .dbuf_re, .dbuf_raddr, .dvalid_q, .dfb_q, .dswap_q,
    .acc_push, .acc_add, .acc_pop,
    .act_in_valid, .act_in_ready, .act_out_valid, .wb_dmem_we, .wb_rbuf_we, .wb_addr
  );

  // ---------------- memories and buffers ----------------
  logic [8*ROWS-1:0] dmem_rdata, dbuf_rdata, wb_row;
  logic [8*COLS-1:0] wmem_rdata, wbuf_rdata, rbuf_rdata;
  logic [7:0]        act_out [COLS];
  logic              act_ready_c [COLS];
  logic              act_valid_c [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_wb
    assign wb_row[8*c +: 8] = act_out[c];
  end

  capsacc_sram #(.WORDS(DMEM_ROWS), .WIDTH(8*ROWS)) u_data_mem (
    .clk,
    .we   (wb_dmem_we || host_dmem_we),
    .waddr(wb_dmem_we ? DMEM_AW'(wb_addr) : DMEM_AW'(host_dmem_addr)),
    .wdata(wb_dmem_we ? wb_row : host_dmem_wdata),
    .re   (dmem_re || host_dmem_re),
    .raddr(dmem_re ? DMEM_AW'(dmem_raddr) : DMEM_AW'(host_dmem_raddr)),
    .rdata(dmem_rdata)
  );
  assign host_dmem_rdata = dmem_rdata;

  capsacc_sram #(.WORDS(WMEM_ROWS), .WIDTH(8*COLS)) u_weight_mem (
    .clk, .we(host_wmem_we), .waddr(WMEM_AW'(host_wmem_addr)), .wdata(host_wmem_wdata),
    .re(wmem_re), .raddr(WMEM_AW'(wmem_raddr)), .rdata(wmem_rdata)
  );

  capsacc_sram #(.WORDS(DBUF_ROWS), .WIDTH(8*ROWS)) u_data_buf (
    .clk, .we(dbuf_we), .waddr(dbuf_waddr), .wdata(dmem_rdata),
    .re(dbuf_re), .raddr(dbuf_raddr), .rdata(dbuf_rdata)
  );

  capsacc_sram #(.WORDS(WBUF_ROWS), .WIDTH(8*COLS)) u_weight_buf (
    .clk, .we(wbuf_we), .waddr(wbuf_waddr), .wdata(wmem_rdata),
    .re(wbuf_re), .raddr(wbuf_raddr), .rdata(wbuf_rdata)
  );

  capsacc_sram #(.WORDS(RBUF_ROWS), .WIDTH(8*COLS)) u_routing_buf (
    .clk, .we(wb_rbuf_we), .waddr(RBUF_AW'(wb_addr)), .wdata(wb_row),
    .re(rbuf_re || host_rbuf_re), .raddr(rbuf_re ? rbuf_raddr : host_rbuf_raddr), .rdata(rbuf_rdata)
  );
  assign host_rbuf_rdata = rbuf_rdata;

  // ---------------- data side: skew, then multiplexer ----------------
  logic [9:0] dsk_in [ROWS], dsk_out [ROWS];     // {fb, swap, data}
  logic [7:0] d_a [ROWS], d_b [ROWS], d_y [ROWS];
  logic       d_sel [ROWS];
  logic [0:0] d_fl_in [ROWS], d_fl_out [ROWS];
  logic signed [7:0] arr_din [ROWS], arr_dout [ROWS];
  logic       arr_swap [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_dlane
    assign dsk_in[r]   = {dfb_q, dswap_q, dfb_q ? 8'd0 : dbuf_rdata[8*r +: 8]};
    assign d_a[r]      = dsk_out[r][7:0];
    assign d_b[r]      = arr_dout[r];          // horizontal feedback
    assign d_sel[r]    = dsk_out[r][9];
    assign d_fl_in[r]  = dsk_out[r][8];
    assign arr_din[r]  = $signed(d_y[r]);
    assign arr_swap[r] = d_fl_out[r][0];
  end

  capsacc_skew #(.LANES(ROWS), .W(10), .REVERSE(1'b0)) u_dskew (
    .clk, .rst_n, .din(dsk_in), .dout(dsk_out));

  capsacc_operand_mux #(.LANES(ROWS), .W(8), .FW(1)) u_data_mux (
    .clk, .rst_n, .sel(d_sel), .n_lanes(6'(cur.n_rows)), .a(d_a), .b(d_b),
    .flags_in(d_fl_in), .y(d_y), .flags_out(d_fl_out));

  // ---------------- weight side: skew, then multiplexer ----------------
  logic [16:0] wsk_in [COLS], wsk_out [COLS];   // {shift, routing lane, weight lane}
  logic [7:0] w_a [COLS], w_b [COLS], w_y [COLS];
  logic       w_sel [COLS];
  logic [0:0] w_fl_in [COLS], w_fl_out [COLS];
  logic signed [7:0] arr_win [COLS];
  logic       arr_wshift [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_wlane
    assign wsk_in[c]    = {wshift_q, rbuf_rdata[8*c +: 8], wbuf_rdata[8*c +: 8]};
    assign w_a[c]       = wsk_out[c][7:0];     // Weight Buffer
    assign w_b[c]       = wsk_out[c][15:8];    // Routing Buffer
    assign w_sel[c]     = (cur.wsrc == WSRC_RBUF);
    assign w_fl_in[c]   = wsk_out[c][16];
    assign arr_win[c]   = $signed(w_y[c]);
    assign arr_wshift[c] = w_fl_out[c][0];
  end

  capsacc_skew #(.LANES(COLS), .W(17), .REVERSE(1'b0)) u_wskew (
    .clk, .rst_n, .din(wsk_in), .dout(wsk_out));

  capsacc_operand_mux #(.LANES(COLS), .W(8), .FW(1)) u_weight_mux (
    .clk, .rst_n, .sel(w_sel), .n_lanes(6'(COLS)), .a(w_a), .b(w_b),
    .flags_in(w_fl_in), .y(w_y), .flags_out(w_fl_out));

  // ---------------- systolic array ----------------
  logic signed [SUM_W-1:0] arr_psum [COLS];
  capsacc_systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .data_in(arr_din), .swap_in(arr_swap),
    .weight_in(arr_win), .w_shift(arr_wshift),
    .data_out(arr_dout), .psum_out(arr_psum));

  // ---------------- de-skew, accumulators, activation ----------------
  logic [SUM_W-1:0] dsk2_in [COLS], dsk2_out [COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_ps
    assign dsk2_in[c] = arr_psum[c];
  end
  capsacc_skew #(.LANES(COLS), .W(SUM_W), .REVERSE(1'b1)) u_deskew (
    .clk, .rst_n, .din(dsk2_in), .dout(dsk2_out));

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [SUM_W-1:0] head;
    logic [ACC_AW:0]         count;
    capsacc_accumulator #(.DEPTH(ACC_DEPTH)) u_acc (
      .clk, .rst_n, .push(acc_push), .acc(acc_add), .pop(acc_pop),
      .din($signed(dsk2_out[c])), .head(head), .count(count));

    capsacc_activation u_act (
      .clk, .rst_n, .mode(cur.act), .shift(cur.shift), .vec_len(cur.vec_len),
      .in_valid(act_in_valid), .in_ready(act_ready_c[c]), .in_sum(head),
      .out_valid(act_valid_c[c]), .out_data(act_out[c]));
  end
  // all columns run in lock-step; column 0 speaks for them
  assign act_in_ready  = act_ready_c[0];
  assign act_out_valid = act_valid_c[0];
endmodule
