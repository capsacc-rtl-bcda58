// capsacc_control: the control unit. It takes one pass descriptor (cmd_t) at a
// time and drives every other block through five phases:
//   WFILL  copy K*n_rows weight rows from the Weight Memory into the Weight
//          Buffer (skipped when the weights come from the Routing Buffer or
//          w_reuse is set);
//   DFILL  copy the data rows of the pass from the Data Memory into the Data
//          Buffer (skipped when d_reuse is set);
//   RUN    for every tile k: shift its n_rows weight rows into the array's
//          Weight1 chain (last row first) and stream its T data vectors, the
//          first one carrying the swap flag; tiles 1..K-1 of a feedback pass
//          re-inject the vectors that leave the right side of the array;
//          L = ROWS+COLS+2 cycles after a vector was issued its column sums
//          reach the accumulators, which take them as new (tile 0, or acc=0)
//          or add them to the FIFO head (acc=1);
//   DRAIN  pop the accumulators into the activation units and write each
//          output row to the Data Memory or the Routing Buffer.
// A reduction longer than one pass (more than K*n_rows inputs per output) is
// split over passes: every pass but the last sets keep (no drain, the T sums
// stay in the accumulator FIFOs) and every pass but the first sets cont (tile
// 0 adds to the FIFO head as well).
// Tile schedule: tile k streams from cycle n_rows + k*P and shifts its weights
// in the n_rows cycles before; P = COLS+1 for feedback passes (the loop
// length of the feedback path) and max(T, 2*n_rows) otherwise, which is what
// keeps the next tile's weight shift clear of the current tile's swap wave.
// A feedback pass therefore needs T <= COLS+1 and 2*n_rows <= COLS+1.
// The paper states only that the control unit generates the control signals
// of every stage; the phases, the descriptor and the schedule are this
// design's. Read ports of the memories have one cycle latency; every *_q
// output is aligned with the read data it qualifies.
module capsacc_control
  import capsacc_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned WBUF_AW = 8,
  parameter int unsigned DBUF_AW = 13,
  parameter int unsigned RBUF_AW = 11,
  parameter int unsigned ACC_DEPTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output cmd_t               cur,        // the pass being run
  output logic               done,       // one-cycle pulse at the end of a pass
  // buffer fills
  output logic               wmem_re,
  output logic [18:0]        wmem_raddr,
  output logic               wbuf_we,
  output logic [WBUF_AW-1:0] wbuf_waddr,
  output logic               dmem_re,
  output logic [15:0]        dmem_raddr,
  output logic               dbuf_we,
  output logic [DBUF_AW-1:0] dbuf_waddr,
  // weight side
  output logic               wbuf_re,
  output logic [WBUF_AW-1:0] wbuf_raddr,
  output logic               rbuf_re,
  output logic [RBUF_AW-1:0] rbuf_raddr,
  output logic               wshift_q,   // the weight row now read is shifted in
  // data side
  output logic               dbuf_re,
  output logic [DBUF_AW-1:0] dbuf_raddr,
  output logic               dvalid_q,   // a vector is issued (buffer row or feedback)
  output logic               dfb_q,      // ... taken from the feedback path
  output logic               dswap_q,    // ... and it is the first vector of a tile
  // accumulators
  output logic               acc_push,
  output logic               acc_add,
  output logic               acc_pop,
  // activation and write-back
  output logic               act_in_valid,
  input  logic               act_in_ready,
  input  logic               act_out_valid,
  output logic               wb_dmem_we,
  output logic               wb_rbuf_we,
  output logic [15:0]        wb_addr
);
  localparam int unsigned LAT = ROWS + COLS + 2;   // issue -> accumulator

  typedef enum logic [2:0] {C_IDLE, C_WFILL, C_DFILL, C_RUN, C_DRAIN, C_DONE} cst_e;
  cst_e st;

  logic [15:0] cnt;          // fill counter / run cycle counter
  logic [15:0] fill_n;
  logic [9:0]  P;            // tile period
  // weight-event and data-event counters (phase within period, tile index)
  logic [9:0]  wph, dph;
  logic [4:0]  wk, dk;
  logic        d_started;
  logic [15:0] run_end;
  logic [12:0] pops_left, outs_left;

  assign cmd_ready = (st == C_IDLE);

  // ---------------- event generation in RUN ----------------
  logic w_ev, d_ev, d_fb;
  assign w_ev = (st == C_RUN) && (wk < cur.n_tiles) && (wph < 10'(cur.n_rows));
  assign d_ev = (st == C_RUN) && d_started && (dk < cur.n_tiles) && (dph < cur.n_vec);
  assign d_fb = cur.fb && (dk != 0);

  logic [7:0] w_row;   // row of the tile, last row first
  assign w_row = 8'(wk) * 8'(cur.n_rows) + 8'(cur.n_rows) - 8'd1 - 8'(wph);

  assign wbuf_re    = w_ev && (cur.wsrc == WSRC_WBUF);
  assign wbuf_raddr = WBUF_AW'(w_row);
  assign rbuf_re    = w_ev && (cur.wsrc == WSRC_RBUF);
  assign rbuf_raddr = RBUF_AW'(cur.w_addr) + RBUF_AW'(w_row);

  assign dbuf_re    = d_ev && !d_fb;
  assign dbuf_raddr = cur.fb ? DBUF_AW'(dph) : DBUF_AW'(16'(dk) * 16'(cur.n_vec) + 16'(dph));

  // ---------------- tag pipeline to the accumulators ----------------
  typedef struct packed { logic v; logic add; } tag_t;
  tag_t tags [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) tags[i] <= '0;
      wshift_q <= 1'b0; dvalid_q <= 1'b0; dfb_q <= 1'b0; dswap_q <= 1'b0;
    end else begin
      wshift_q <= w_ev;
      dvalid_q <= d_ev;
      dfb_q    <= d_ev && d_fb;
      dswap_q  <= d_ev && (dph == 0);
      tags[0]  <= '{v: d_ev, add: d_ev && cur.acc && (dk != 0 || cur.cont)};
      for (int i = 1; i < int'(LAT); i++) tags[i] <= tags[i-1];
    end
  end

  logic drain_pop;
  assign drain_pop    = (st == C_DRAIN) && (pops_left != 0) && act_in_ready;
  assign acc_push     = tags[LAT-1].v;
  assign acc_add      = tags[LAT-1].add;
  assign acc_pop      = tags[LAT-1].add || drain_pop;
  assign act_in_valid = drain_pop;

  // ---------------- fills ----------------
  assign wmem_re    = (st == C_WFILL) && (cnt < fill_n);
  assign wmem_raddr = cur.w_addr + 19'(cnt);
  assign dmem_re    = (st == C_DFILL) && !cur.d_reuse && (cnt < fill_n);
  assign dmem_raddr = cur.d_addr + cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf_we <= 1'b0; wbuf_waddr <= '0; dbuf_we <= 1'b0; dbuf_waddr <= '0;
    end else begin
      wbuf_we <= wmem_re;  wbuf_waddr <= WBUF_AW'(cnt);
      dbuf_we <= dmem_re;  dbuf_waddr <= DBUF_AW'(cnt);
    end
  end

  // ---------------- write-back ----------------
  assign wb_dmem_we = act_out_valid && (st == C_DRAIN) && (cur.dst == DST_DMEM);
  assign wb_rbuf_we = act_out_valid && (st == C_DRAIN) && (cur.dst == DST_RBUF);

  // ---------------- main sequencer ----------------
  logic [12:0] n_pops;
  always_comb begin
    n_pops = cur.acc ? 13'(cur.n_vec) : 13'(cur.n_vec) * 13'(cur.n_tiles);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cur <= '0; cnt <= '0; fill_n <= '0; P <= '0;
      wph <= '0; wk <= '0; dph <= '0; dk <= '0; d_started <= 1'b0; run_end <= '0;
      pops_left <= '0; outs_left <= '0; wb_addr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (cmd_valid) begin
          cur <= cmd;
          cnt <= '0;
          if (cmd.wsrc == WSRC_WBUF && !cmd.w_reuse) begin
            fill_n <= 16'(cmd.n_tiles) * 16'(cmd.n_rows);
            st     <= C_WFILL;
          end else begin
            fill_n <= cmd.fb ? 16'(cmd.n_vec) : 16'(cmd.n_tiles) * 16'(cmd.n_vec);
            st     <= C_DFILL;
          end
          if (cmd.fb) P <= 10'(COLS + 1);
          else        P <= (cmd.n_vec > 10'(2 * cmd.n_rows)) ? cmd.n_vec : 10'(2 * cmd.n_rows);
        end
        C_WFILL: begin
          // one extra cycle for the last read to be written
          if (cnt == fill_n) begin
            cnt <= '0;
            fill_n <= cur.fb ? 16'(cur.n_vec) : 16'(cur.n_tiles) * 16'(cur.n_vec);
            st <= C_DFILL;
          end else cnt <= cnt + 16'd1;
        end
        C_DFILL: begin
          if (cur.d_reuse || cnt == fill_n) begin
            cnt <= '0; st <= C_RUN;
            wph <= '0; wk <= '0; dph <= '0; dk <= '0; d_started <= 1'b0;
            run_end <= 16'(cur.n_rows) + 16'(cur.n_tiles - 5'd1) * 16'(P) + 16'(cur.n_vec) + 16'(LAT) + 16'd1;
          end else cnt <= cnt + 16'd1;
        end
        C_RUN: begin
          cnt <= cnt + 16'd1;
          if (wph == P - 10'd1) begin wph <= '0; wk <= wk + 5'd1; end
          else wph <= wph + 10'd1;
          if (cnt == 16'(cur.n_rows) - 16'd1) d_started <= 1'b1;
          if (d_started) begin
            if (dph == P - 10'd1) begin dph <= '0; dk <= dk + 5'd1; end
            else dph <= dph + 10'd1;
          end
          if (cnt == run_end && cur.acc && cur.keep) begin
            st <= C_DONE;
          end else if (cnt == run_end) begin
            st <= C_DRAIN;
            pops_left <= n_pops;
            outs_left <= (cur.act == ACT_NORM) ? n_pops / 13'(cur.vec_len) : n_pops;
            wb_addr   <= cur.o_addr;
          end
        end
        C_DRAIN: begin
          if (drain_pop) pops_left <= pops_left - 13'd1;
          if (act_out_valid) begin
            wb_addr   <= wb_addr + 16'd1;
            outs_left <= outs_left - 13'd1;
            if (outs_left == 13'd1) st <= C_DONE;
          end
        end
        C_DONE: begin
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // Descriptor rules that the schedule relies on.
  a_fb_len:  assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_RUN && cur.fb) |-> (cur.n_vec <= 10'(COLS + 1) && 2 * int'(cur.n_rows) <= int'(COLS) + 1));
  a_rows:    assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_RUN) |-> (cur.n_rows >= 1 && int'(cur.n_rows) <= int'(ROWS) && cur.n_tiles >= 1 && cur.n_vec >= 1));
  a_acc_fit: assert property (@(posedge clk) disable iff (!rst_n)
               (st == C_RUN) |-> (n_pops <= 13'(ACC_DEPTH)));
endmodule
