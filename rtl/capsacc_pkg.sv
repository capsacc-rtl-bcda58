// capsacc_pkg: widths, modes and the pass descriptor shared by the CapsAcc RTL.
// Data and weights are 8-bit signed fixed point and partial sums 25-bit signed,
// as in the paper. The 16x16 array size is the paper's. The activation modes
// mirror the four functions of the activation unit plus a plain
// reduce-to-8-bit path. The pass descriptor (cmd_t) is this design's own
// command format for the control unit.
package capsacc_pkg;
  localparam int unsigned DATA_W = 8;   // data / weight width (paper)
  localparam int unsigned SUM_W  = 25;  // partial-sum width (paper)

  typedef enum logic [2:0] {
    ACT_NONE    = 3'd0,  // shift + saturate to 8 bits only
    ACT_RELU    = 3'd1,
    ACT_NORM    = 3'd2,
    ACT_SQUASH  = 3'd3,
    ACT_SOFTMAX = 3'd4
  } act_e;

  typedef enum logic {WSRC_WBUF = 1'b0, WSRC_RBUF = 1'b1} wsrc_e;
  typedef enum logic {DST_DMEM = 1'b0, DST_RBUF = 1'b1} dst_e;

  // One pass: K weight tiles (of n_rows rows each) times T data vectors.
  typedef struct packed {
    wsrc_e       wsrc;      // weight side multiplexer: weight buffer or routing buffer
    logic        w_reuse;   // weight tiles already in the weight buffer: skip the fill
    logic [18:0] w_addr;    // first weight-memory row (fill) / routing-buffer row (RBUF)
    logic        d_reuse;   // data rows already in the data buffer: skip the fill
    logic        fb;        // tiles 1..K-1 take their data from the horizontal feedback
    logic [15:0] d_addr;    // first data-memory row
    logic [4:0]  n_rows;    // active array rows (1..ROWS)
    logic [9:0]  n_vec;     // T, data vectors per tile (1..512)
    logic [4:0]  n_tiles;   // K (1..16)
    logic        acc;       // 1: sum the K tiles; 0: keep each tile's results
    logic        cont;      // acc=1: tile 0 also adds to the sums left by the last pass
    logic        keep;      // acc=1: leave the sums in the accumulators, no drain
    act_e        act;
    logic [4:0]  shift;     // right shift of the 25-bit sum before 8-bit saturation
    logic [4:0]  vec_len;   // n for norm / squash / softmax (1..16)
    dst_e        dst;
    logic [15:0] o_addr;    // first destination row
  } cmd_t;

  function automatic logic signed [7:0] sat8(input logic signed [SUM_W-1:0] x);
    if (x > 127) return 8'sd127;
    else if (x < -128) return -8'sd128;
    else return x[7:0];
  endfunction
endpackage
