// capsacc_activation: the activation unit behind one accumulator column. The
// 25-bit sum is first reduced to 8 bits (arithmetic right shift by `shift`,
// then saturation). ReLU, Norm, Squash and Softmax work on that value in
// parallel and the output multiplexer selects one of them, as in the paper.
// ACT_NONE (reduction only) is an extra path of this design.
// Squash needs each element of a capsule vector together with the vector's
// norm, and Softmax needs each element twice; this unit therefore stores the
// n-element vector (n = vec_len, up to MAX_VEC) in a replay register file while
// it is accepted, and replays it once the norm, or the exponential sum, is
// known. in_ready is low during the replay. ReLU/None/Norm always accept.
// Timing: None/ReLU one cycle; Norm n+1 cycles after the vector's first
// element; Squash n+2 cycles after the first element (one cycle after the
// norm, which goes straight to the squash table), then one element per cycle;
// Softmax outputs start n+1 cycles after the first element (2n cycles per
// vector).
// Interface: in_valid/in_ready handshake on the 25-bit input, out_valid is
// high for one cycle per output element (one per vector in Norm mode).
module capsacc_activation
  import capsacc_pkg::*;
#(
  parameter int unsigned SW      = SUM_W,
  parameter int unsigned MAX_VEC = 16  // the replay index is 4 bits: at most 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  act_e                 mode,
  input  logic [4:0]           shift,
  input  logic [4:0]           vec_len,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [SW-1:0] in_sum,
  output logic                 out_valid,
  output logic [7:0]           out_data
);
  logic signed [7:0] x8;
  assign x8 = sat8(in_sum >>> shift);

  logic take;
  assign take = in_valid && in_ready;

  // ---------------- replay register file and sequencing ----------------
  typedef enum logic [1:0] {S_ACCEPT, S_WAIT, S_REPLAY} st_e;
  st_e st;
  logic signed [7:0] vec [MAX_VEC];
  logic [4:0] wi, ri;
  logic replaying;
  logic need_replay;
  assign need_replay = (mode == ACT_SQUASH) || (mode == ACT_SOFTMAX);
  assign in_ready    = (st == S_ACCEPT);
  assign replaying   = (st == S_REPLAY);

  logic norm_valid;
  logic [7:0] norm_val;
  logic [7:0] norm_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_ACCEPT; wi <= '0; ri <= '0; norm_hold <= '0;
      for (int i = 0; i < int'(MAX_VEC); i++) vec[i] <= '0;
    end else begin
      if (norm_valid) norm_hold <= norm_val;
      unique case (st)
        S_ACCEPT: if (take && need_replay) begin
          vec[wi[3:0]] <= x8;
          if (wi == vec_len - 5'd1) begin
            wi <= '0;
            st <= (mode == ACT_SQUASH) ? S_WAIT : S_REPLAY;
          end else begin
            wi <= wi + 5'd1;
          end
        end
        // the first element is squashed in the cycle the norm appears
        S_WAIT: if (norm_valid) begin
          if (vec_len == 5'd1) begin
            st <= S_ACCEPT;
          end else begin
            ri <= 5'd1;
            st <= S_REPLAY;
          end
        end
        S_REPLAY: begin
          if (ri == vec_len - 5'd1) begin
            ri <= '0;
            st <= S_ACCEPT;
          end else begin
            ri <= ri + 5'd1;
          end
        end
        default: st <= S_ACCEPT;
      endcase
    end
  end

  // ---------------- the four functions ----------------
  logic [7:0] relu_r, none_r;
  logic       simple_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      relu_r <= '0; none_r <= '0; simple_v <= 1'b0;
    end else begin
      simple_v <= take && (mode == ACT_NONE || mode == ACT_RELU);
      if (take) begin
        none_r <= x8;
        relu_r <= x8[7] ? 8'd0 : x8;
      end
    end
  end

  capsacc_norm u_norm (
    .clk, .rst_n,
    .in_valid (take && (mode == ACT_NORM || mode == ACT_SQUASH)),
    .in_data  (x8),
    .n        (vec_len),
    .out_valid(norm_valid),
    .out_norm (norm_val)
  );

  logic sq_valid;
  logic signed [7:0] sq_v;
  capsacc_squash u_squash (
    .clk, .rst_n,
    .in_valid ((replaying || (st == S_WAIT && norm_valid)) && mode == ACT_SQUASH),
    .in_s     (vec[ri[3:0]]),
    .in_norm  ((st == S_WAIT) ? norm_val : norm_hold),
    .out_valid(sq_valid),
    .out_v    (sq_v)
  );

  logic sm_valid;
  logic signed [7:0] sm_c;
  capsacc_softmax u_softmax (
    .clk, .rst_n,
    .in_valid ((take && mode == ACT_SOFTMAX) || (replaying && mode == ACT_SOFTMAX)),
    .in_x     (replaying ? vec[ri[3:0]] : x8),
    .n        (vec_len),
    .out_valid(sm_valid),
    .out_c    (sm_c)
  );

  // ---------------- output multiplexer ----------------
  always_comb begin
    unique case (mode)
      ACT_NONE:    begin out_valid = simple_v;   out_data = none_r;   end
      ACT_RELU:    begin out_valid = simple_v;   out_data = relu_r;   end
      ACT_NORM:    begin out_valid = norm_valid; out_data = norm_val; end
      ACT_SQUASH:  begin out_valid = sq_valid;   out_data = sq_v;     end
      ACT_SOFTMAX: begin out_valid = sm_valid;   out_data = sm_c;     end
      default:     begin out_valid = 1'b0;       out_data = '0;       end
    endcase
  end
endmodule
