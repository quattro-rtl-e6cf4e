// mha_unit: masked (causal) multi-head self-attention of one decoder layer.
//
// Phase P (projection): for every position t the input row x_t is read from
// the caller's row buffer and one linear_unit pass computes the 3*D_MODEL
// outputs [Wq;Wk;Wv] x_t + [bq;bk;bv]; each result element is written into
// lane n of row t of the Q, K or V buffer (three dp_ram instances).
// Phase A (attention), for t = 0 .. seq_len-1:
//   scores  - K rows 0..t stream out of the K buffer, one per cycle; for each
//             head h, s_h,j = round(q_t,h . k_j,h) scaled by 1/sqrt(D_HEAD).
//             Rows j > t are never read: this is the causal mask.
//   softmax - N_HEAD softmax_unit instances run side by side over j = 0..t.
//   context - V rows 0..t stream out; every lane accumulates p_h(lane),j * v_j.
//   output  - one linear_unit pass applies Wo, bo to the context row.
// The attention row for t is then offered on out_valid/out_data; the unit
// waits (stalls) until out_ready, then moves on to t+1. done pulses when the
// last row has been accepted.
// Weights: layer l uses words l*4*D_MODEL + {0,1,2,3}*D_MODEL of the weight
// RAM (Wq, Wk, Wv, Wo rows) and words l*4 + {0,1,2,3} of the bias RAM.
// The paper gives the function (masked multi-head attention, 4 heads, model
// dimension 128); the two-phase row-by-row schedule is this design's choice.
module mha_unit
  import quattro_pkg::*;
#(
  parameter int unsigned SEQ_MAX = 50,
  parameter int unsigned D_MODEL = 128,
  parameter int unsigned N_HEAD  = 4,
  parameter int unsigned N_LAYER = 3,
  localparam int unsigned D_HEAD = D_MODEL / N_HEAD,
  localparam int unsigned SW     = $clog2(SEQ_MAX + 1),
  localparam int unsigned RW     = (SEQ_MAX > 1) ? $clog2(SEQ_MAX) : 1,
  localparam int unsigned W_AW   = $clog2(N_LAYER * 4 * D_MODEL),
  localparam int unsigned B_AW   = $clog2(N_LAYER * 4),
  localparam int unsigned LG_D   = $clog2(D_MODEL)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [SW-1:0]   seq_len,
  input  logic [3:0]      layer,
  output logic [RW-1:0]   x_addr,
  input  elem_t           x_rdata [D_MODEL],
  output logic [W_AW-1:0] w_addr,
  input  elem_t           w_rdata [D_MODEL],
  output logic [B_AW-1:0] b_addr,
  input  elem_t           b_rdata [D_MODEL],
  output logic            out_valid,
  input  logic            out_ready,
  output logic [RW-1:0]   out_row,
  output elem_t           out_data [D_MODEL],
  output logic            busy,
  output logic            done
);

  localparam int unsigned SCALE_Q16 = inv_sqrt_q16(D_HEAD);
  localparam int unsigned N_W       = $clog2(3 * D_MODEL + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_P_RD, S_P_LD, S_P_RUN,
    S_A_RDQ, S_A_LDQ, S_A_SCORE, S_A_SMX, S_A_CTX, S_A_OUT, S_A_EMIT
  } state_e;
  state_e state;

  logic [RW-1:0] t;
  logic [RW-1:0] j;
  logic          pipe_v;
  logic [RW-1:0] pipe_j;
  logic          pipe_last;

  // linear engine
  logic            lin_start;
  logic [N_W-1:0]  lin_n;
  logic [W_AW-1:0] lin_wbase;
  logic [B_AW-1:0] lin_bbase;
  elem_t           lin_x [D_MODEL];
  logic            lin_yv, lin_done, lin_busy_unused;
  logic [N_W-1:0]  lin_idx;
  elem_t           lin_y;

  linear_unit #(
    .LANES(D_MODEL), .KW_MAX(1), .N_MAX(3 * D_MODEL), .W_AW(W_AW), .B_AW(B_AW)
  ) u_lin (
    .clk, .rst_n,
    .start   (lin_start),
    .k_words (1'b1),
    .n_out   (lin_n),
    .w_base  (lin_wbase),
    .b_base  (lin_bbase),
    .relu    (1'b0),
    .x_vec   (lin_x),
    .w_addr, .w_rdata, .b_addr, .b_rdata,
    .y_valid (lin_yv),
    .y_idx   (lin_idx),
    .y_data  (lin_y),
    .busy    (lin_busy_unused),
    .done    (lin_done)
  );

  // Q, K, V row buffers
  logic [RW-1:0]      qkv_raddr;
  logic [2:0]         qkv_we;
  logic [D_MODEL-1:0] lane_we;
  elem_t              wdata_bcast [D_MODEL];
  elem_t              q_rd [D_MODEL], k_rd [D_MODEL], v_rd [D_MODEL];
  elem_t              q_unused [D_MODEL], k_unused [D_MODEL], v_unused [D_MODEL];

  always_comb begin
    for (int i = 0; i < D_MODEL; i++) wdata_bcast[i] = lin_y;
    lane_we = '0;
    lane_we[lin_idx[LG_D-1:0]] = 1'b1;
    qkv_we = '0;
    if (state == S_P_RUN && lin_yv) qkv_we[2'(lin_idx >> LG_D)] = 1'b1;
  end

  dp_ram #(.LANES(D_MODEL), .DEPTH(SEQ_MAX)) u_q (
    .clk, .a_addr(qkv_raddr), .a_rdata(q_rd),
    .b_addr(t), .b_we(qkv_we[0]), .b_lane_we(lane_we), .b_wdata(wdata_bcast), .b_rdata(q_unused));
  dp_ram #(.LANES(D_MODEL), .DEPTH(SEQ_MAX)) u_k (
    .clk, .a_addr(qkv_raddr), .a_rdata(k_rd),
    .b_addr(t), .b_we(qkv_we[1]), .b_lane_we(lane_we), .b_wdata(wdata_bcast), .b_rdata(k_unused));
  dp_ram #(.LANES(D_MODEL), .DEPTH(SEQ_MAX)) u_v (
    .clk, .a_addr(qkv_raddr), .a_rdata(v_rd),
    .b_addr(t), .b_we(qkv_we[2]), .b_lane_we(lane_we), .b_wdata(wdata_bcast), .b_rdata(v_unused));

  // scores and softmax, one unit per head
  elem_t   q_reg  [D_MODEL];
  elem_t   scores [N_HEAD][SEQ_MAX];
  prob_t   probs  [N_HEAD][SEQ_MAX];
  elem_t   head_score [N_HEAD];
  logic    smx_start;
  logic [N_HEAD-1:0] smx_done;
  acc_t    ctx_acc [D_MODEL];

  always_comb begin
    for (int h = 0; h < N_HEAD; h++) begin
      acc_t dot;
      dot = '0;
      for (int i = 0; i < D_HEAD; i++)
        dot += acc_t'(q_reg[h*D_HEAD + i]) * acc_t'(k_rd[h*D_HEAD + i]);
      head_score[h] = requant(acc_t'(requant(dot, FRAC)) * acc_t'(SCALE_Q16), 16);
    end
  end

  for (genvar h = 0; h < N_HEAD; h++) begin : g_smx
    softmax_unit #(.SEQ_MAX(SEQ_MAX)) u_smx (
      .clk, .rst_n,
      .start  (smx_start),
      .len    (SW'(t) + 1'b1),
      .scores (scores[h]),
      .done   (smx_done[h]),
      .probs  (probs[h])
    );
  end

  assign x_addr    = t;
  assign qkv_raddr = (state == S_A_RDQ) ? t : j;
  assign out_row   = t;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t         <= '0;
      j         <= '0;
      pipe_v    <= 1'b0;
      pipe_j    <= '0;
      pipe_last <= 1'b0;
      lin_start <= 1'b0;
      lin_n     <= '0;
      lin_wbase <= '0;
      lin_bbase <= '0;
      smx_start <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < D_MODEL; i++) begin
        lin_x[i]    <= '0;
        q_reg[i]    <= '0;
        ctx_acc[i]  <= '0;
        out_data[i] <= '0;
      end
      for (int h = 0; h < N_HEAD; h++)
        for (int k = 0; k < SEQ_MAX; k++) scores[h][k] <= '0;
    end else begin
      lin_start <= 1'b0;
      smx_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          t     <= '0;
          state <= S_P_RD;
        end
        // ---------------- projection phase ----------------
        S_P_RD: state <= S_P_LD;              // x_addr = t, data next cycle
        S_P_LD: begin
          lin_x     <= x_rdata;
          lin_n     <= N_W'(3 * D_MODEL);
          lin_wbase <= W_AW'(layer * 4 * D_MODEL);
          lin_bbase <= B_AW'(layer * 4);
          lin_start <= 1'b1;
          state     <= S_P_RUN;
        end
        S_P_RUN: if (lin_done) begin
          if (SW'(t) == seq_len - 1'b1) begin
            t     <= '0;
            state <= S_A_RDQ;
          end else begin
            t     <= t + 1'b1;
            state <= S_P_RD;
          end
        end
        // ---------------- attention phase ----------------
        S_A_RDQ: state <= S_A_LDQ;            // Q buffer read of row t
        S_A_LDQ: begin
          q_reg  <= q_rd;
          j      <= '0;
          pipe_v <= 1'b0;
          state  <= S_A_SCORE;
        end
        S_A_SCORE: begin
          // issue K row j, score row pipe_j arrives
          pipe_v    <= (j <= t) && !pipe_last;
          pipe_j    <= j;
          pipe_last <= (j == t);
          if (j <= t) j <= j + 1'b1;
          if (pipe_v)
            for (int h = 0; h < N_HEAD; h++) scores[h][pipe_j] <= head_score[h];
          if (pipe_v && pipe_j == t) begin
            smx_start <= 1'b1;
            pipe_last <= 1'b0;
            state     <= S_A_SMX;
          end
        end
        S_A_SMX: if (smx_done[0]) begin
          j      <= '0;
          pipe_v <= 1'b0;
          for (int i = 0; i < D_MODEL; i++) ctx_acc[i] <= '0;
          state  <= S_A_CTX;
        end
        S_A_CTX: begin
          pipe_v    <= (j <= t) && !pipe_last;
          pipe_j    <= j;
          pipe_last <= (j == t);
          if (j <= t) j <= j + 1'b1;
          if (pipe_v)
            for (int i = 0; i < D_MODEL; i++)
              ctx_acc[i] <= ctx_acc[i]
                + acc_t'($signed({1'b0, probs[i / D_HEAD][pipe_j]})) * acc_t'(v_rd[i]);
          if (pipe_v && pipe_j == t) begin
            for (int i = 0; i < D_MODEL; i++)
              lin_x[i] <= requant(ctx_acc[i]
                + acc_t'($signed({1'b0, probs[i / D_HEAD][pipe_j]})) * acc_t'(v_rd[i]), FRAC);
            lin_n     <= N_W'(D_MODEL);
            lin_wbase <= W_AW'(layer * 4 * D_MODEL + 3 * D_MODEL);
            lin_bbase <= B_AW'(layer * 4 + 3);
            lin_start <= 1'b1;
            pipe_last <= 1'b0;
            state     <= S_A_OUT;
          end
        end
        S_A_OUT: begin
          if (lin_yv) out_data[lin_idx[LG_D-1:0]] <= lin_y;
          if (lin_done) begin
            out_valid <= 1'b1;
            state     <= S_A_EMIT;
          end
        end
        S_A_EMIT: if (out_ready) begin
          out_valid <= 1'b0;
          if (SW'(t) == seq_len - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            t     <= t + 1'b1;
            state <= S_A_RDQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the output row is held while it waits for the consumer
  assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_row));

  // the head softmax units share start and length, so they finish together
  assert property (@(posedge clk) disable iff (!rst_n)
    smx_done[0] == &smx_done);

endmodule
