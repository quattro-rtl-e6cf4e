// softmax_unit: softmax over the first len entries of a score vector.
//
// Four passes: find the maximum score (len cycles); compute
// e_j = exp(s_j - max) with the package exp_neg() and add them up (len
// cycles); form r = floor(2^26 / sum) in a serial divider (27 cycles); scale
// p_j = round(e_j * r / 2^16) (len cycles). Probabilities are unsigned Q.10,
// so the largest entry gets close to 1024/len..1024.
// Entries at or beyond len are the masked (future) positions of causal
// attention: they are skipped, i.e. treated as exp(-inf) = 0, and their
// outputs are left at 0.
// Interface: scores and len must stay stable from start to done; done pulses
// for one cycle, observed 3*len + 30 clock edges after the edge that samples start, and probs hold until the next start.
// The paper names attention only; the pass structure and the arithmetic are
// this design's choices.
module softmax_unit
  import quattro_pkg::*;
#(
  parameter int unsigned SEQ_MAX = 50,
  localparam int unsigned LW     = $clog2(SEQ_MAX + 1),
  localparam int unsigned IW     = (SEQ_MAX > 1) ? $clog2(SEQ_MAX) : 1,
  localparam int unsigned SUM_W  = PROB_W + LW,
  localparam int unsigned NUM_W  = FRAC + 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] len,
  input  elem_t         scores [SEQ_MAX],
  output logic          done,
  output prob_t         probs [SEQ_MAX]
);

  typedef enum logic [2:0] {S_IDLE, S_MAX, S_EXP, S_DIV, S_NORM} state_e;
  state_e state;

  logic [IW-1:0]    i;
  elem_t            mx;
  prob_t            e [SEQ_MAX];
  logic [SUM_W-1:0] sum;
  logic             div_start, div_done, div_busy_unused;
  logic [NUM_W-1:0] recip;
  prob_t            e_cur;
  logic             last;

  assign e_cur = exp_neg({scores[i][DATA_W-1], scores[i]} - {mx[DATA_W-1], mx});
  assign last  = (LW'(i) == len - 1'b1);

  seq_divider #(.N_W(NUM_W), .D_W(SUM_W)) u_div (
    .clk, .rst_n,
    .start    (div_start),
    .dividend (NUM_W'(1) << (FRAC + 16)),
    .divisor  (sum),
    .busy     (div_busy_unused),
    .done     (div_done),
    .quotient (recip)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      i         <= '0;
      mx        <= '0;
      sum       <= '0;
      div_start <= 1'b0;
      done      <= 1'b0;
      for (int k = 0; k < SEQ_MAX; k++) begin
        e[k]     <= '0;
        probs[k] <= '0;
      end
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_MAX;
          i     <= '0;
          mx    <= ELEM_MIN;
          sum   <= '0;
          for (int k = 0; k < SEQ_MAX; k++) probs[k] <= '0;
        end
        S_MAX: begin
          if (scores[i] > mx) mx <= scores[i];
          if (last) begin
            i     <= '0;
            state <= S_EXP;
          end else i <= i + 1'b1;
        end
        S_EXP: begin
          e[i] <= e_cur;
          sum  <= sum + SUM_W'(e_cur);
          if (last) begin
            div_start <= 1'b1;
            i         <= '0;
            state     <= S_DIV;
          end else i <= i + 1'b1;
        end
        S_DIV: if (div_done) state <= S_NORM;
        S_NORM: begin
          probs[i] <= prob_t'(round_shift(acc_t'(e[i]) * acc_t'(recip), 16));
          if (last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else i <= i + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
