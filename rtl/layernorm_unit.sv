// layernorm_unit: y = gamma * (x - mean) / sqrt(var + eps) + beta over one
// D_MODEL-element vector (the "Norm" of an Add & Norm step).
//
// Step 1 (1 cycle): mean = round(sum x / D_MODEL) by an adder tree.
// Step 2 (1 cycle): var = floor(sum (x-mean)^2 / D_MODEL) + eps, in Q.20.
// Step 3 (D/2 = 17 cycles): sigma = isqrt(var), Q.10.
// Step 4 (31 cycles): inv = floor(2^30 / sigma), 1/sigma in Q.20.
// Step 5 (1 cycle): n = sat(round((x-mean)*inv >> 20)),
//                   y = sat(round(n*gamma >> 10) + beta), all lanes at once.
// done is seen 56 clock edges after the edge that samples start; x, gamma and beta must stay stable from
// start to done, y holds until the next start. D_MODEL must be a power of
// two. Population variance and eps = 1e-5 follow the usual layer norm; the
// paper only names the block, so the fixed-point steps are this design's.
module layernorm_unit
  import quattro_pkg::*;
#(
  parameter int unsigned D_MODEL = 128,
  localparam int unsigned LG_D   = $clog2(D_MODEL)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  elem_t x     [D_MODEL],
  input  elem_t gamma [D_MODEL],
  input  elem_t beta  [D_MODEL],
  output logic  done,
  output elem_t y     [D_MODEL]
);

  localparam int unsigned RAD_W = 34;
  localparam int unsigned SIG_W = RAD_W / 2;
  localparam int unsigned INV_W = 31;

  if ((1 << LG_D) != D_MODEL) begin : g_chk
    $error("layernorm_unit: D_MODEL must be a power of two");
  end

  typedef enum logic [2:0] {S_IDLE, S_MEAN, S_VAR, S_SQRT, S_DIV, S_OUT} state_e;
  state_e state;

  elem_t             mean;
  acc_t              sum_x, sum_sq;
  acc_t              d [D_MODEL];
  logic [RAD_W-1:0]  var_q20;
  logic              sq_start, sq_done, sq_busy_unused;
  logic [SIG_W-1:0]  sigma;
  logic              dv_start, dv_done, dv_busy_unused;
  logic [INV_W-1:0]  inv;

  always_comb begin
    sum_x  = '0;
    sum_sq = '0;
    for (int k = 0; k < D_MODEL; k++) begin
      sum_x  += acc_t'(x[k]);
      d[k]    = acc_t'(x[k]) - acc_t'(mean);
      sum_sq += d[k] * d[k];
    end
  end

  isqrt_unit #(.IN_W(RAD_W)) u_sqrt (
    .clk, .rst_n,
    .start    (sq_start),
    .radicand (var_q20),
    .busy     (sq_busy_unused),
    .done     (sq_done),
    .root     (sigma)
  );

  seq_divider #(.N_W(INV_W), .D_W(SIG_W)) u_div (
    .clk, .rst_n,
    .start    (dv_start),
    .dividend (INV_W'(1) << 30),
    .divisor  (sigma),
    .busy     (dv_busy_unused),
    .done     (dv_done),
    .quotient (inv)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      mean     <= '0;
      var_q20  <= '0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      done     <= 1'b0;
      for (int k = 0; k < D_MODEL; k++) y[k] <= '0;
    end else begin
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) state <= S_MEAN;
        S_MEAN: begin
          mean  <= sat(round_shift(sum_x, LG_D));
          state <= S_VAR;
        end
        S_VAR: begin
          var_q20  <= RAD_W'((sum_sq >>> LG_D) + LN_EPS_Q20);
          sq_start <= 1'b1;
          state    <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          dv_start <= 1'b1;
          state    <= S_DIV;
        end
        S_DIV: if (dv_done) state <= S_OUT;
        S_OUT: begin
          for (int k = 0; k < D_MODEL; k++)
            y[k] <= sat(round_shift(acc_t'(requant(d[k] * acc_t'(inv), 20)) * acc_t'(gamma[k]), FRAC)
                        + acc_t'(beta[k]));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
