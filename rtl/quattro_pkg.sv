// quattro_pkg: number format, shared types and fixed-point helpers of the
// Transformer decoder accelerator.
//
// Every activation, weight, bias and norm parameter is a 16-bit signed
// fixed-point number with 10 fraction bits (range about -32..+32, step
// 1/1024). Products are summed at full precision in 48-bit accumulators and
// brought back to 16 bits by a round-half-up right shift followed by
// saturation. Attention probabilities are unsigned Q.10 values in 0..1024.
// The number format, the exp() approximation and the host bank map are
// choices of this design; the network sizes (d_model 128, 4 heads, 3 layers,
// feed-forward 256/512, horizon 30/50) come from the published model.
package quattro_pkg;

  localparam int DATA_W = 16;
  localparam int FRAC   = 10;
  localparam int ACC_W  = 48;
  localparam int PROB_W = FRAC + 1;

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [PROB_W-1:0]        prob_t;

  localparam elem_t ELEM_MAX = elem_t'(2**(DATA_W-1) - 1);
  localparam elem_t ELEM_MIN = elem_t'(-(2**(DATA_W-1)));

  // log2(e) with 14 fraction bits, used by exp_neg()
  localparam int LOG2E_Q14 = 23637;
  // 2^f ~= 1 + C1*f + C2*f^2 on 0 <= f < 1, coefficients with 10 fraction bits
  localparam int EXP2_C1 = 672;
  localparam int EXP2_C2 = 352;
  // below this integer exponent exp_neg() returns 0
  localparam acc_t EXP_MIN_IP = -acc_t'(FRAC) - acc_t'(1);
  // layer-norm epsilon (1e-5) as a Q.20 variance offset
  localparam int LN_EPS_Q20 = 10;

  // Host-visible memory banks.
  typedef enum logic [2:0] {
    BANK_ATTN_W = 3'd0,  // Wq, Wk, Wv, Wo rows, 4*D_MODEL words per layer
    BANK_ATTN_B = 3'd1,  // bq, bk, bv, bo, 4 words per layer
    BANK_FFN_W  = 3'd2,  // W1 rows then W2 rows, 2*D_FF words per layer
    BANK_FFN_B  = 3'd3,  // b1 words then b2, D_FF/D_MODEL+1 words per layer
    BANK_NORM   = 3'd4,  // gamma1, beta1, gamma2, beta2, 4 words per layer
    BANK_HEAD_W = 3'd5,  // output Linear rows, one word per output
    BANK_HEAD_B = 3'd6,  // output Linear bias, word 0
    BANK_X      = 3'd7   // embedded input sequence, one word per position
  } bank_e;

  // Round half up, then arithmetic shift right by s.
  function automatic acc_t round_shift(input acc_t v, input int unsigned s);
    acc_t r;
    if (s == 0) r = v;
    else        r = (v + (acc_t'(1) <<< (s - 1))) >>> s;
    return r;
  endfunction

  function automatic elem_t sat(input acc_t v);
    elem_t r;
    if (v > acc_t'(ELEM_MAX))      r = ELEM_MAX;
    else if (v < acc_t'(ELEM_MIN)) r = ELEM_MIN;
    else                           r = elem_t'(v);
    return r;
  endfunction

  function automatic elem_t requant(input acc_t v, input int unsigned s);
    return sat(round_shift(v, s));
  endfunction

  // exp(d) for d <= 0 given in Q.10; result in Q.10 (0..1024).
  // exp(d) = 2^(d*log2 e): the integer part of the exponent becomes a right
  // shift, the fraction goes through a second-order polynomial.
  function automatic prob_t exp_neg(input logic signed [DATA_W:0] d);
    acc_t y, ip, p;
    logic [FRAC-1:0] fr;
    int unsigned sh;
    prob_t r;
    y  = round_shift(acc_t'(d) * LOG2E_Q14, 14);
    ip = y >>> FRAC;
    fr = y[FRAC-1:0];
    p  = (acc_t'(1) <<< FRAC)
       + round_shift(acc_t'(fr) * EXP2_C1, FRAC)
       + round_shift(acc_t'(fr) * acc_t'(fr) * EXP2_C2, 2*FRAC);
    if (ip < EXP_MIN_IP) r = '0;
    else begin
      sh = int'(-ip);
      r  = prob_t'(p >>> sh);
    end
    return r;
  endfunction

  // floor(2^16 / sqrt(d)), the attention scale 1/sqrt(d_head) in Q.16
  function automatic int unsigned inv_sqrt_q16(input int unsigned d);
    longint unsigned c;
    c = 0;
    for (int b = 16; b >= 0; b--) begin
      if ((c + (64'd1 << b)) * (c + (64'd1 << b)) * d <= (64'd1 << 32))
        c = c + (64'd1 << b);
    end
    return int'(c);
  endfunction

endpackage
