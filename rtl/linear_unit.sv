// linear_unit: matrix-vector engine y = act(W x + b).
//
// LANES multipliers feed one adder tree, so each cycle one LANES-long chunk
// of the input vector is multiplied with one word (LANES weights) read from
// a weight RAM. An output with a k_words-chunk dot product takes k_words
// cycles; outputs leave in order, one every k_words cycles.
//
// Weight layout: output n, chunk c is the word w_base + n*k_words + c, so the
// weight address simply counts up. Bias of output n is lane n%LANES of the
// bias word b_base + n/LANES. Both RAMs have one cycle of read latency.
// Result: y = sat(round((sum x*w + b<<FRAC) >> FRAC)), then max(y,0) if relu.
//
// Timing: start in cycle 0; the first weight address is issued in cycle 1,
// y_valid for output n rises in cycle 3 + n*k_words + k_words - 1, and done
// pulses together with the last y_valid. x_vec, k_words, n_out, the bases
// and relu must stay stable until done. This is one possible realisation of
// the paper's "parallel matrix multiplication" kernels; the lane count and
// the streaming order are this design's choices.
module linear_unit
  import quattro_pkg::*;
#(
  parameter int unsigned LANES  = 128,
  parameter int unsigned KW_MAX = 4,
  parameter int unsigned N_MAX  = 512,
  parameter int unsigned W_AW   = 13,
  parameter int unsigned B_AW   = 5,
  localparam int unsigned KW_W  = $clog2(KW_MAX + 1),
  localparam int unsigned N_W   = $clog2(N_MAX + 1),
  localparam int unsigned LG_L  = $clog2(LANES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [KW_W-1:0] k_words,
  input  logic [N_W-1:0]  n_out,
  input  logic [W_AW-1:0] w_base,
  input  logic [B_AW-1:0] b_base,
  input  logic            relu,
  input  elem_t           x_vec [KW_MAX*LANES],
  output logic [W_AW-1:0] w_addr,
  input  elem_t           w_rdata [LANES],
  output logic [B_AW-1:0] b_addr,
  input  elem_t           b_rdata [LANES],
  output logic            y_valid,
  output logic [N_W-1:0]  y_idx,
  output elem_t           y_data,
  output logic            busy,
  output logic            done
);

  // issue stage
  logic            issuing;
  logic [N_W-1:0]  n_i;
  logic [KW_W-1:0] c_i;
  // data stage (RAM outputs valid)
  logic            v_d;
  logic [N_W-1:0]  n_d;
  logic [KW_W-1:0] c_d;
  logic            last_d;
  logic            final_d;
  acc_t            acc;
  acc_t            psum;
  acc_t            total;
  elem_t           bias;
  elem_t           yq;

  always_comb begin
    psum = '0;
    for (int i = 0; i < LANES; i++)
      psum += acc_t'(x_vec[int'(c_d) * LANES + i]) * acc_t'(w_rdata[i]);
    bias  = b_rdata[int'(n_d) % LANES];
    total = ((c_d == '0) ? acc_t'(0) : acc) + psum + (acc_t'(bias) <<< FRAC);
    yq    = requant(total, FRAC);
    if (relu && yq < 0) yq = '0;
  end

  assign b_addr = b_base + B_AW'(n_i >> LG_L);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      n_i     <= '0;
      c_i     <= '0;
      w_addr  <= '0;
      v_d     <= 1'b0;
      n_d     <= '0;
      c_d     <= '0;
      last_d  <= 1'b0;
      final_d <= 1'b0;
      acc     <= '0;
      y_valid <= 1'b0;
      y_idx   <= '0;
      y_data  <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      done    <= 1'b0;
      // issue one weight word per cycle
      if (start) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        n_i     <= '0;
        c_i     <= '0;
        w_addr  <= w_base;
      end else if (issuing) begin
        w_addr <= w_addr + 1'b1;
        if (c_i == k_words - 1'b1) begin
          c_i <= '0;
          n_i <= n_i + 1'b1;
          if (n_i == n_out - 1'b1) issuing <= 1'b0;
        end else begin
          c_i <= c_i + 1'b1;
        end
      end
      // tags follow the RAM latency
      v_d     <= issuing;
      n_d     <= n_i;
      c_d     <= c_i;
      last_d  <= (c_i == k_words - 1'b1);
      final_d <= (c_i == k_words - 1'b1) && (n_i == n_out - 1'b1);
      // accumulate and emit
      if (v_d) begin
        acc <= ((c_d == '0) ? acc_t'(0) : acc) + psum;
        if (last_d) begin
          y_valid <= 1'b1;
          y_idx   <= n_d;
          y_data  <= yq;
          if (final_d) begin
            done <= 1'b1;
            busy <= 1'b0;
          end
        end
      end
    end
  end

endmodule
