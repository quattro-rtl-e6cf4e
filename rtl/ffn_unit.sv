// ffn_unit: position-wise feed-forward network of one decoder layer,
// y = W2 relu(W1 x + b1) + b2, for one D_MODEL row at a time.
//
// Pass 1 runs the linear engine over d_ff outputs of one chunk each and
// stores the rectified results in a D_FF-element hidden register. Pass 2 runs
// it over D_MODEL outputs of d_ff/D_MODEL chunks each, reading the hidden
// register, and collects y_out. done is seen 2*d_ff + 7 clock edges after the
// edge that samples start; it pulses
// for one cycle and y_out holds until the next start.
// d_ff is set at run time (a multiple of D_MODEL, at most D_FF), so the same
// hardware runs the 256-wide cart-pole model and the 512-wide quadrotor model.
// Weight RAM: layer l uses W1 rows at l*2*D_FF + n and W2 rows at
// l*2*D_FF + D_FF + m*(d_ff/D_MODEL) + c. Bias RAM: b1 words at
// l*(D_FF/D_MODEL+1) + 0.., b2 at l*(D_FF/D_MODEL+1) + D_FF/D_MODEL.
// The widths come from the paper; ReLU is assumed (the paper does not name
// the activation), and the two-pass schedule is this design's choice.
module ffn_unit
  import quattro_pkg::*;
#(
  parameter int unsigned D_MODEL = 128,
  parameter int unsigned D_FF    = 512,
  parameter int unsigned N_LAYER = 3,
  localparam int unsigned KW     = D_FF / D_MODEL,
  localparam int unsigned KW_W   = $clog2(KW + 1),
  localparam int unsigned FW     = $clog2(D_FF + 1),
  localparam int unsigned N_W    = FW,
  localparam int unsigned W_AW   = $clog2(N_LAYER * 2 * D_FF),
  localparam int unsigned B_AW   = $clog2(N_LAYER * (KW + 1)),
  localparam int unsigned LG_D   = $clog2(D_MODEL)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [3:0]      layer,
  input  logic [FW-1:0]   d_ff,
  input  elem_t           x_in [D_MODEL],
  output logic [W_AW-1:0] w_addr,
  input  elem_t           w_rdata [D_MODEL],
  output logic [B_AW-1:0] b_addr,
  input  elem_t           b_rdata [D_MODEL],
  output logic            busy,
  output logic            done,
  output elem_t           y_out [D_MODEL]
);

  typedef enum logic [1:0] {S_IDLE, S_HID, S_OUT} state_e;
  state_e state;

  elem_t           hidden [D_FF];
  elem_t           lin_x  [KW * D_MODEL];
  logic            lin_start;
  logic [KW_W-1:0] lin_k;
  logic [N_W-1:0]  lin_n;
  logic [W_AW-1:0] lin_wbase;
  logic [B_AW-1:0] lin_bbase;
  logic            lin_relu;
  logic            lin_yv, lin_done, lin_busy_unused;
  logic [N_W-1:0]  lin_idx;
  elem_t           lin_y;

  always_comb begin
    for (int i = 0; i < KW * D_MODEL; i++) begin
      if (state == S_HID) lin_x[i] = (i < D_MODEL) ? x_in[i % D_MODEL] : elem_t'(0);
      else                lin_x[i] = hidden[i];
    end
  end

  linear_unit #(
    .LANES(D_MODEL), .KW_MAX(KW), .N_MAX(D_FF), .W_AW(W_AW), .B_AW(B_AW)
  ) u_lin (
    .clk, .rst_n,
    .start   (lin_start),
    .k_words (lin_k),
    .n_out   (lin_n),
    .w_base  (lin_wbase),
    .b_base  (lin_bbase),
    .relu    (lin_relu),
    .x_vec   (lin_x),
    .w_addr, .w_rdata, .b_addr, .b_rdata,
    .y_valid (lin_yv),
    .y_idx   (lin_idx),
    .y_data  (lin_y),
    .busy    (lin_busy_unused),
    .done    (lin_done)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      lin_start <= 1'b0;
      lin_k     <= '0;
      lin_n     <= '0;
      lin_wbase <= '0;
      lin_bbase <= '0;
      lin_relu  <= 1'b0;
      done      <= 1'b0;
      for (int i = 0; i < D_FF; i++)    hidden[i] <= '0;
      for (int i = 0; i < D_MODEL; i++) y_out[i]  <= '0;
    end else begin
      lin_start <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          lin_k     <= KW_W'(1);
          lin_n     <= N_W'(d_ff);
          lin_wbase <= W_AW'(layer * 2 * D_FF);
          lin_bbase <= B_AW'(layer * (KW + 1));
          lin_relu  <= 1'b1;
          lin_start <= 1'b1;
          state     <= S_HID;
        end
        S_HID: begin
          if (lin_yv) hidden[int'(lin_idx) % D_FF] <= lin_y;
          if (lin_done) begin
            lin_k     <= KW_W'(d_ff >> LG_D);
            lin_n     <= N_W'(D_MODEL);
            lin_wbase <= W_AW'(layer * 2 * D_FF + D_FF);
            lin_bbase <= B_AW'(layer * (KW + 1) + KW);
            lin_relu  <= 1'b0;
            lin_start <= 1'b1;
            state     <= S_OUT;
          end
        end
        S_OUT: begin
          if (lin_yv) y_out[lin_idx[LG_D-1:0]] <= lin_y;
          if (lin_done) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
