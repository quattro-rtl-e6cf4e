// quattro_accel: decoder-only Transformer inference accelerator that predicts
// the missing iLQR feedback/feed-forward gains of a trajectory horizon.
//
// The host embeds the state and gain sequences, adds positional encodings and
// concatenates them into seq_len rows of D_MODEL values (that part runs in
// software). It writes those rows and all weights through the host port,
// then pulses start. The accelerator then runs n_layers post-norm decoder
// layers in place on the row buffer:
//     a  = MaskedMHA(x)          (mha_unit)
//     x1 = LayerNorm(x + a)      (residual_add, layernorm_unit)
//     x  = LayerNorm(x1 + FFN(x1))   (ffn_unit, residual_add, layernorm_unit)
// and finally the Linear output head y_t = Wh x_t + bh, d_out values per
// row (52 for the quadrotor: k (4) and K (4x12) of one time step), into the
// output buffer that the host reads back.
//
// Inside a layer the attention unit first projects every row to Q, K, V, then
// produces attention rows one at a time into a one-row hand-over slot. While
// this controller runs Add&Norm, feed-forward and Add&Norm on row t, the
// attention unit already computes row t+1 and stalls when the slot is still
// full. Rows are written back in place: K and V of the layer were all
// computed before the first write-back, so no later row sees a new value.
//
// Host port: host_we writes element host_lane of word host_addr of bank
// host_bank (see quattro_pkg::bank_e for the map); writes are ignored while
// busy. host_raddr/host_rlane read the output buffer with one cycle of
// latency. start samples seq_len (1..SEQ_MAX), n_layers (1..N_LAYER), d_ff
// (multiple of D_MODEL, at most D_FF) and d_out (1..D_OUT). done pulses once
// at the end; cycles then holds the length of the run in clock cycles.
//
// Follows the paper: the layer structure of its accelerator figure (masked
// multi-head attention, Add & Norm, Feed Forward, Add & Norm, Linear), the
// sizes (3 layers, 4 heads, d_model 128, feed-forward 256/512, horizon 30/50,
// 52 outputs), the CPU/accelerator split and the use of on-chip RAM for the
// parameters. This design's own choices: the 16-bit fixed-point format, the
// row-serial schedule, the 128-lane engines, the host port and bank map.
module quattro_accel
  import quattro_pkg::*;
#(
  parameter int unsigned SEQ_MAX = 50,
  parameter int unsigned D_MODEL = 128,
  parameter int unsigned N_HEAD  = 4,
  parameter int unsigned D_FF    = 512,
  parameter int unsigned N_LAYER = 3,
  parameter int unsigned D_OUT   = 52,
  localparam int unsigned KW     = D_FF / D_MODEL,
  localparam int unsigned SW     = $clog2(SEQ_MAX + 1),
  localparam int unsigned RW     = (SEQ_MAX > 1) ? $clog2(SEQ_MAX) : 1,
  localparam int unsigned LW     = $clog2(N_LAYER + 1),
  localparam int unsigned FW     = $clog2(D_FF + 1),
  localparam int unsigned OW     = $clog2(D_OUT + 1),
  localparam int unsigned LNW    = $clog2(D_MODEL),
  localparam int unsigned HA_W   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // host write port
  input  logic            host_we,
  input  bank_e           host_bank,
  input  logic [HA_W-1:0] host_addr,
  input  logic [LNW-1:0]  host_lane,
  input  elem_t           host_wdata,
  // host read port (output buffer)
  input  logic [RW-1:0]   host_raddr,
  input  logic [LNW-1:0]  host_rlane,
  output elem_t           host_rdata,
  // run control
  input  logic            start,
  input  logic [SW-1:0]   seq_len,
  input  logic [LW-1:0]   n_layers,
  input  logic [FW-1:0]   d_ff,
  input  logic [OW-1:0]   d_out,
  output logic            busy,
  output logic            done,
  output logic [31:0]     cycles
);

  // RAM depths and address widths
  localparam int unsigned AW_D = N_LAYER * 4 * D_MODEL;
  localparam int unsigned AB_D = N_LAYER * 4;
  localparam int unsigned FW_D = N_LAYER * 2 * D_FF;
  localparam int unsigned FB_D = N_LAYER * (KW + 1);
  localparam int unsigned NR_D = N_LAYER * 4;
  localparam int unsigned HW_D = (D_OUT > 1) ? D_OUT : 2;
  localparam int unsigned HB_D = 2;
  localparam int unsigned AW_A = $clog2(AW_D);
  localparam int unsigned AB_A = $clog2(AB_D);
  localparam int unsigned FW_A = $clog2(FW_D);
  localparam int unsigned FB_A = $clog2(FB_D);
  localparam int unsigned NR_A = $clog2(NR_D);
  localparam int unsigned HW_A = $clog2(HW_D);
  localparam int unsigned HB_A = 1;

  typedef enum logic [3:0] {
    C_IDLE, C_NRM, C_ROWS, C_LDX, C_R1, C_LN1, C_FFN, C_LN2,
    C_HEAD_RD, C_HEAD_LD, C_HEAD_RUN
  } cstate_e;
  cstate_e state;

  // run configuration
  logic [SW-1:0] cfg_len;
  logic [LW-1:0] cfg_layers;
  logic [FW-1:0] cfg_dff;
  logic [OW-1:0] cfg_dout;
  logic [3:0]    layer;
  logic [31:0]   cyc_cnt;

  // host write decode
  logic               host_ok;
  logic [D_MODEL-1:0] host_lane_we;
  elem_t              host_bcast [D_MODEL];
  always_comb begin
    host_ok      = host_we && (state == C_IDLE);
    host_lane_we = '0;
    host_lane_we[host_lane] = 1'b1;
    for (int i = 0; i < D_MODEL; i++) host_bcast[i] = host_wdata;
  end

  // ---------------- parameter RAMs ----------------
  logic [AW_A-1:0] mha_w_addr;
  logic [AB_A-1:0] mha_b_addr;
  elem_t           mha_w_rd [D_MODEL], mha_b_rd [D_MODEL];
  logic [FW_A-1:0] ffn_w_addr;
  logic [FB_A-1:0] ffn_b_addr;
  elem_t           ffn_w_rd [D_MODEL], ffn_b_rd [D_MODEL];
  logic [NR_A-1:0] nrm_addr;
  elem_t           nrm_rd [D_MODEL];
  logic [HW_A-1:0] head_w_addr;
  logic [HB_A-1:0] head_b_addr;
  elem_t           head_w_rd [D_MODEL], head_b_rd [D_MODEL];
  elem_t           unused_rd [7][D_MODEL];

  dp_ram #(.LANES(D_MODEL), .DEPTH(AW_D)) u_attn_w (
    .clk, .a_addr(mha_w_addr), .a_rdata(mha_w_rd),
    .b_addr(AW_A'(host_addr)), .b_we(host_ok && host_bank == BANK_ATTN_W),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[0]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(AB_D)) u_attn_b (
    .clk, .a_addr(mha_b_addr), .a_rdata(mha_b_rd),
    .b_addr(AB_A'(host_addr)), .b_we(host_ok && host_bank == BANK_ATTN_B),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[1]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(FW_D)) u_ffn_w (
    .clk, .a_addr(ffn_w_addr), .a_rdata(ffn_w_rd),
    .b_addr(FW_A'(host_addr)), .b_we(host_ok && host_bank == BANK_FFN_W),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[2]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(FB_D)) u_ffn_b (
    .clk, .a_addr(ffn_b_addr), .a_rdata(ffn_b_rd),
    .b_addr(FB_A'(host_addr)), .b_we(host_ok && host_bank == BANK_FFN_B),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[3]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(NR_D)) u_norm (
    .clk, .a_addr(nrm_addr), .a_rdata(nrm_rd),
    .b_addr(NR_A'(host_addr)), .b_we(host_ok && host_bank == BANK_NORM),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[4]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(HW_D)) u_head_w (
    .clk, .a_addr(head_w_addr), .a_rdata(head_w_rd),
    .b_addr(HW_A'(host_addr)), .b_we(host_ok && host_bank == BANK_HEAD_W),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[5]));
  dp_ram #(.LANES(D_MODEL), .DEPTH(HB_D)) u_head_b (
    .clk, .a_addr(head_b_addr), .a_rdata(head_b_rd),
    .b_addr(HB_A'(host_addr)), .b_we(host_ok && host_bank == BANK_HEAD_B),
    .b_lane_we(host_lane_we), .b_wdata(host_bcast), .b_rdata(unused_rd[6]));

  // ---------------- row buffers ----------------
  logic [RW-1:0]      x_a_addr, x_b_addr, mha_x_addr;
  elem_t              x_a_rd [D_MODEL], x_b_rd [D_MODEL];
  logic               x_b_we;
  logic [D_MODEL-1:0] x_b_lane_we;
  elem_t              x_b_wd [D_MODEL];
  logic [RW-1:0]      y_b_addr;
  logic               y_b_we;
  logic [D_MODEL-1:0] y_b_lane_we;
  elem_t              y_b_wd [D_MODEL];
  elem_t              y_a_rd [D_MODEL], y_b_rd_unused [D_MODEL];
  logic [LNW-1:0]     rlane_q;

  dp_ram #(.LANES(D_MODEL), .DEPTH(SEQ_MAX)) u_xbuf (
    .clk, .a_addr(x_a_addr), .a_rdata(x_a_rd),
    .b_addr(x_b_addr), .b_we(x_b_we), .b_lane_we(x_b_lane_we), .b_wdata(x_b_wd), .b_rdata(x_b_rd));
  dp_ram #(.LANES(D_MODEL), .DEPTH(SEQ_MAX)) u_ybuf (
    .clk, .a_addr(host_raddr), .a_rdata(y_a_rd),
    .b_addr(y_b_addr), .b_we(y_b_we), .b_lane_we(y_b_lane_we), .b_wdata(y_b_wd), .b_rdata(y_b_rd_unused));

  always_ff @(posedge clk) rlane_q <= host_rlane;
  assign host_rdata = y_a_rd[rlane_q];

  // ---------------- attention ----------------
  logic          mha_start, mha_busy, mha_done_unused;
  logic          mha_out_valid, mha_out_ready;
  logic [RW-1:0] mha_out_row;
  elem_t         mha_out_data [D_MODEL];

  mha_unit #(.SEQ_MAX(SEQ_MAX), .D_MODEL(D_MODEL), .N_HEAD(N_HEAD), .N_LAYER(N_LAYER)) u_mha (
    .clk, .rst_n,
    .start     (mha_start),
    .seq_len   (cfg_len),
    .layer     (layer),
    .x_addr    (mha_x_addr),
    .x_rdata   (x_a_rd),
    .w_addr    (mha_w_addr),
    .w_rdata   (mha_w_rd),
    .b_addr    (mha_b_addr),
    .b_rdata   (mha_b_rd),
    .out_valid (mha_out_valid),
    .out_ready (mha_out_ready),
    .out_row   (mha_out_row),
    .out_data  (mha_out_data),
    .busy      (mha_busy),
    .done      (mha_done_unused)
  );

  // one-row hand-over slot between attention and the row pipeline
  logic          slot_valid;
  logic [RW-1:0] slot_row;
  elem_t         slot_data [D_MODEL];
  assign mha_out_ready = !slot_valid;

  // ---------------- Add & Norm, feed-forward ----------------
  elem_t x_row [D_MODEL], a_row [D_MODEL], x1 [D_MODEL];
  elem_t res_a [D_MODEL], res_b [D_MODEL], res_y [D_MODEL];
  elem_t ln_in [D_MODEL], ln_y [D_MODEL];
  elem_t g1 [D_MODEL], be1 [D_MODEL], g2 [D_MODEL], be2 [D_MODEL];
  elem_t ln_g [D_MODEL], ln_b [D_MODEL];
  logic  ln_sel, ln_start, ln_done;
  logic  ffn_start, ffn_done, ffn_busy_unused;
  elem_t ffn_y [D_MODEL];

  always_comb begin
    for (int i = 0; i < D_MODEL; i++) begin
      res_a[i] = (state == C_R1) ? x_row[i] : x1[i];
      res_b[i] = (state == C_R1) ? a_row[i] : ffn_y[i];
      ln_g[i]  = ln_sel ? g2[i]  : g1[i];
      ln_b[i]  = ln_sel ? be2[i] : be1[i];
    end
  end

  residual_add #(.N(D_MODEL)) u_res (.a(res_a), .b(res_b), .y(res_y));

  layernorm_unit #(.D_MODEL(D_MODEL)) u_ln (
    .clk, .rst_n, .start(ln_start), .x(ln_in), .gamma(ln_g), .beta(ln_b),
    .done(ln_done), .y(ln_y));

  ffn_unit #(.D_MODEL(D_MODEL), .D_FF(D_FF), .N_LAYER(N_LAYER)) u_ffn (
    .clk, .rst_n,
    .start   (ffn_start),
    .layer   (layer),
    .d_ff    (cfg_dff),
    .x_in    (x1),
    .w_addr  (ffn_w_addr),
    .w_rdata (ffn_w_rd),
    .b_addr  (ffn_b_addr),
    .b_rdata (ffn_b_rd),
    .busy    (ffn_busy_unused),
    .done    (ffn_done),
    .y_out   (ffn_y)
  );

  // ---------------- Linear output head ----------------
  logic          head_start, head_yv, head_done, head_busy_unused;
  logic [OW-1:0] head_idx;
  elem_t         head_y;
  elem_t         head_x [D_MODEL];
  logic [RW-1:0] row;
  logic [2:0]    nk;

  linear_unit #(
    .LANES(D_MODEL), .KW_MAX(1), .N_MAX(D_OUT), .W_AW(HW_A), .B_AW(HB_A)
  ) u_head (
    .clk, .rst_n,
    .start   (head_start),
    .k_words (1'b1),
    .n_out   (cfg_dout),
    .w_base  ('0),
    .b_base  ('0),
    .relu    (1'b0),
    .x_vec   (head_x),
    .w_addr  (head_w_addr),
    .w_rdata (head_w_rd),
    .b_addr  (head_b_addr),
    .b_rdata (head_b_rd),
    .y_valid (head_yv),
    .y_idx   (head_idx),
    .y_data  (head_y),
    .busy    (head_busy_unused),
    .done    (head_done)
  );

  // ---------------- buffer port muxes ----------------
  always_comb begin
    x_a_addr = (state == C_HEAD_RD) ? row : mha_x_addr;
    nrm_addr = NR_A'(layer * 4 + 32'(nk));
    if (state == C_IDLE) begin
      x_b_addr    = RW'(host_addr);
      x_b_we      = host_ok && host_bank == BANK_X;
      x_b_lane_we = host_lane_we;
      x_b_wd      = host_bcast;
    end else begin
      x_b_addr    = (state == C_ROWS) ? slot_row : row;
      x_b_we      = (state == C_LN2) && ln_done;
      x_b_lane_we = '1;
      x_b_wd      = ln_y;
    end
    y_b_addr    = row;
    y_b_we      = (state == C_HEAD_RUN) && head_yv;
    y_b_lane_we = '0;
    y_b_lane_we[LNW'(head_idx)] = 1'b1;
    for (int i = 0; i < D_MODEL; i++) y_b_wd[i] = head_y;
  end

  assign busy = (state != C_IDLE);

  // ---------------- controller ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      cfg_len    <= SW'(1);
      cfg_layers <= LW'(1);
      cfg_dff    <= FW'(D_MODEL);
      cfg_dout   <= OW'(1);
      layer      <= '0;
      row        <= '0;
      nk         <= '0;
      cyc_cnt    <= '0;
      cycles     <= '0;
      done       <= 1'b0;
      mha_start  <= 1'b0;
      ln_start   <= 1'b0;
      ln_sel     <= 1'b0;
      ffn_start  <= 1'b0;
      head_start <= 1'b0;
      slot_valid <= 1'b0;
      slot_row   <= '0;
      for (int i = 0; i < D_MODEL; i++) begin
        slot_data[i] <= '0;
        x_row[i] <= '0; a_row[i] <= '0; x1[i] <= '0; ln_in[i] <= '0; head_x[i] <= '0;
        g1[i] <= '0; be1[i] <= '0; g2[i] <= '0; be2[i] <= '0;
      end
    end else begin
      done       <= 1'b0;
      mha_start  <= 1'b0;
      ln_start   <= 1'b0;
      ffn_start  <= 1'b0;
      head_start <= 1'b0;
      if (state != C_IDLE) cyc_cnt <= cyc_cnt + 1'b1;

      // the attention unit hands over a finished row
      if (mha_out_valid && mha_out_ready) begin
        slot_valid <= 1'b1;
        slot_row   <= mha_out_row;
        slot_data  <= mha_out_data;
      end

      case (state)
        C_IDLE: if (start) begin
          cfg_len    <= seq_len;
          cfg_layers <= n_layers;
          cfg_dff    <= d_ff;
          cfg_dout   <= d_out;
          layer      <= '0;
          nk         <= '0;
          cyc_cnt    <= 32'd1;
          state      <= C_NRM;
        end
        // read gamma1, beta1, gamma2, beta2 of this layer
        C_NRM: begin
          nk <= nk + 1'b1;
          case (nk)
            3'd1: g1  <= nrm_rd;
            3'd2: be1 <= nrm_rd;
            3'd3: g2  <= nrm_rd;
            3'd4: be2 <= nrm_rd;
            default: ;
          endcase
          if (nk == 3'd4) begin
            mha_start <= 1'b1;
            state     <= C_ROWS;
          end
        end
        C_ROWS: if (slot_valid) begin
          a_row      <= slot_data;
          row        <= slot_row;
          slot_valid <= 1'b0;
          state      <= C_LDX;
        end
        C_LDX: begin
          x_row <= x_b_rd;
          state <= C_R1;
        end
        C_R1: begin
          ln_in    <= res_y;
          ln_sel   <= 1'b0;
          ln_start <= 1'b1;
          state    <= C_LN1;
        end
        C_LN1: if (ln_done) begin
          x1        <= ln_y;
          ffn_start <= 1'b1;
          state     <= C_FFN;
        end
        C_FFN: if (ffn_done) begin
          ln_in    <= res_y;
          ln_sel   <= 1'b1;
          ln_start <= 1'b1;
          state    <= C_LN2;
        end
        C_LN2: if (ln_done) begin
          if (SW'(row) == cfg_len - 1'b1) begin
            if (32'(layer) + 1 < 32'(cfg_layers)) begin
              layer <= layer + 1'b1;
              nk    <= '0;
              state <= C_NRM;
            end else begin
              row   <= '0;
              state <= C_HEAD_RD;
            end
          end else begin
            state <= C_ROWS;
          end
        end
        C_HEAD_RD: state <= C_HEAD_LD;
        C_HEAD_LD: begin
          head_x     <= x_a_rd;
          head_start <= 1'b1;
          state      <= C_HEAD_RUN;
        end
        C_HEAD_RUN: if (head_done) begin
          if (SW'(row) == cfg_len - 1'b1) begin
            done   <= 1'b1;
            cycles <= cyc_cnt;
            state  <= C_IDLE;
          end else begin
            row   <= row + 1'b1;
            state <= C_HEAD_RD;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // a new layer only starts once the attention unit has finished the last
  assert property (@(posedge clk) disable iff (!rst_n) mha_start |-> !mha_busy);
  // the slot is never overwritten while full
  assert property (@(posedge clk) disable iff (!rst_n) slot_valid |-> !(mha_out_valid && mha_out_ready));

endmodule
