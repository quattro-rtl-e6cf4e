// tb_quattro_accel: end-to-end test of the accelerator at a reduced size (8 positions, d_model 16,
// 4 heads, d_ff up to 64, 3 layers, 12 outputs), with several run configurations.
// The testbench loads random weights, norm parameters and input rows through
// the host port, runs the accelerator and compares every output of the Linear
// head with a golden model of the whole decoder stack (causal attention,
// Add & Norm, ReLU feed-forward, Add & Norm, Linear). It also checks the run
// time against the cycle counter, that host writes are ignored while busy,
// and counts how often each mechanism happened: attention-row stalls on the
// hand-over slot, layer changes, ReLU clipping, runtime configuration changes.
module tb_quattro_accel;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int SM = 8, D = 16, NH = 4, F = 64, NL = 3, DO = 12;
  localparam int DH = D / NH, KW = F / D, RW = $clog2(SM), LNW = $clog2(D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_we, start, busy, done;
  bank_e host_bank;
  logic [15:0] host_addr;
  logic [LNW-1:0] host_lane, host_rlane;
  elem_t host_wdata, host_rdata;
  logic [RW-1:0] host_raddr;
  logic [$clog2(SM+1)-1:0] seq_len;
  logic [$clog2(NL+1)-1:0] n_layers;
  logic [$clog2(F+1)-1:0] d_ff;
  logic [$clog2(DO+1)-1:0] d_out;
  logic [31:0] cycles;

  quattro_accel #(.SEQ_MAX(8), .D_MODEL(16), .N_HEAD(4), .D_FF(64), .N_LAYER(3), .D_OUT(12)) dut (.*);

  // model state
  int aw [NL*4*D][D];
  int ab [NL*4][D];
  int fw [NL*2*F][D];
  int fb [NL*(KW+1)][D];
  int nr [NL*4][D];
  int hw [DO][D];
  int hb [D];
  int xm [SM][D];

  int checks = 0, failures = 0;
  int stalls = 0, layer_starts = 0, relu_clips = 0, cfg_changes = 0, head_rows = 0;
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.mha_out_valid && !dut.mha_out_ready) stalls++;
    if (dut.mha_start) layer_starts++;
    if (dut.u_ffn.u_lin.y_valid && dut.u_ffn.lin_relu && dut.u_ffn.u_lin.y_data == 0) relu_clips++;
    if (dut.head_done) head_rows++;
  end

  task automatic hwrite(input bank_e b, input int a, input int lane, input int v);
    @(negedge clk);
    host_we = 1; host_bank = b; host_addr = 16'(a); host_lane = LNW'(lane); host_wdata = elem_t'(v);
  endtask

  task automatic load_all();
    foreach (aw[r, i]) begin aw[r][i] = $urandom_range(200) - 100; hwrite(BANK_ATTN_W, r, i, aw[r][i]); end
    foreach (ab[r, i]) begin ab[r][i] = $urandom_range(256) - 128; hwrite(BANK_ATTN_B, r, i, ab[r][i]); end
    foreach (fw[r, i]) begin fw[r][i] = $urandom_range(160) - 80;  hwrite(BANK_FFN_W, r, i, fw[r][i]); end
    foreach (fb[r, i]) begin fb[r][i] = $urandom_range(256) - 128; hwrite(BANK_FFN_B, r, i, fb[r][i]); end
    foreach (nr[r, i]) begin
      nr[r][i] = (r % 2 == 0) ? 768 + $urandom_range(512) : $urandom_range(256) - 128;
      hwrite(BANK_NORM, r, i, nr[r][i]);
    end
    foreach (hw[r, i]) begin hw[r][i] = $urandom_range(200) - 100; hwrite(BANK_HEAD_W, r, i, hw[r][i]); end
    foreach (hb[i]) begin hb[i] = $urandom_range(256) - 128; hwrite(BANK_HEAD_B, 0, i, hb[i]); end
    @(negedge clk); host_we = 0;
  endtask

  task automatic load_x(input int T);
    for (int t = 0; t < T; t++)
      for (int i = 0; i < D; i++) begin
        xm[t][i] = $urandom_range(4096) - 2048;
        hwrite(BANK_X, t, i, xm[t][i]);
      end
    @(negedge clk); host_we = 0;
  endtask

  function automatic void nrow(input int idx, output int r[]);
    r = new[D];
    foreach (r[i]) r[i] = nr[idx][i];
  endfunction

  function automatic void getrow(input int src [SM][D], input int t, output int r[]);
    r = new[D];
    foreach (r[i]) r[i] = src[t][i];
  endfunction

  // golden model of the whole accelerator, result in y
  task automatic model(input int T, input int L, input int dff, input int dout, output int y [SM][DO]);
    int x [SM][D];
    x = xm;
    for (int l = 0; l < L; l++) begin
      int q [SM][D], k [SM][D], v [SM][D];
      for (int t = 0; t < T; t++) begin
        int xr[];
        getrow(x, t, xr);
        for (int n = 0; n < 3*D; n++) begin
          int w[], r;
          w = new[D];
          foreach (w[i]) w[i] = aw[l*4*D + n][i];
          r = lin(xr, w, ab[l*4 + n / D][n % D], 0);
          if (n < D) q[t][n] = r; else if (n < 2*D) k[t][n-D] = r; else v[t][n-2*D] = r;
        end
      end
      for (int t = 0; t < T; t++) begin
        int ctx[], a[], r1[], x1[], h[], f[], r2[], x2[], g[], b[];
        ctx = new[D]; a = new[D]; r1 = new[D]; h = new[dff]; f = new[D]; r2 = new[D];
        for (int hh = 0; hh < NH; hh++) begin
          int s[], p[];
          s = new[t+1];
          for (int j = 0; j <= t; j++) begin
            int qa[], ka[];
            qa = new[DH]; ka = new[DH];
            for (int i = 0; i < DH; i++) begin qa[i] = q[t][hh*DH+i]; ka[i] = k[j][hh*DH+i]; end
            s[j] = score(qa, ka, DH);
          end
          softmax(s, p);
          for (int i = 0; i < DH; i++) begin
            longint acc;
            acc = 0;
            for (int j = 0; j <= t; j++) acc += longint'(p[j]) * v[j][hh*DH+i];
            ctx[hh*DH+i] = sat16(rsh(acc, 10));
          end
        end
        for (int m = 0; m < D; m++) begin
          int w[];
          w = new[D];
          foreach (w[i]) w[i] = aw[l*4*D + 3*D + m][i];
          a[m] = lin(ctx, w, ab[l*4 + 3][m], 0);
          r1[m] = sat16(longint'(x[t][m]) + a[m]);
        end
        nrow(l*4 + 0, g); nrow(l*4 + 1, b);
        layernorm(r1, g, b, x1);
        for (int n = 0; n < dff; n++) begin
          int w[];
          w = new[D];
          foreach (w[i]) w[i] = fw[l*2*F + n][i];
          h[n] = lin(x1, w, fb[l*(KW+1) + n / D][n % D], 1);
        end
        for (int m = 0; m < D; m++) begin
          int w[];
          w = new[dff];
          for (int c = 0; c < dff / D; c++)
            for (int i = 0; i < D; i++) w[c*D + i] = fw[l*2*F + F + m*(dff/D) + c][i];
          f[m] = lin(h, w, fb[l*(KW+1) + KW][m], 0);
          r2[m] = sat16(longint'(x1[m]) + f[m]);
        end
        nrow(l*4 + 2, g); nrow(l*4 + 3, b);
        layernorm(r2, g, b, x2);
        foreach (x2[i]) x[t][i] = x2[i];
      end
    end
    for (int t = 0; t < T; t++) begin
      int xr[];
      getrow(x, t, xr);
      for (int o = 0; o < dout; o++) begin
        int w[];
        w = new[D];
        foreach (w[i]) w[i] = hw[o][i];
        y[t][o] = lin(xr, w, hb[o], 0);
      end
    end
  endtask

  int last_dff = -1;
  task automatic run(input int T, input int L, input int dff, input int dout);
    int y [SM][DO];
    int t0, x_probe;
    load_x(T);
    model(T, L, dff, dout, y);
    if (last_dff >= 0 && last_dff != dff) cfg_changes++;
    last_dff = dff;
    @(negedge clk);
    seq_len = ($clog2(SM+1))'(T); n_layers = ($clog2(NL+1))'(L);
    d_ff = ($clog2(F+1))'(dff); d_out = ($clog2(DO+1))'(dout); start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    // a host write while busy must not reach the weights
    x_probe = aw[0][0];
    host_we = 1; host_bank = BANK_ATTN_W; host_addr = 0; host_lane = 0; host_wdata = elem_t'(x_probe + 1);
    @(negedge clk); host_we = 0;
    do @(posedge clk); while (!done);
    checks++;
    if (int'(cycles) != cyc - t0 - 1) begin failures++; $display("FAIL cycle counter %0d vs %0d", cycles, cyc - t0); end
    $display("run T=%0d layers=%0d d_ff=%0d d_out=%0d: %0d cycles", T, L, dff, dout, cycles);
    for (int t = 0; t < T; t++)
      for (int o = 0; o < dout; o++) begin
        @(negedge clk); host_raddr = RW'(t); host_rlane = LNW'(o);
        @(negedge clk);
        checks++;
        if (int'(host_rdata) != y[t][o]) begin
          failures++;
          if (failures < 20) $display("FAIL row %0d out %0d: %0d expected %0d", t, o, host_rdata, y[t][o]);
        end
      end
    checks++;
    if (int'(dut.u_attn_w.mem[0][0]) != x_probe) begin failures++; $display("FAIL host write landed while busy"); end
  endtask

  initial begin
    host_we = 0; host_bank = BANK_X; host_addr = 0; host_lane = 0; host_wdata = 0;
    host_raddr = 0; host_rlane = 0; start = 0; seq_len = 1; n_layers = 1; d_ff = ($clog2(F+1))'(D); d_out = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    run(8, 3, 64, 12);
    run(5, 3, 32, 5);
    run(8, 1, 64, 12);
    run(1, 2, 48, 3);
    run(8, 3, 64, 12);
    $display("mechanisms: stalls=%0d layer_starts=%0d relu_clips=%0d cfg_changes=%0d head_rows=%0d",
             stalls, layer_starts, relu_clips, cfg_changes, head_rows);
    checks += 5;
    if (stalls == 0)       begin failures++; $display("FAIL no attention stall"); end
    if (layer_starts < 2)  begin failures++; $display("FAIL no layer change"); end
    if (relu_clips == 0)   begin failures++; $display("FAIL ReLU never clipped"); end
    if (cfg_changes == 0)  begin failures++; $display("FAIL no configuration change"); end
    if (head_rows == 0)    begin failures++; $display("FAIL output head never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
