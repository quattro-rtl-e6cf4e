// tb_mha_unit: self-checking test of masked multi-head attention at a reduced
// size (8 positions, d_model 16, 4 heads of 4, two layers). A behavioural row
// buffer and weight/bias RAMs surround the unit; the consumer's ready is
// random, so the unit has to hold its output row (stall). Every attention row
// is compared element by element with a golden model that applies the causal
// mask explicitly (row t attends to rows 0..t only).
module tb_mha_unit;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int SM = 8, D = 16, NH = 4, NL = 2, DH = D / NH;
  localparam int WA = $clog2(NL*4*D), BA = $clog2(NL*4), RW = $clog2(SM);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, out_valid, out_ready;
  logic [$clog2(SM+1)-1:0] seq_len;
  logic [3:0] layer;
  logic [RW-1:0] x_addr, out_row;
  logic [WA-1:0] w_addr;
  logic [BA-1:0] b_addr;
  elem_t x_rdata [D], w_rdata [D], b_rdata [D], out_data [D];

  mha_unit #(.SEQ_MAX(SM), .D_MODEL(D), .N_HEAD(NH), .N_LAYER(NL)) dut (.*);

  int xmem [SM][D];
  int wmem [NL*4*D][D];
  int bmem [NL*4][D];
  always_ff @(posedge clk)
    for (int i = 0; i < D; i++) begin
      x_rdata[i] <= elem_t'(xmem[x_addr][i]);
      w_rdata[i] <= elem_t'(wmem[w_addr][i]);
      b_rdata[i] <= elem_t'(bmem[b_addr][i]);
    end

  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && !out_ready) stalls++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(3) == 0);

  task automatic run(input int l, input int T);
    int q [SM][D], k [SM][D], v [SM][D], expo [SM][D];
    int got;
    foreach (xmem[t, i]) xmem[t][i] = $urandom_range(4096) - 2048;
    for (int t = 0; t < T; t++)
      for (int n = 0; n < 3*D; n++) begin
        int x[], w[], r;
        x = new[D]; w = new[D];
        foreach (x[i]) begin x[i] = xmem[t][i]; w[i] = wmem[l*4*D + n][i]; end
        r = lin(x, w, bmem[l*4 + n / D][n % D], 0);
        if (n < D) q[t][n] = r; else if (n < 2*D) k[t][n-D] = r; else v[t][n-2*D] = r;
      end
    for (int t = 0; t < T; t++) begin
      int ctx[];
      ctx = new[D];
      for (int h = 0; h < NH; h++) begin
        int s[], p[];
        s = new[t+1];
        for (int j = 0; j <= t; j++) begin
          int qa[], ka[];
          qa = new[DH]; ka = new[DH];
          for (int i = 0; i < DH; i++) begin qa[i] = q[t][h*DH+i]; ka[i] = k[j][h*DH+i]; end
          s[j] = score(qa, ka, DH);
        end
        softmax(s, p);
        for (int i = 0; i < DH; i++) begin
          longint acc;
          acc = 0;
          for (int j = 0; j <= t; j++) acc += longint'(p[j]) * v[j][h*DH+i];
          ctx[h*DH+i] = sat16(rsh(acc, 10));
        end
      end
      for (int m = 0; m < D; m++) begin
        int w[];
        w = new[D];
        foreach (w[i]) w[i] = wmem[l*4*D + 3*D + m][i];
        expo[t][m] = lin(ctx, w, bmem[l*4 + 3][m], 0);
      end
    end
    @(negedge clk);
    layer = 4'(l); seq_len = ($clog2(SM+1))'(T); start = 1;
    @(negedge clk); start = 0;
    got = 0;
    while (got < T) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_row) != got) begin failures++; $display("FAIL row order %0d vs %0d", out_row, got); end
        for (int m = 0; m < D; m++) begin
          checks++;
          if (int'(out_data[m]) != expo[got][m]) begin
            failures++;
            $display("FAIL l=%0d T=%0d row %0d [%0d]=%0d expected %0d", l, T, got, m, out_data[m], expo[got][m]);
          end
        end
        got++;
      end
    end
    @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL no done after last row"); end
  endtask

  initial begin
    start = 0; layer = 0; seq_len = 1;
    foreach (wmem[r, i]) wmem[r][i] = $urandom_range(700) - 350;
    foreach (bmem[r, i]) bmem[r][i] = $urandom_range(512) - 256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 8);
    run(1, 8);
    run(1, 1);
    run(0, 5);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL never stalled"); end
    $display("output stalls: %0d cycles", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
