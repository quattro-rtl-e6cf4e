// tb_ffn_unit: self-checking test of the feed-forward block at a reduced size
// (d_model 16, maximum d_ff 64, two layers). Random rows run through both
// layers with d_ff = 64 and with the narrower d_ff = 32, against a behavioural
// weight and bias RAM; every output element is compared with the golden
// model (ReLU hidden layer, linear output) and the row time (2*d_ff + 7
// clock edges from start to done) is checked.
module tb_ffn_unit;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int D = 16, F = 64, NL = 2, KW = F / D;
  localparam int WA = $clog2(NL * 2 * F), BA = $clog2(NL * (KW + 1));
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [3:0] layer;
  logic [$clog2(F+1)-1:0] d_ff;
  elem_t x_in [D], y_out [D];
  logic [WA-1:0] w_addr;
  logic [BA-1:0] b_addr;
  elem_t w_rdata [D], b_rdata [D];

  ffn_unit #(.D_MODEL(D), .D_FF(F), .N_LAYER(NL)) dut (.*);

  int wmem [NL*2*F][D];
  int bmem [NL*(KW+1)][D];
  always_ff @(posedge clk)
    for (int i = 0; i < D; i++) begin
      w_rdata[i] <= elem_t'(wmem[w_addr][i]);
      b_rdata[i] <= elem_t'(bmem[b_addr][i]);
    end

  int checks = 0, failures = 0, cyc = 0, t0 = 0, relu_zeros = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int l, input int dff);
    int x[], h[], y[D];
    int wb, bb, kw;
    wb = l * 2 * F; bb = l * (KW + 1); kw = dff / D;
    x = new[D]; h = new[dff];
    foreach (x[i]) x[i] = $urandom_range(4096) - 2048;
    for (int n = 0; n < dff; n++) begin
      int w[];
      w = new[D];
      foreach (w[i]) w[i] = wmem[wb + n][i];
      h[n] = lin(x, w, bmem[bb + n / D][n % D], 1);
      if (h[n] == 0) relu_zeros++;
    end
    for (int m = 0; m < D; m++) begin
      int w[];
      w = new[dff];
      for (int c = 0; c < kw; c++)
        for (int i = 0; i < D; i++) w[c*D + i] = wmem[wb + F + m*kw + c][i];
      y[m] = lin(h, w, bmem[bb + KW][m], 0);
    end
    @(negedge clk);
    foreach (x_in[i]) x_in[i] = elem_t'(x[i]);
    layer = 4'(l); d_ff = ($clog2(F+1))'(dff); start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    do @(posedge clk); while (!done);
    checks++;
    if (cyc - t0 != 2*dff + 7) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    for (int m = 0; m < D; m++) begin
      checks++;
      if (int'(y_out[m]) != y[m]) begin failures++; $display("FAIL l=%0d dff=%0d y[%0d]=%0d expected %0d", l, dff, m, y_out[m], y[m]); end
    end
  endtask

  initial begin
    start = 0; layer = 0; d_ff = F;
    foreach (x_in[i]) x_in[i] = '0;
    foreach (wmem[r, i]) wmem[r][i] = $urandom_range(512) - 256;
    foreach (bmem[r, i]) bmem[r][i] = $urandom_range(1024) - 512;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      run(0, 64);
      run(1, 64);
      run(1, 32);
      run(0, 48);
    end
    checks++;
    if (relu_zeros == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("relu clipped %0d hidden values", relu_zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
