// tb_linear_unit: self-checking test of the matrix-vector engine.
// A behavioural weight RAM and bias RAM (one cycle of read latency) feed the
// engine; several operations with 1..4 chunks per output, ReLU on and off and
// saturating weights are compared output by output with the golden model,
// together with the output order and the cycle of every result.
module tb_linear_unit;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int L = 16, KWM = 4, NM = 24, WA = 8, BA = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, relu;
  logic [$clog2(KWM+1)-1:0] k_words;
  logic [$clog2(NM+1)-1:0]  n_out;
  logic [WA-1:0] w_base, w_addr;
  logic [BA-1:0] b_base, b_addr;
  elem_t x_vec [KWM*L];
  elem_t w_rdata [L], b_rdata [L];
  logic y_valid, busy, done;
  logic [$clog2(NM+1)-1:0] y_idx;
  elem_t y_data;

  linear_unit #(.LANES(L), .KW_MAX(KWM), .N_MAX(NM), .W_AW(WA), .B_AW(BA)) dut (.*);

  int wmem [256][L];
  int bmem [8][L];
  always_ff @(posedge clk) begin
    for (int i = 0; i < L; i++) begin
      w_rdata[i] <= elem_t'(wmem[w_addr][i]);
      b_rdata[i] <= elem_t'(bmem[b_addr][i]);
    end
  end

  int checks = 0, failures = 0;
  int cyc = 0, t0 = 0, got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int k, input int n, input bit rl, input int wb, input int bb, input int wamp);
    int x[];
    int exp_y [NM];
    x = new[k*L];
    foreach (x[i]) x[i] = $urandom_range(4096) - 2048;
    for (int r = 0; r < n*k; r++)
      for (int i = 0; i < L; i++) wmem[wb + r][i] = $urandom_range(2*wamp) - wamp;
    for (int r = 0; r < (n + L - 1) / L; r++)
      for (int i = 0; i < L; i++) bmem[bb + r][i] = $urandom_range(1024) - 512;
    for (int o = 0; o < n; o++) begin
      int xs[], ws[];
      xs = new[k*L]; ws = new[k*L];
      for (int c = 0; c < k; c++)
        for (int i = 0; i < L; i++) begin
          xs[c*L+i] = x[c*L+i];
          ws[c*L+i] = wmem[wb + o*k + c][i];
        end
      exp_y[o] = lin(xs, ws, bmem[bb + o / L][o % L], rl);
    end
    @(negedge clk);
    for (int i = 0; i < KWM*L; i++) x_vec[i] = (i < k*L) ? elem_t'(x[i]) : elem_t'(16'h7fff);
    k_words = ($clog2(KWM+1))'(k); n_out = ($clog2(NM+1))'(n);
    w_base = WA'(wb); b_base = BA'(bb); relu = rl; start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    got = 0;
    while (1) begin
      @(posedge clk);
      if (y_valid) begin
        checks++;
        if (int'(y_idx) != got || int'(y_data) != exp_y[got]) begin
          failures++;
          $display("FAIL k=%0d n=%0d out %0d: idx %0d data %0d expected %0d", k, n, got, y_idx, y_data, exp_y[got]);
        end
        checks++;
        if (cyc - t0 != (got + 1) * k + 2) begin
          failures++;
          $display("FAIL timing k=%0d out %0d at %0d", k, got, cyc - t0);
        end
        got++;
        if (done) break;
      end
    end
    checks++;
    if (got != n) begin failures++; $display("FAIL count %0d != %0d", got, n); end
  endtask

  initial begin
    start = 0; relu = 0; k_words = 1; n_out = 1; w_base = 0; b_base = 0;
    foreach (x_vec[i]) x_vec[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 24, 0, 0, 0, 128);
    run(4, 10, 1, 30, 2, 128);
    run(3, 7, 0, 100, 4, 128);
    run(2, 16, 0, 150, 5, 8000);   // large weights: saturation
    run(4, 24, 1, 0, 0, 300);
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
