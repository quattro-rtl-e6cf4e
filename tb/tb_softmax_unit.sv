// tb_softmax_unit: self-checking test of the softmax unit.
// Random score vectors of length 1, 2, 7, 30 and 50 (plus one with a large
// spread, so that small exponentials underflow to zero) are compared entry by
// entry with the golden model; entries past len must stay zero (masked) and
// done must come 3*len + 30 cycles after start.
module tb_softmax_unit;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int SM = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done;
  logic [$clog2(SM+1)-1:0] len;
  elem_t scores [SM];
  prob_t probs [SM];

  softmax_unit #(.SEQ_MAX(SM)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int n, input int amp);
    int s[], p[];
    s = new[n];
    foreach (s[i]) s[i] = $urandom_range(2*amp) - amp;
    softmax(s, p);
    @(negedge clk);
    for (int i = 0; i < SM; i++) scores[i] = (i < n) ? elem_t'(s[i]) : elem_t'(30000);
    len = ($clog2(SM+1))'(n); start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    do @(posedge clk); while (!done);
    checks++;
    if (cyc - t0 != 3*n + 30) begin failures++; $display("FAIL latency n=%0d: %0d", n, cyc - t0); end
    for (int i = 0; i < SM; i++) begin
      checks++;
      if (int'(probs[i]) != ((i < n) ? p[i] : 0)) begin
        failures++;
        $display("FAIL n=%0d p[%0d]=%0d expected %0d", n, i, probs[i], (i < n) ? p[i] : 0);
      end
    end
  endtask

  initial begin
    start = 0; len = 1;
    foreach (scores[i]) scores[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 2000);
    run(2, 2000);
    run(7, 3000);
    run(30, 2000);
    run(50, 1500);
    run(50, 20000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
