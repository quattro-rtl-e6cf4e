// tb_layernorm_unit: self-checking test of the layer norm.
// Random vectors of several spreads, a constant vector (zero variance, only
// epsilon left), and one with a large offset are normalised with random gain
// and bias; every lane is compared with the golden model and the latency
// (done seen 56 clock edges after the edge that samples start) is checked.
module tb_layernorm_unit;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int D = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done;
  elem_t x [D], gamma [D], beta [D], y [D];

  layernorm_unit #(.D_MODEL(D)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int amp, input int offs, input bit constant);
    int xv[], gv[], bv[], yv[];
    xv = new[D]; gv = new[D]; bv = new[D];
    foreach (xv[i]) begin
      xv[i] = constant ? offs : offs + $urandom_range(2*amp) - amp;
      gv[i] = 768 + $urandom_range(512);
      bv[i] = $urandom_range(512) - 256;
    end
    layernorm(xv, gv, bv, yv);
    @(negedge clk);
    foreach (x[i]) begin x[i] = elem_t'(xv[i]); gamma[i] = elem_t'(gv[i]); beta[i] = elem_t'(bv[i]); end
    start = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    do @(posedge clk); while (!done);
    checks++;
    if (cyc - t0 != 56) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    foreach (y[i]) begin
      checks++;
      if (int'(y[i]) != yv[i]) begin
        failures++;
        $display("FAIL amp=%0d y[%0d]=%0d expected %0d", amp, i, y[i], yv[i]);
      end
    end
  endtask

  initial begin
    start = 0;
    foreach (x[i]) begin x[i] = '0; gamma[i] = '0; beta[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2048, 0, 0);
    run(200, 500, 0);
    run(16000, 0, 0);
    run(0, 1234, 1);
    run(5, -3000, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
