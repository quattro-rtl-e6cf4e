// tb_residual_add: self-checking test of the saturating residual adder,
// with random vectors and with sums that overflow in both directions.
module tb_residual_add;
  import quattro_pkg::*;
  import quattro_ref_pkg::*;

  localparam int N = 128;
  elem_t a [N], b [N], y [N];
  residual_add #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int r = 0; r < 20; r++) begin
      int amp;
      amp = (r < 10) ? 4000 : 32767;
      foreach (a[i]) begin
        a[i] = elem_t'($urandom_range(2*amp) - amp);
        b[i] = elem_t'($urandom_range(2*amp) - amp);
      end
      #1;
      foreach (y[i]) begin
        checks++;
        if (int'(y[i]) != sat16(longint'(a[i]) + longint'(b[i]))) begin
          failures++;
          $display("FAIL %0d + %0d = %0d", a[i], b[i], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
