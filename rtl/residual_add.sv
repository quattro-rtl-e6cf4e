// residual_add: the "Add" of an Add & Norm step, y = a + b element by element
// with saturation to the 16-bit range. Purely combinational over N lanes;
// the saturation is this design's choice.
module residual_add
  import quattro_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  elem_t a [N],
  input  elem_t b [N],
  output elem_t y [N]
);

  always_comb begin
    for (int i = 0; i < N; i++)
      y[i] = sat(acc_t'(a[i]) + acc_t'(b[i]));
  end

endmodule
