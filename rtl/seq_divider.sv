// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// start loads dividend and divisor; N_W cycles later done pulses for one cycle
// and quotient holds floor(dividend / divisor) until the next start. A zero
// divisor gives an all-ones quotient. Used for the softmax reciprocal and
// the layer-norm 1/sigma; the algorithm is this design's choice.
module seq_divider #(
  parameter int unsigned N_W = 27,
  parameter int unsigned D_W = 17
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N_W-1:0] dividend,
  input  logic [D_W-1:0] divisor,
  output logic           busy,
  output logic           done,
  output logic [N_W-1:0] quotient
);

  localparam int unsigned CW = $clog2(N_W + 1);

  logic [D_W-1:0] rem;
  logic [N_W-1:0] num;
  logic [D_W-1:0] den;
  logic [CW-1:0]  cnt;
  logic [D_W:0]   trial;

  assign trial = {rem[D_W-1:0], num[N_W-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      rem      <= '0;
      num      <= '0;
      den      <= '0;
      cnt      <= '0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        rem      <= '0;
        num      <= dividend;
        den      <= divisor;
        cnt      <= CW'(N_W);
        quotient <= '0;
      end else if (busy) begin
        if (trial >= {1'b0, den}) begin
          rem      <= D_W'(trial - {1'b0, den});
          quotient <= {quotient[N_W-2:0], 1'b1};
        end else begin
          rem      <= D_W'(trial);
          quotient <= {quotient[N_W-2:0], 1'b0};
        end
        num <= {num[N_W-2:0], 1'b0};
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
