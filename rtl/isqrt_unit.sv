// isqrt_unit: integer square root, digit by digit, one result bit per cycle.
//
// start loads an IN_W-bit radicand (IN_W even); IN_W/2 cycles later done
// pulses and root holds floor(sqrt(radicand)). Used by the layer norm to
// turn the variance into a standard deviation; the algorithm is this
// design's choice.
module isqrt_unit #(
  parameter int unsigned IN_W = 34,
  localparam int unsigned R_W = IN_W / 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IN_W-1:0] radicand,
  output logic            busy,
  output logic            done,
  output logic [R_W-1:0]  root
);

  localparam int unsigned CW = $clog2(R_W + 1);

  logic [IN_W-1:0] a;
  logic [R_W+1:0]  rem;
  logic [R_W+3:0]  rem_sh;
  logic [R_W+3:0]  trial;
  logic [CW-1:0]   cnt;

  assign rem_sh = {rem, a[IN_W-1 -: 2]};
  assign trial  = {2'b00, root, 2'b01};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      a    <= '0;
      rem  <= '0;
      root <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        a    <= radicand;
        rem  <= '0;
        root <= '0;
        cnt  <= CW'(R_W);
      end else if (busy) begin
        if (rem_sh >= trial) begin
          rem  <= (R_W+2)'(rem_sh - trial);
          root <= {root[R_W-2:0], 1'b1};
        end else begin
          rem  <= (R_W+2)'(rem_sh);
          root <= {root[R_W-2:0], 1'b0};
        end
        a   <= {a[IN_W-3:0], 2'b00};
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
