// dp_ram: wide dual-port on-chip RAM (the block-RAM that holds model
// parameters and activation rows).
//
// One word is LANES 16-bit elements, so one read returns a whole row of a
// weight matrix or a whole d_model activation vector. Port A is read-only;
// port B reads, or writes any subset of the lanes of one word selected by
// b_lane_we. Both reads are synchronous with one cycle of latency; port B
// returns the old contents on a write to the same word (read-first).
// The paper stores the parameters in block RAM and uses dual-port RAM; the
// word width and the per-lane write enables are this design's choices.
module dp_ram
  import quattro_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [AW-1:0]    a_addr,
  output elem_t            a_rdata [LANES],
  input  logic [AW-1:0]    b_addr,
  input  logic             b_we,
  input  logic [LANES-1:0] b_lane_we,
  input  elem_t            b_wdata [LANES],
  output elem_t            b_rdata [LANES]
);

  elem_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
    if (b_we) begin
      for (int i = 0; i < LANES; i++)
        if (b_lane_we[i]) mem[b_addr][i] <= b_wdata[i];
    end
  end

endmodule
