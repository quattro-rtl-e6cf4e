// tb_dp_ram: self-checking test of the wide dual-port RAM: per-lane writes
// on port B, reads on both ports with one cycle of latency, read-first
// behaviour of port B, and lanes that must not change on a masked write.
module tb_dp_ram;
  import quattro_pkg::*;

  localparam int L = 8, DEP = 20, AW = $clog2(DEP);
  logic clk = 0;
  always #5 clk = ~clk;

  logic [AW-1:0] a_addr, b_addr;
  logic b_we;
  logic [L-1:0] b_lane_we;
  elem_t b_wdata [L], a_rdata [L], b_rdata [L];

  dp_ram #(.LANES(L), .DEPTH(DEP)) dut (.*);

  int model [DEP][L];
  int checks = 0, failures = 0;

  initial begin
    b_we = 0; b_lane_we = '0; a_addr = 0; b_addr = 0;
    foreach (b_wdata[i]) b_wdata[i] = '0;
    // fill every word
    for (int w = 0; w < DEP; w++) begin
      @(negedge clk);
      b_addr = AW'(w); b_we = 1; b_lane_we = '1;
      foreach (b_wdata[i]) begin model[w][i] = $urandom_range(65535) - 32768; b_wdata[i] = elem_t'(model[w][i]); end
    end
    @(negedge clk); b_we = 0;
    // random partial writes mixed with reads
    for (int r = 0; r < 200; r++) begin
      int wa, ra, old [L];
      logic [L-1:0] m;
      wa = $urandom_range(DEP-1); ra = $urandom_range(DEP-1);
      m = L'($urandom);
      for (int i = 0; i < L; i++) old[i] = model[wa][i];
      @(negedge clk);
      a_addr = AW'(ra); b_addr = AW'(wa); b_we = 1; b_lane_we = m;
      foreach (b_wdata[i]) b_wdata[i] = elem_t'($urandom_range(65535) - 32768);
      @(posedge clk); #1;
      for (int i = 0; i < L; i++) begin
        checks += 2;
        if (int'(b_rdata[i]) != old[i]) begin failures++; $display("FAIL read-first lane %0d", i); end
        if (int'(a_rdata[i]) != ((ra == wa) ? old[i] : model[ra][i])) begin failures++; $display("FAIL port A lane %0d", i); end
        if (m[i]) model[wa][i] = int'(b_wdata[i]);
      end
    end
    @(negedge clk); b_we = 0;
    for (int w = 0; w < DEP; w++) begin
      @(negedge clk); a_addr = AW'(w); b_addr = AW'(DEP - 1 - w);
      @(posedge clk); #1;
      for (int i = 0; i < L; i++) begin
        checks += 2;
        if (int'(a_rdata[i]) != model[w][i]) begin failures++; $display("FAIL final A %0d/%0d", w, i); end
        if (int'(b_rdata[i]) != model[DEP-1-w][i]) begin failures++; $display("FAIL final B %0d/%0d", w, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
