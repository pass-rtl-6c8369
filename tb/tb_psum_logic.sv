// Self-checking testbench for the PSUM logic: windows with random non-zero
// masks are loaded, the testbench grants the lowest pending bits (up to k
// per pass) as a crossbar would, and checks that the window takes
// max(1, ceil(nnz/k)) passes, that `first` is high only on the first pass and
// `last` only on the final one, and that back-to-back loads work.
module tb_psum_logic;
  int checks = 0, failures = 0;
  localparam int KK = 9, KM = 3;
  logic clk = 0, rst_n = 0;
  logic load, advance, active, first, last;
  logic [KK-1:0] nz_in, grant, rem;

  psum_logic #(.KK(KK)) dut (.clk, .rst_n, .load, .nz_in, .advance, .grant,
    .rem, .active, .first, .last);
  always #5 clk = ~clk;

  always_comb begin
    int n;
    n = 0; grant = '0;
    for (int i = 0; i < KK; i++) if (rem[i] && n < KM) begin grant[i] = 1; n++; end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; advance = 0; nz_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (active) begin failures++; $display("FAIL active after reset"); end
    for (int t = 0; t < 300; t++) begin
      logic [KK-1:0] m;
      int exp_p, p;
      m = KK'($urandom);
      if (t % 10 == 0) m = '0;
      if (t % 10 == 1) m = '1;
      exp_p = ($countones(m) + KM - 1) / KM; if (exp_p == 0) exp_p = 1;
      // load (back-to-back with the previous window's last pass when t>0)
      load = 1; nz_in = m; advance = (t > 0);
      @(negedge clk);
      load = 0;
      p = 0;
      forever begin
        advance = 1;
        #1;
        p++;
        checks++;
        if (first !== (p == 1)) begin failures++; $display("FAIL first t=%0d p=%0d", t, p); end
        if (last) break;
        if (p > KK) begin failures++; break; end
        @(negedge clk);
      end
      checks++;
      if (p != exp_p) begin failures++; $display("FAIL passes t=%0d mask=%b p=%0d exp=%0d", t, m, p, exp_p); end
      if (t % 7 == 3) begin  // idle gap: finish the pass without a new load
        @(negedge clk); advance = 0;
        checks++; if (active) begin failures++; $display("FAIL still active"); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
