// Self-checking testbench for the weights memory: loads 3x4 random weight
// vectors (3 input channels, 4 filters), streams 30 windows with random
// back-pressure, and checks that each window is paired with the weights of
// filters 0..3 of its channel in turn, and released with the last pair.
module tb_weights_memory;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int KK = 9, CI = 3, CO = 4, NWIN = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [$clog2(CI*CO)-1:0] wr_addr; data_t [KK-1:0] wr_data;
  logic wv, wr, ov, ordy;
  data_t [KK-1:0] wd, of, ow;
  data_t [KK-1:0] wts [CI*CO];
  data_t [KK-1:0] wins [NWIN];
  int npair = 0, nwin_rel = 0;

  weights_memory #(.KK(KK), .CI_PER(CI), .CO_PER(CO)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .win_valid(wv), .win_ready(wr), .win_data(wd), .out_valid(ov), .out_ready(ordy),
    .out_fmap(of), .out_weight(ow));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov && ordy) begin
      int w, ci, co;
      w = npair / CO; co = npair % CO; ci = w % CI;
      checks += 2;
      if (of !== wins[w]) begin failures++; $display("FAIL window of pair %0d", npair); end
      if (ow !== wts[ci*CO+co]) begin failures++; $display("FAIL weight of pair %0d (ci %0d co %0d)", npair, ci, co); end
      checks++;
      if (wr !== (co == CO-1)) begin failures++; $display("FAIL window release at pair %0d", npair); end
      npair++;
    end
    ordy <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    wr_en = 0; wv = 0; wd = '0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < CI*CO; i++) for (int k = 0; k < KK; k++) wts[i][k] = data_t'($urandom);
    for (int i = 0; i < NWIN; i++) for (int k = 0; k < KK; k++) wins[i][k] = data_t'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = CI*CO-1; i >= 0; i--) begin
      @(negedge clk); wr_en = 1; wr_addr = $bits(wr_addr)'(i); wr_data = wts[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < NWIN; i++) begin
      @(negedge clk);
      wv = 1; wd = wins[i];
      @(posedge clk); while (!wr) @(posedge clk);
      #1 wv = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (npair != NWIN*CO) begin failures++; $display("FAIL pair count %0d", npair); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
