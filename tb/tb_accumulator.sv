// Self-checking testbench for the channel accumulator (3 channels, 4
// filters): random dot products in channel-major, filter-minor order, random
// input gaps and output back-pressure; every emitted sum is compared with the
// sum over channels computed by the testbench.
module tb_accumulator;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int CI = 3, CO = 4, NPOS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, ordy;
  acc_t id, od;
  acc_t vals [NPOS*CI*CO];
  int nout = 0;

  accumulator #(.CI_PER(CI), .CO_PER(CO)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov && ordy) begin
      int p, co; acc_t e;
      p = nout / CO; co = nout % CO; e = 0;
      for (int ci = 0; ci < CI; ci++) e += vals[(p*CI+ci)*CO+co];
      checks++;
      if (od !== e) begin failures++; $display("FAIL out %0d got %0d exp %0d", nout, od, e); end
      nout++;
    end
    ordy <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    iv = 0; id = 0;
    for (int i = 0; i < NPOS*CI*CO; i++) vals[i] = acc_t'($signed($urandom));
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NPOS*CI*CO; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin iv = 0; @(negedge clk); end
      iv = 1; id = vals[i];
      @(posedge clk); while (!ir) @(posedge clk);
      #1 iv = 0;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (nout != NPOS*CO) begin failures++; $display("FAIL output count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
