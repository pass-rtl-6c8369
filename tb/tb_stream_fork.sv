// Self-checking testbench for the eager stream fork with 3 branches: random
// input gaps and independent random branch readiness. Every branch must see
// every item exactly once, in order, and the input must only be retired when
// all branches have taken it.
module tb_stream_fork;
  int checks = 0, failures = 0;
  localparam int N = 3, WD = 16, NI = 1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir;
  logic [WD-1:0] id, od;
  logic [N-1:0] ov, ordy;
  int nrx [N];
  int ntx;

  stream_fork #(.N(N), .WIDTH(WD)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < N; b++) if (ov[b] && ordy[b]) begin
        checks++;
        if (od !== WD'(nrx[b] * 7 + 1)) begin failures++; $display("FAIL branch %0d item %0d", b, nrx[b]); end
        nrx[b]++;
      end
      if (iv && ir) ntx++;
    end
    ordy <= N'($urandom);
  end

  initial begin
    iv = 0; id = 0; ntx = 0;
    for (int b = 0; b < N; b++) nrx[b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin iv = 0; @(negedge clk); end
      iv = 1; id = WD'(i * 7 + 1);
      @(posedge clk); while (!ir) @(posedge clk);
      #1;
      // retired: every branch must have taken exactly i+1 items
      for (int b = 0; b < N; b++) begin
        checks++;
        if (nrx[b] != i + 1) begin failures++; $display("FAIL retire item %0d branch %0d has %0d", i, b, nrx[b]); end
      end
      iv = 0;
    end
    repeat (10) @(posedge clk);
    for (int b = 0; b < N; b++) begin checks++; if (nrx[b] != NI) begin failures++; $display("FAIL branch %0d count %0d", b, nrx[b]); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
