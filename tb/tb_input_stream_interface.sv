// Self-checking testbench for the input stream interface with 4 lanes:
// random input words, independent random lane readiness. Each lane must
// receive its value of every word in order, no lane may get more than one
// word ahead of another, and stalls of a single lane must occur.
module tb_input_stream_interface;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 4, NI = 500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir;
  data_t [N-1:0] id, od;
  logic [N-1:0] ov, ordy;
  data_t words [NI][N];
  int nrx [N];
  int nstall = 0;

  input_stream_interface #(.N(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      int mx, mn;
      for (int m = 0; m < N; m++) if (ov[m] && ordy[m]) begin
        checks++;
        if (od[m] !== words[nrx[m]][m]) begin failures++; $display("FAIL lane %0d word %0d", m, nrx[m]); end
        nrx[m]++;
      end
      mx = nrx[0]; mn = nrx[0];
      for (int m = 1; m < N; m++) begin if (nrx[m] > mx) mx = nrx[m]; if (nrx[m] < mn) mn = nrx[m]; end
      checks++;
      if (mx - mn > 1) begin failures++; $display("FAIL lanes drifted %0d..%0d", mn, mx); end
      if (iv && !ir) nstall++;
    end
    ordy <= N'($urandom) | N'($urandom);
  end

  initial begin
    iv = 0; id = '0;
    for (int m = 0; m < N; m++) nrx[m] = 0;
    for (int i = 0; i < NI; i++) for (int m = 0; m < N; m++) words[i][m] = data_t'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      iv = 1; for (int m = 0; m < N; m++) id[m] = words[i][m];
      @(posedge clk); while (!ir) @(posedge clk);
      #1 iv = 0;
    end
    repeat (20) @(posedge clk);
    for (int m = 0; m < N; m++) begin checks++; if (nrx[m] != NI) begin failures++; $display("FAIL lane %0d count", m); end end
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL barrier never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
