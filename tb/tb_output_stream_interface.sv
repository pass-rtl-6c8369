// Self-checking testbench for the output stream interface with 3 lanes:
// each lane offers its own random-gapped sequence; every output word must hold
// item i of every lane, in order, and hold steady under back-pressure.
module tb_output_stream_interface;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 3, NI = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] iv, ir;
  acc_t [N-1:0] id, od;
  logic ov, ordy;
  acc_t vals [N][NI];
  int nout = 0;

  output_stream_interface #(.N(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov && ordy) begin
      for (int n = 0; n < N; n++) begin
        checks++;
        if (od[n] !== vals[n][nout]) begin failures++; $display("FAIL word %0d lane %0d", nout, n); end
      end
      nout++;
    end
    ordy <= ($urandom_range(0, 2) != 0);
  end

  for (genvar n = 0; n < N; n++) begin : g_drv
    initial begin
      iv[n] = 0; id[n] = 0;
      for (int i = 0; i < NI; i++) vals[n][i] = acc_t'($signed($urandom));
      wait (rst_n);
      for (int i = 0; i < NI; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin iv[n] = 0; @(negedge clk); end
        iv[n] = 1; id[n] = vals[n][i];
        @(posedge clk); while (!ir[n]) @(posedge clk);
        #1 iv[n] = 0;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (nout == NI);
    repeat (5) @(posedge clk);
    checks++;
    if (ov) begin failures++; $display("FAIL extra word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
