// Self-checking testbench for the barrier adder with 4 inputs. Each input
// lane offers its own random-gapped sequence; the testbench checks that every
// output is the sum of the lanes' items of the same index, that inputs are
// taken together, that the output holds under back-pressure, and that the
// barrier actually waited (some but not all lanes valid) at least once.
module tb_sync_adder;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 4, NI = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] iv, ir;
  acc_t [N-1:0] id;
  logic ov, ordy, waiting;
  acc_t od;
  acc_t vals [N][NI];
  int ntx [N];
  int nout = 0, nwait = 0;

  sync_adder #(.N(N)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .waiting);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (ov && ordy) begin
        acc_t e; e = 0;
        for (int m = 0; m < N; m++) e += vals[m][nout];
        checks++;
        if (od !== e) begin failures++; $display("FAIL out %0d", nout); end
        nout++;
      end
      if (waiting) nwait++;
      checks++;
      if (ir != '0 && ir != '1) begin failures++; $display("FAIL partial take"); end
    end
    ordy <= ($urandom_range(0, 2) != 0);
  end

  for (genvar m = 0; m < N; m++) begin : g_drv
    initial begin
      iv[m] = 0; id[m] = 0; ntx[m] = 0;
      for (int i = 0; i < NI; i++) vals[m][i] = acc_t'($signed($urandom));
      wait (rst_n);
      for (int i = 0; i < NI; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin iv[m] = 0; @(negedge clk); end
        iv[m] = 1; id[m] = vals[m][i];
        @(posedge clk); while (!ir[m]) @(posedge clk);
        #1 iv[m] = 0;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (nout == NI);
    repeat (5) @(posedge clk);
    checks++;
    if (nwait == 0) begin failures++; $display("FAIL barrier never waited"); end
    $display("barrier waited %0d cycles", nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
