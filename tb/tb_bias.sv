// Self-checking testbench for the bias module with 5 output channels: loads
// random biases, streams random sums with gaps and back-pressure and checks
// each output against sum + bias of its channel.
module tb_bias;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int CO = 5, NI = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [$clog2(CO)-1:0] wr_addr; data_t wr_data;
  logic iv, ir, ov, ordy;
  acc_t id, od;
  data_t b [CO];
  acc_t vals [NI];
  int nout = 0;

  bias #(.CO_PER(CO)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov && ordy) begin
      checks++;
      if (od !== vals[nout] + acc_t'(b[nout % CO])) begin failures++; $display("FAIL out %0d", nout); end
      nout++;
    end
    ordy <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    iv = 0; id = 0; wr_en = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < CO; i++) b[i] = data_t'($urandom);
    for (int i = 0; i < NI; i++) vals[i] = acc_t'($signed($urandom));
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < CO; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = $bits(wr_addr)'(i); wr_data = b[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin iv = 0; @(negedge clk); end
      iv = 1; id = vals[i];
      @(posedge clk); while (!ir) @(posedge clk);
      #1 iv = 0;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (nout != NI) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
