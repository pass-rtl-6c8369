// Self-checking testbench for the stream FIFO (depth 5, not a power of two):
// random writes and reads against a queue model; checks data order, the
// occupancy count, that a full FIFO refuses data unless read in the same
// cycle, and that a full state is reached.
module tb_stream_fifo;
  int checks = 0, failures = 0;
  localparam int WD = 12, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, ordy;
  logic [WD-1:0] id, od;
  logic [$clog2(D+1)-1:0] cnt;
  logic [WD-1:0] q [$];
  int fulls = 0;

  stream_fifo #(.WIDTH(WD), .DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .count(cnt));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; ordy = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      @(negedge clk);
      bias = ((t / 500) % 2 == 0) ? 3 : 1;   // alternate filling and draining phases
      iv = ($urandom_range(0, 3) < bias); ordy = ($urandom_range(0, 3) >= bias);
      id = WD'($urandom);
      #1;
      checks += 3;
      if (cnt != q.size()) begin failures++; $display("FAIL count %0d vs %0d", cnt, q.size()); end
      if (ov != (q.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (ir != (q.size() < D || ordy)) begin failures++; $display("FAIL in_ready"); end
      if (q.size() == D) fulls++;
      if (ov && q.size() > 0) begin checks++; if (od !== q[0]) begin failures++; $display("FAIL data"); end end
      @(posedge clk);
      if (ov && ordy) void'(q.pop_front());
      if (iv && ir) q.push_back(id);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
