// Self-checking testbench for the adder tree at sizes 1, 3, 5 and 32 with
// random signed operands.
module tb_adder_tree;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  acc_t [0:0]  i1; acc_t s1;
  acc_t [2:0]  i3; acc_t s3;
  acc_t [4:0]  i5; acc_t s5;
  acc_t [31:0] i32; acc_t s32;

  adder_tree #(.N(1))  u1  (.in(i1),  .sum(s1));
  adder_tree #(.N(3))  u3  (.in(i3),  .sum(s3));
  adder_tree #(.N(5))  u5  (.in(i5),  .sum(s5));
  adder_tree #(.N(32)) u32 (.in(i32), .sum(s32));

  function automatic acc_t rnd();
    return acc_t'($signed({$urandom, $urandom}) >>> $urandom_range(8, 30));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      acc_t m1, m3, m5, m32;
      m1 = 0; m3 = 0; m5 = 0; m32 = 0;
      i1[0] = rnd(); m1 = i1[0];
      for (int i = 0; i < 3; i++)  begin i3[i]  = rnd(); m3  += i3[i];  end
      for (int i = 0; i < 5; i++)  begin i5[i]  = rnd(); m5  += i5[i];  end
      for (int i = 0; i < 32; i++) begin i32[i] = rnd(); m32 += i32[i]; end
      #1;
      checks += 4;
      if (s1 !== m1)   begin failures++; $display("FAIL N=1"); end
      if (s3 !== m3)   begin failures++; $display("FAIL N=3"); end
      if (s5 !== m5)   begin failures++; $display("FAIL N=5"); end
      if (s32 !== m32) begin failures++; $display("FAIL N=32"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
