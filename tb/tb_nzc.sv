// Self-checking testbench for the Non-Zero Check: random and corner values,
// negative numbers included, for the feature-only and feature-and-weight
// variants.
module tb_nzc;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  data_t f, w;
  logic nz0, nz1;

  nzc #(.CHECK_WEIGHT(1'b0)) u0 (.fmap(f), .weight(w), .nz(nz0));
  nzc #(.CHECK_WEIGHT(1'b1)) u1 (.fmap(f), .weight(w), .nz(nz1));

  task automatic check(input data_t ff, input data_t ww);
    f = ff; w = ww; #1;
    checks += 2;
    if (nz0 !== (ff != 0)) begin failures++; $display("FAIL nz0 f=%0d", ff); end
    if (nz1 !== (ff != 0 && ww != 0)) begin failures++; $display("FAIL nz1 f=%0d w=%0d", ff, ww); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0); check(0, 5); check(1, 0); check(-1, 3); check(16'sh8000, -1); check(16'sh7fff, 0);
    for (int i = 0; i < 500; i++) begin
      data_t a, b;
      a = data_t'($urandom); b = data_t'($urandom);
      if ($urandom_range(0, 2) == 0) a = 0;
      if ($urandom_range(0, 3) == 0) b = 0;
      check(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
