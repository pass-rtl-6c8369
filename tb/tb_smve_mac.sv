// Self-checking testbench for one S-MVE MAC: random sequences of clear,
// enable and valid against a software partial-sum model.
module tb_smve_mac;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en, clear, valid;
  data_t a, b;
  acc_t acc;
  longint model;

  smve_mac dut (.clk, .rst_n, .en, .clear, .valid, .a, .b, .acc);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clear = 0; valid = 0; a = 0; b = 0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      clear = ($urandom_range(0, 4) == 0);
      valid = ($urandom_range(0, 3) != 0);
      a = data_t'($urandom); b = data_t'($urandom);
      if (en) model = (clear ? 0 : model) + (valid ? longint'(a) * longint'(b) : 0);
      @(posedge clk); #1;
      checks++;
      if (acc !== acc_t'(model)) begin failures++; $display("FAIL t=%0d acc=%0d model=%0d", t, acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
