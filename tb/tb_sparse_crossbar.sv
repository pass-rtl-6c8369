// Self-checking testbench for the sparse crossbar: random request masks for a
// 3x3 window squeezed to 3 MACs and a 2x2 window to 3 MACs (the paper's
// figure), compared with an independent model of "route the first k
// requesting pairs, in index order".
module tb_sparse_crossbar;
  import pass_pkg::*;
  int checks = 0, failures = 0;

  localparam int KA = 9, MA = 3;
  localparam int KB = 4, MB = 3;

  data_t [KA-1:0] fa, wa; logic [KA-1:0] ra, ga;
  data_t [MA-1:0] foa, woa; logic [MA-1:0] voa;
  data_t [KB-1:0] fb, wb; logic [KB-1:0] rb, gb;
  data_t [MB-1:0] fob, wob; logic [MB-1:0] vob;

  sparse_crossbar #(.KK(KA), .K_MAC(MA)) ua (.fmap(fa), .weight(wa), .req(ra),
    .fmap_o(foa), .weight_o(woa), .valid_o(voa), .grant(ga));
  sparse_crossbar #(.KK(KB), .K_MAC(MB)) ub (.fmap(fb), .weight(wb), .req(rb),
    .fmap_o(fob), .weight_o(wob), .valid_o(vob), .grant(gb));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int n;
      for (int i = 0; i < KA; i++) begin fa[i] = data_t'($urandom); wa[i] = data_t'($urandom); end
      for (int i = 0; i < KB; i++) begin fb[i] = data_t'($urandom); wb[i] = data_t'($urandom); end
      ra = KA'($urandom); rb = KB'($urandom);
      if (t == 0) begin ra = '0; rb = '0; end
      if (t == 1) begin ra = '1; rb = '1; end
      #1;
      // model A
      n = 0;
      for (int i = 0; i < KA; i++) begin
        if (ra[i] && n < MA) begin
          checks++;
          if (!ga[i] || !voa[n] || foa[n] !== fa[i] || woa[n] !== wa[i]) begin
            failures++; $display("FAIL A t=%0d i=%0d lane=%0d", t, i, n);
          end
          n++;
        end else begin
          checks++;
          if (ga[i]) begin failures++; $display("FAIL A spurious grant t=%0d i=%0d", t, i); end
        end
      end
      for (int j = n; j < MA; j++) begin
        checks++;
        if (voa[j]) begin failures++; $display("FAIL A lane %0d valid", j); end
      end
      // model B
      n = 0;
      for (int i = 0; i < KB; i++) begin
        if (rb[i] && n < MB) begin
          checks++;
          if (!gb[i] || !vob[n] || fob[n] !== fb[i] || wob[n] !== wb[i]) begin
            failures++; $display("FAIL B t=%0d i=%0d", t, i);
          end
          n++;
        end else begin
          checks++;
          if (gb[i]) begin failures++; $display("FAIL B spurious grant"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
