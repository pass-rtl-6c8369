// Throughput sweep of the sparse matrix-vector engine for a 3x3 kernel: one
// engine for each k = 1..9 MACs, each fed the same windows, at sparsity levels
// 0%, 10%, ..., 100% (every feature value is zero with that probability).
// For each point the testbench measures equivalent operations per cycle,
// 9 * windows / cycles, and checks it two ways:
//  * exactly: the cycle count must equal the sum over windows of
//    max(1, ceil(nnz/k)) plus three edges of pipeline latency, and every dot
//    product must be correct;
//  * statistically: within 6% of the analytic expectation
//    9 / E[max(1, ceil(N/k))] with N ~ Binomial(9, 1 - sparsity).
// It prints the table of the engine's ops/cycle against sparsity and k.
module tb_smve_sweep;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int KK = 9, NWIN = 600, NS = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_ready;
  data_t [KK-1:0] fm, wt;
  logic [8:0] in_ready, out_valid;
  acc_t [8:0] out_data;
  int nrx [9];
  longint expv [NWIN];
  int nnzs [NWIN];
  int rx_ok [9];

  for (genvar g = 0; g < 9; g++) begin : g_eng
    smve #(.KK(KK), .K_MAC(g+1)) u (.clk, .rst_n, .in_valid(in_valid && !done_tx[g]),
      .in_ready(in_ready[g]), .in_fmap(fm_g[g]), .in_weight(wt_g[g]),
      .out_valid(out_valid[g]), .out_ready(out_ready), .out_data(out_data[g]));
  end

  // each engine has its own input pointer, so all run at full speed
  int txp [9];
  logic [8:0] done_tx;
  data_t [KK-1:0] wf [NWIN], ww [NWIN];
  data_t [KK-1:0] fm_g [9], wt_g [9];
  always_comb for (int g = 0; g < 9; g++) begin
    fm_g[g] = wf[(txp[g] < NWIN) ? txp[g] : 0];
    wt_g[g] = ww[(txp[g] < NWIN) ? txp[g] : 0];
    done_tx[g] = (txp[g] >= NWIN);
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real binom(int n, int x, real p);
    real c; c = 1.0;
    for (int i = 0; i < x; i++) c = c * (n - i) / (i + 1);
    return c * (p ** x) * ((1.0 - p) ** (n - x));
  endfunction

  longint cyc_start, cyc_end [9], cyc;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 9; g++) begin
      if (in_valid && !done_tx[g] && in_ready[g]) txp[g] <= txp[g] + 1;
      if (out_valid[g] && out_ready && nrx[g] < NWIN) begin
        if (out_data[g] !== acc_t'(expv[nrx[g]])) rx_ok[g]++;
        nrx[g] <= nrx[g] + 1;
        if (nrx[g] == NWIN-1) cyc_end[g] = cyc;
      end
    end
  end

  initial begin
    string line;
    cyc = 0;
    in_valid = 0; out_ready = 1;
    for (int g = 0; g < 9; g++) begin txp[g] = NWIN; nrx[g] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    $display("sparsity%%  ops/cycle for k = 1 .. 9");
    for (int si = 0; si < NS; si++) begin
      real s;
      s = si / 10.0;
      for (int n = 0; n < NWIN; n++) begin
        expv[n] = 0; nnzs[n] = 0;
        for (int i = 0; i < KK; i++) begin
          wf[n][i] = ($urandom_range(0, 999) < int'(s * 1000)) ? data_t'(0) : data_t'($urandom_range(1, 65535));
          ww[n][i] = data_t'($urandom);
          expv[n] += longint'(wf[n][i]) * longint'(ww[n][i]);
          if (wf[n][i] != 0) nnzs[n]++;
        end
      end
      @(negedge clk);
      for (int g = 0; g < 9; g++) begin txp[g] = 0; nrx[g] = 0; rx_ok[g] = 0; end
      in_valid = 1;
      @(posedge clk);
      cyc_start = cyc;
      wait (nrx[0] == NWIN && nrx[1] == NWIN && nrx[2] == NWIN && nrx[3] == NWIN && nrx[4] == NWIN &&
            nrx[5] == NWIN && nrx[6] == NWIN && nrx[7] == NWIN && nrx[8] == NWIN);
      @(negedge clk); in_valid = 0;
      line = $sformatf("%8d  ", si * 10);
      for (int g = 0; g < 9; g++) begin
        int k; longint expc; real ops, eops, ep;
        k = g + 1;
        expc = 3;
        for (int n = 0; n < NWIN; n++) expc += (nnzs[n] == 0) ? 1 : (nnzs[n] + k - 1) / k;
        ops = 9.0 * NWIN / real'(cyc_end[g] - cyc_start);
        ep = 0.0;
        for (int x = 0; x <= KK; x++) ep += binom(KK, x, 1.0 - s) * ((x == 0) ? 1 : (x + k - 1) / k);
        eops = 9.0 / ep;
        line = {line, $sformatf(" %5.2f", ops)};
        checks += 3;
        if (rx_ok[g] != 0) begin failures++; $display("FAIL k=%0d s=%0d%%: %0d wrong results", k, si*10, rx_ok[g]); end
        if (cyc_end[g] - cyc_start != expc) begin
          failures++; $display("FAIL k=%0d s=%0d%%: %0d cycles, expected %0d", k, si*10, cyc_end[g] - cyc_start, expc);
        end
        if (ops < eops * 0.94 || ops > eops * 1.06) begin
          failures++; $display("FAIL k=%0d s=%0d%%: %0.2f ops/cycle, model %0.2f", k, si*10, ops, eops);
        end
      end
      $display("%s", line);
      repeat (5) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
