// Self-checking testbench for the Sparse Matrix-Vector Engine (3x3 window,
// k=3 MACs). Phase 1 streams windows of random sparsity with the output always
// ready and checks every dot product and the exact cycle count: each window
// must take max(1, ceil(nnz/k)) cycles; the count adds three edges: the
// accepting edge, the output register and the edge where the output is seen.
// Phase 2 adds random input gaps and output back-pressure and checks the
// results again. A second engine with k=1 checks the single-MAC configuration.
module tb_smve;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  localparam int KK = 9;
  localparam int NW = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [KK-1:0] fm, wt;
  acc_t out_data;
  logic in_ready1, out_valid1;
  acc_t out_data1;

  smve #(.KK(KK), .K_MAC(3)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_fmap(fm), .in_weight(wt),
    .out_valid, .out_ready, .out_data);
  smve #(.KK(KK), .K_MAC(1)) dut1 (.clk, .rst_n, .in_valid, .in_ready(in_ready1), .in_fmap(fm), .in_weight(wt),
    .out_valid(out_valid1), .out_ready(out_ready), .out_data(out_data1));

  data_t [KK-1:0] wf [NW], ww [NW];
  longint expv [NW];
  int passes3 [NW], passes1 [NW];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build the stimulus and the independent reference.
  initial begin
    for (int n = 0; n < NW; n++) begin
      int nnz, dens;
      dens = $urandom_range(0, 100);
      if (n % 17 == 0) dens = 0;
      if (n % 17 == 1) dens = 100;
      expv[n] = 0; nnz = 0;
      for (int i = 0; i < KK; i++) begin
        wf[n][i] = ($urandom_range(1, 100) <= dens) ? data_t'($urandom) : data_t'(0);
        if (wf[n][i] != 0 && $urandom_range(0,1)) wf[n][i] = -wf[n][i];
        ww[n][i] = data_t'($urandom);
        expv[n] += longint'(wf[n][i]) * longint'(ww[n][i]);
        if (wf[n][i] != 0) nnz++;
      end
      passes3[n] = (nnz == 0) ? 1 : (nnz + 2) / 3;
      passes1[n] = (nnz == 0) ? 1 : nnz;
    end
  end

  // Run one phase with engine `sel` (0: k=3, 1: k=1); both engines see the same inputs.
  int rx;
  task automatic run(input int sel, input bit stalls, output int cycles);
    int tx, t0;
    tx = 0; rx = 0; cycles = 0;
    in_valid = 0; out_ready = !stalls;
    fork
      begin
        while (tx < NW) begin
          @(negedge clk);
          if (stalls && $urandom_range(0, 3) == 0) begin in_valid = 0; end
          else begin
            in_valid = 1; fm = wf[tx]; wt = ww[tx];
            @(posedge clk);
            while (!((sel == 0) ? in_ready : in_ready1)) @(posedge clk);
            tx++;
          end
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        t0 = 0;
        while (rx < NW) begin
          @(posedge clk);
          cycles++;
          if (((sel == 0) ? out_valid : out_valid1) && out_ready) begin
            checks++;
            if (((sel == 0) ? out_data : out_data1) !== acc_t'(expv[rx])) begin
              failures++; $display("FAIL sel=%0d window %0d got %0d exp %0d", sel, rx,
                                   (sel == 0) ? out_data : out_data1, expv[rx]);
            end
            rx++;
          end
          if (stalls) begin #1; out_ready = ($urandom_range(0, 2) != 0); end
        end
      end
    join
  endtask

  initial begin
    int cyc, expc;
    in_valid = 0; out_ready = 1; fm = '0; wt = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // Phase 1: k=3 engine drives the handshake, exact cycle count.
    run(0, 0, cyc);
    expc = 3; for (int n = 0; n < NW; n++) expc += passes3[n];
    checks++;
    if (cyc != expc) begin failures++; $display("FAIL k=3 cycles %0d expected %0d", cyc, expc); end
    else $display("k=3: %0d windows in %0d cycles", NW, cyc);
    repeat (20) @(posedge clk);
    // Phase 2: k=1 engine, exact cycle count.
    run(1, 0, cyc);
    expc = 3; for (int n = 0; n < NW; n++) expc += passes1[n];
    checks++;
    if (cyc != expc) begin failures++; $display("FAIL k=1 cycles %0d expected %0d", cyc, expc); end
    else $display("k=1: %0d windows in %0d cycles", NW, cyc);
    repeat (20) @(posedge clk);
    // Phase 3: k=3 with gaps and back-pressure.
    run(0, 1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
