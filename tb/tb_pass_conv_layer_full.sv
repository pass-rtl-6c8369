// End-to-end testbench of the convolutional layer at its default parameters
// (56x56x64 -> 64 channels, 3x3 kernel, N_I=32, N_O=1, k=1, buffer depth 32).
// The localparams below mirror those defaults; the layer is instantiated
// without overrides.
//
// Streams one frame(s) of a random post-ReLU feature map (non-negative
// values, each input stream with its own zero density so the streams run at
// different speeds) through the convolutional layer, after loading random
// weights and biases, and compares every output with a direct convolution
// computed by the testbench. The first frame runs with the output always
// ready and its cycle count is checked: it may not be below the slowest
// stream's work (sum over its windows of C_O/N_O * max(1, ceil(nnz/k))
// cycles) and not above the per-position lock-step bound (sum over output
// positions of the slowest stream's work at that position) plus 2% and a
// fixed pipeline allowance. Later frames add random output back-pressure. The testbench counts how often each
// mechanism of the design occurs and fails if one that applies never does:
// multi-pass dense windows, all-zero windows, windows with zeros skipped,
// a full S-MVE input buffer, a stream running ahead into its result buffer,
// the output barrier waiting for a slow stream,
// input and output back-pressure, and padding insertion. Fork branches
// running apart are counted but not required: the N_O engines behind one fork
// see the same feature values and so move in lock-step.
module tb_pass_conv_layer_full;
  import pass_pkg::*;
  int checks = 0, failures = 0;

  // the layer's default configuration (ResNet-18, 2nd layer: 56x56x64 -> 64, N_I=32, k=1)
  localparam int H = 56, W = 56, C_I = 64, C_O = 64, KX = 3, KY = 3, PAD = 1, STRIDE = 1;
  localparam int N_I = 32, N_O = 1, K_MAC = 1, FIFO_DEPTH = 32;
  localparam int FRAMES = 1, DENS_LO = 33, DENS_HI = 53;
  localparam longint WATCHDOG = 64'd100_000_000_000;
  localparam int KK = KX*KY;
  localparam int CI_PER = C_I / N_I, CO_PER = C_O / N_O;
  localparam int HO = (H + 2*PAD - KY) / STRIDE + 1, WO = (W + 2*PAD - KX) / STRIDE + 1;
  localparam int NIN = H*W*CI_PER, NOUT = HO*WO*CO_PER;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  data_t [N_I-1:0] in_data;
  acc_t  [N_O-1:0] out_data;
  logic wt_wr_en, bias_wr_en;
  logic [$clog2(C_I)-1:0] wt_wr_ci;
  logic [$clog2(C_O)-1:0] wt_wr_co, bias_wr_co;
  data_t [KK-1:0] wt_wr_data;
  data_t bias_wr_data;

  pass_conv_layer dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .wt_wr_en, .wt_wr_ci, .wt_wr_co, .wt_wr_data, .bias_wr_en, .bias_wr_co, .bias_wr_data);

  data_t img [FRAMES][H][W][C_I];
  data_t wts [C_O][C_I][KK];
  data_t bs  [C_O];
  int    dens [N_I];

  function automatic data_t px(int f, int y, int x, int c);
    if (y < 0 || y >= H || x < 0 || x >= W) return 0;
    return img[f][y][x][c];
  endfunction

  function automatic longint ref_out(int f, int oy, int ox, int co);
    longint s;
    s = longint'(bs[co]);
    for (int ci = 0; ci < C_I; ci++)
      for (int ky = 0; ky < KY; ky++)
        for (int kx = 0; kx < KX; kx++)
          s += longint'(px(f, oy*STRIDE+ky-PAD, ox*STRIDE+kx-PAD, ci)) * longint'(wts[co][ci][ky*KX+kx]);
    return s;
  endfunction

  // slowest stream's ideal cycle count for frame f
  function automatic longint ideal_cycles(int f);
    longint best, t;
    best = 0;
    for (int m = 0; m < N_I; m++) begin
      t = 0;
      for (int oy = 0; oy < HO; oy++) for (int ox = 0; ox < WO; ox++)
        for (int j = 0; j < CI_PER; j++) begin
          int nnz, p;
          nnz = 0;
          for (int ky = 0; ky < KY; ky++) for (int kx = 0; kx < KX; kx++)
            if (px(f, oy*STRIDE+ky-PAD, ox*STRIDE+kx-PAD, j*N_I+m) != 0) nnz++;
          p = (nnz + K_MAC - 1) / K_MAC; if (p == 0) p = 1;
          t += longint'(CO_PER * p);
        end
      if (t > best) best = t;
    end
    return best;
  endfunction

  // Lock-step bound for frame f: sum over output positions of the slowest
  // stream's work at that position. The barrier adder lets a stream run at most
  // about one position ahead of the others, so the layer needs close to this.
  function automatic longint lockstep_cycles(int f);
    longint tot, worst, t;
    tot = 0;
    for (int oy = 0; oy < HO; oy++) for (int ox = 0; ox < WO; ox++) begin
      worst = 0;
      for (int m = 0; m < N_I; m++) begin
        t = 0;
        for (int j = 0; j < CI_PER; j++) begin
          int nnz, p;
          nnz = 0;
          for (int ky = 0; ky < KY; ky++) for (int kx = 0; kx < KX; kx++)
            if (px(f, oy*STRIDE+ky-PAD, ox*STRIDE+kx-PAD, j*N_I+m) != 0) nnz++;
          p = (nnz + K_MAC - 1) / K_MAC; if (p == 0) p = 1;
          t += longint'(CO_PER * p);
        end
        if (t > worst) worst = t;
      end
      tot += worst;
    end
    return tot;
  endfunction

  // ---------------- mechanism counters ----------------
  longint n_multipass = 0, n_zero_win = 0, n_skip = 0, n_fifo_full = 0, n_barrier = 0;
  longint n_in_bp = 0, n_out_bp = 0, n_pad = 0, n_fork_ahead = 0, n_res_ahead = 0;
  logic [N_I-1:0][N_O-1:0] ev_res;
  logic [N_I-1:0][N_O-1:0] ev_multi, ev_zero, ev_skip;
  logic [N_I-1:0] ev_full, ev_pad, ev_fork;
  logic [N_O-1:0] ev_bar;
  for (genvar m = 0; m < N_I; m++) begin : g_mon
    for (genvar n = 0; n < N_O; n++) begin : g_mon_o
      assign ev_multi[m][n] = dut.g_in[m].g_out[n].u_smve.advance && !dut.g_in[m].g_out[n].u_smve.first;
      assign ev_zero[m][n]  = dut.g_in[m].g_out[n].u_smve.load && (dut.g_in[m].g_out[n].u_smve.nz == '0);
      assign ev_skip[m][n]  = dut.g_in[m].g_out[n].u_smve.load && !(&dut.g_in[m].g_out[n].u_smve.nz);
      assign ev_res[m][n]   = (dut.g_in[m].g_out[n].g_res.u_res.count > 1);
    end
    assign ev_full[m] = (dut.g_in[m].u_buf.count == FIFO_DEPTH);
    assign ev_pad[m]  = dut.g_in[m].u_sw.step && dut.g_in[m].u_sw.is_pad;
    assign ev_fork[m] = (dut.g_in[m].u_fork.taken != '0);
  end
  for (genvar n = 0; n < N_O; n++) begin : g_mon_l
    assign ev_bar[n] = dut.g_lane[n].u_join.waiting;
  end
  always @(posedge clk) if (rst_n) begin
    n_multipass += $countones(ev_multi);
    n_zero_win  += $countones(ev_zero);
    n_skip      += $countones(ev_skip);
    n_fifo_full += $countones(ev_full);
    n_barrier   += $countones(ev_bar);
    n_pad       += $countones(ev_pad);
    n_fork_ahead += $countones(ev_fork);
    n_res_ahead += $countones(ev_res);
    if (in_valid && !in_ready) n_in_bp++;
    if (out_valid && !out_ready) n_out_bp++;
  end

  // ---------------- watchdog ----------------
  initial begin
    #(WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output checker ----------------
  int nout_f = 0, frame_out = 0;
  bit stalls = 0;
  longint t_first_in = -1, t_last_out = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready && frame_out < FRAMES) begin
      int pos, j, oy, ox;
      j = nout_f % CO_PER; pos = nout_f / CO_PER; oy = pos / WO; ox = pos % WO;
      for (int n = 0; n < N_O; n++) begin
        longint e;
        e = ref_out(frame_out, oy, ox, j*N_O+n);
        checks++;
        if (out_data[n] !== acc_t'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d pos (%0d,%0d) ch %0d got %0d exp %0d",
                                      frame_out, oy, ox, j*N_O+n, out_data[n], e);
        end
      end
      nout_f++;
      if (nout_f == NOUT) begin nout_f = 0; frame_out++; t_last_out = cyc; end
    end
    out_ready <= stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = 1;
    wt_wr_en = 0; wt_wr_ci = 0; wt_wr_co = 0; wt_wr_data = '0;
    bias_wr_en = 0; bias_wr_co = 0; bias_wr_data = 0;
    // stimulus
    for (int m = 0; m < N_I; m++) dens[m] = DENS_LO + (DENS_HI - DENS_LO) * m / ((N_I > 1) ? N_I - 1 : 1);
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < C_I; c++)
        img[f][y][x][c] = ($urandom_range(0, 99) < dens[c % N_I]) ? data_t'($urandom_range(1, 32767)) : data_t'(0);
    // a fully dense and a fully zero patch in frame 0, channel 0
    for (int y = 0; y < 3 && y < H; y++) for (int x = 0; x < 3 && x < W; x++) img[0][y][x][0] = data_t'(100 + x);
    for (int y = H-3; y < H; y++) for (int x = W-3; x < W; x++) if (y >= 0 && x >= 0) img[0][y][x][0] = 0;
    for (int co = 0; co < C_O; co++) begin
      bs[co] = data_t'($urandom);
      for (int ci = 0; ci < C_I; ci++) for (int k = 0; k < KK; k++) wts[co][ci][k] = data_t'($urandom);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // load weights and biases
    for (int co = 0; co < C_O; co++) begin
      for (int ci = 0; ci < C_I; ci++) begin
        @(negedge clk);
        wt_wr_en = 1; wt_wr_ci = $bits(wt_wr_ci)'(ci); wt_wr_co = $bits(wt_wr_co)'(co);
        for (int k = 0; k < KK; k++) wt_wr_data[k] = wts[co][ci][k];
      end
      @(negedge clk);
      wt_wr_en = 0; bias_wr_en = 1; bias_wr_co = $bits(bias_wr_co)'(co); bias_wr_data = bs[co];
    end
    @(negedge clk); bias_wr_en = 0;
    // stream the frames
    for (int f = 0; f < FRAMES; f++) begin
      if (f == 1) begin wait (frame_out == 1); stalls = 1; end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int j = 0; j < CI_PER; j++) begin
        @(negedge clk);
        in_valid = 1;
        for (int m = 0; m < N_I; m++) in_data[m] = img[f][y][x][j*N_I+m];
        @(posedge clk);
        if (t_first_in < 0) t_first_in = cyc;
        while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
      end
      if (f == 0) begin
        longint ideal, lock;
        wait (frame_out == 1);
        ideal = ideal_cycles(0);
        lock  = lockstep_cycles(0);
        $display("frame 0: %0d cycles; slowest stream alone needs %0d, per-position lock-step bound %0d",
                 t_last_out - t_first_in, ideal, lock);
        checks++;
        if (t_last_out - t_first_in < ideal || t_last_out - t_first_in > lock + lock / 50 + 300) begin
          failures++; $display("FAIL cycle count out of range");
        end
      end
    end
    wait (frame_out == FRAMES);
    repeat (20) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL extra output"); end
    $display("events: multipass=%0d zero_window=%0d zero_skip=%0d fifo_full=%0d barrier_wait=%0d",
             n_multipass, n_zero_win, n_skip, n_fifo_full, n_barrier);
    $display("events: in_backpressure=%0d out_backpressure=%0d padding=%0d fork_ahead=%0d result_buffer_ahead=%0d",
             n_in_bp, n_out_bp, n_pad, n_fork_ahead, n_res_ahead);
    checks += 8;
    if (n_res_ahead == 0) begin failures++; $display("FAIL result buffer never used"); end
    if (K_MAC < KK && n_multipass == 0) begin failures++; $display("FAIL no multi-pass window"); end
    if (n_zero_win == 0) begin failures++; $display("FAIL no all-zero window"); end
    if (n_skip == 0) begin failures++; $display("FAIL no zero skipped"); end
    if (n_barrier == 0) begin failures++; $display("FAIL barrier never waited"); end
    if (n_in_bp == 0) begin failures++; $display("FAIL no input back-pressure"); end
    if (PAD > 0 && n_pad == 0) begin failures++; $display("FAIL no padding"); end
    if (FRAMES > 1 && n_out_bp == 0) begin failures++; $display("FAIL no output back-pressure"); end
    if (FRAMES > 1) begin checks++; if (n_fifo_full == 0) begin failures++; $display("FAIL buffer never full"); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
