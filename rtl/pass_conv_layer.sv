// One convolutional layer of the sparse streaming accelerator.
//
// Structure (input to output):
//   input_stream_interface  splits each input word into N_I streams
//   N_I x sliding_window    windows of each stream's C_I/N_I channels
//   N_I x stream_fifo       S-MVE input buffer, absorbs sparsity variation
//   N_I x stream_fork       broadcasts each window to N_O engines
//   N_I*N_O x weights_memory + smve + accumulator (+ stream_fifo)
//                           pairs the window with each of the C_O/N_O filters
//                           of its lane, computes the sparse dot product,
//                           sums it over the stream's channels and buffers the
//                           result (RES_DEPTH words)
//   N_O x sync_adder        barrier: adds the N_I stream results
//   N_O x bias              per-channel bias
//   output_stream_interface joins the N_O lanes into one output word
// This block order and the N_I / N_O parallelism follow the paper; the
// handshakes, channel mapping and the load ports are this design's choices.
//
// Buffering. The paper places the sparsity-balancing buffers at the S-MVE
// inputs (FIFO_DEPTH windows per stream). On their own they cannot let a
// fast stream work ahead: the barrier adder takes one result of every stream
// at a time, so every engine is held within about one output position of the
// slowest, whatever FIFO_DEPTH is. This design therefore adds a result buffer
// of RES_DEPTH words after each accumulator, by default the same number of
// output positions of slack as the input buffer. With both, a layer runs close
// to the work of its slowest stream; RES_DEPTH = 0 removes the result buffer
// and gives the structure drawn in the paper.
//
// Channel mapping: input word j of a pixel carries channels j*N_I+m on lane m;
// output word j of a position carries channels j*N_O+n on lane n. Pixels come
// in raster order, H*W*C_I/N_I words per frame in; HO*WO*C_O/N_O words out,
// HO = (H+2*PAD-KY)/STRIDE+1. Outputs are full-precision ACC_W-bit sums.
//
// Load ports: before streaming, write every weight vector (wt_wr_ci, wt_wr_co,
// KY*KX taps, tap ky*KX+kx) and every bias (bias_wr_co). Throughput: each
// S-MVE takes max(1, ceil(nnz/K_MAC)) cycles per window-filter pair; the layer
// runs at the pace of its slowest stream once the buffers are full.
module pass_conv_layer
  import pass_pkg::*;
#(
  parameter int unsigned H          = 56,
  parameter int unsigned W          = 56,
  parameter int unsigned C_I        = 64,
  parameter int unsigned C_O        = 64,
  parameter int unsigned KX         = 3,
  parameter int unsigned KY         = 3,
  parameter int unsigned PAD        = 1,
  parameter int unsigned STRIDE     = 1,
  parameter int unsigned N_I        = 32,
  parameter int unsigned N_O        = 1,
  parameter int unsigned K_MAC      = 1,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned RES_DEPTH  = FIFO_DEPTH * (C_O / N_O) / (C_I / N_I),
  localparam int unsigned KK  = KX*KY,
  localparam int unsigned CIW = (C_I > 1) ? $clog2(C_I) : 1,
  localparam int unsigned COW = (C_O > 1) ? $clog2(C_O) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // input feature map
  input  logic             in_valid,
  output logic             in_ready,
  input  data_t [N_I-1:0]  in_data,
  // output feature map
  output logic             out_valid,
  input  logic             out_ready,
  output acc_t  [N_O-1:0]  out_data,
  // weight load
  input  logic             wt_wr_en,
  input  logic [CIW-1:0]   wt_wr_ci,
  input  logic [COW-1:0]   wt_wr_co,
  input  data_t [KK-1:0]   wt_wr_data,
  // bias load
  input  logic             bias_wr_en,
  input  logic [COW-1:0]   bias_wr_co,
  input  data_t            bias_wr_data
);
  localparam int unsigned CI_PER = C_I / N_I;
  localparam int unsigned CO_PER = C_O / N_O;
  localparam int unsigned WIN_W  = KK * DATA_W;
  localparam int unsigned WAW    = (CI_PER*CO_PER > 1) ? $clog2(CI_PER*CO_PER) : 1;
  localparam int unsigned BAW    = (CO_PER > 1) ? $clog2(CO_PER) : 1;

  // input interface -> sliding windows
  logic  [N_I-1:0] px_valid, px_ready;
  data_t [N_I-1:0] px_data;

  // per input stream: window, buffered window, fork outputs
  logic           sw_valid [N_I], sw_ready [N_I];
  data_t [KK-1:0] sw_data  [N_I];
  logic           bf_valid [N_I], bf_ready [N_I];
  logic [WIN_W-1:0] bf_data [N_I];
  logic [N_O-1:0] fk_valid [N_I], fk_ready [N_I];
  logic [WIN_W-1:0] fk_data [N_I];

  // per output lane: accumulator results of all streams, then the chain
  logic [N_I-1:0] ac_valid [N_O], ac_ready [N_O];
  acc_t [N_I-1:0] ac_data  [N_O];
  logic           sa_valid [N_O], sa_ready [N_O];
  acc_t           sa_data  [N_O];
  logic [N_O-1:0] sa_wait;
  logic [N_O-1:0] bo_valid, bo_ready;
  acc_t [N_O-1:0] bo_data;

  // load-port decode: channel ci lives in stream ci mod N_I, filter co in lane co mod N_O
  logic [WAW-1:0] wt_local;
  logic [BAW-1:0] bias_local;
  assign wt_local   = WAW'((32'(wt_wr_ci) / N_I) * CO_PER + 32'(wt_wr_co) / N_O);
  assign bias_local = BAW'(32'(bias_wr_co) / N_O);

  input_stream_interface #(.N(N_I)) u_in (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(px_valid), .out_ready(px_ready), .out_data(px_data));

  for (genvar m = 0; m < N_I; m++) begin : g_in
    sliding_window #(.H(H), .W(W), .C(CI_PER), .KX(KX), .KY(KY),
                     .PAD(PAD), .STRIDE(STRIDE)) u_sw (
      .clk, .rst_n,
      .in_valid(px_valid[m]), .in_ready(px_ready[m]), .in_data(px_data[m]),
      .out_valid(sw_valid[m]), .out_ready(sw_ready[m]), .out_data(sw_data[m]));

    stream_fifo #(.WIDTH(WIN_W), .DEPTH(FIFO_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid(sw_valid[m]), .in_ready(sw_ready[m]), .in_data(sw_data[m]),
      .out_valid(bf_valid[m]), .out_ready(bf_ready[m]), .out_data(bf_data[m]),
      .count());

    stream_fork #(.N(N_O), .WIDTH(WIN_W)) u_fork (
      .clk, .rst_n,
      .in_valid(bf_valid[m]), .in_ready(bf_ready[m]), .in_data(bf_data[m]),
      .out_valid(fk_valid[m]), .out_ready(fk_ready[m]), .out_data(fk_data[m]));

    for (genvar n = 0; n < N_O; n++) begin : g_out
      logic           pr_valid, pr_ready;
      data_t [KK-1:0] pr_fmap, pr_weight;
      logic           dp_valid, dp_ready;
      acc_t           dp_data;
      logic           wt_sel;

      assign wt_sel = wt_wr_en && (32'(wt_wr_ci) % N_I == m) && (32'(wt_wr_co) % N_O == n);

      weights_memory #(.KK(KK), .CI_PER(CI_PER), .CO_PER(CO_PER)) u_wmem (
        .clk, .rst_n,
        .wr_en(wt_sel), .wr_addr(wt_local), .wr_data(wt_wr_data),
        .win_valid(fk_valid[m][n]), .win_ready(fk_ready[m][n]), .win_data(fk_data[m]),
        .out_valid(pr_valid), .out_ready(pr_ready), .out_fmap(pr_fmap), .out_weight(pr_weight));

      smve #(.KK(KK), .K_MAC(K_MAC)) u_smve (
        .clk, .rst_n,
        .in_valid(pr_valid), .in_ready(pr_ready), .in_fmap(pr_fmap), .in_weight(pr_weight),
        .out_valid(dp_valid), .out_ready(dp_ready), .out_data(dp_data));

      logic rs_valid, rs_ready;
      acc_t rs_data;

      accumulator #(.CI_PER(CI_PER), .CO_PER(CO_PER)) u_acc (
        .clk, .rst_n,
        .in_valid(dp_valid), .in_ready(dp_ready), .in_data(dp_data),
        .out_valid(rs_valid), .out_ready(rs_ready), .out_data(rs_data));

      // Result buffer: lets this stream run ahead of the barrier adder.
      if (RES_DEPTH > 0) begin : g_res
        stream_fifo #(.WIDTH(ACC_W), .DEPTH(RES_DEPTH)) u_res (
          .clk, .rst_n,
          .in_valid(rs_valid), .in_ready(rs_ready), .in_data(rs_data),
          .out_valid(ac_valid[n][m]), .out_ready(ac_ready[n][m]), .out_data(ac_data[n][m]),
          .count());
      end else begin : g_nores
        assign ac_valid[n][m] = rs_valid;
        assign rs_ready       = ac_ready[n][m];
        assign ac_data[n][m]  = rs_data;
      end
    end
  end

  for (genvar n = 0; n < N_O; n++) begin : g_lane
    sync_adder #(.N(N_I)) u_join (
      .clk, .rst_n,
      .in_valid(ac_valid[n]), .in_ready(ac_ready[n]), .in_data(ac_data[n]),
      .out_valid(sa_valid[n]), .out_ready(sa_ready[n]), .out_data(sa_data[n]),
      .waiting(sa_wait[n]));

    bias #(.CO_PER(CO_PER)) u_bias (
      .clk, .rst_n,
      .wr_en(bias_wr_en && (32'(bias_wr_co) % N_O == n)), .wr_addr(bias_local),
      .wr_data(bias_wr_data),
      .in_valid(sa_valid[n]), .in_ready(sa_ready[n]), .in_data(sa_data[n]),
      .out_valid(bo_valid[n]), .out_ready(bo_ready[n]), .out_data(bo_data[n]));
  end

  output_stream_interface #(.N(N_O)) u_out (
    .clk, .rst_n,
    .in_valid(bo_valid), .in_ready(bo_ready), .in_data(bo_data),
    .out_valid, .out_ready, .out_data);
endmodule
