// Sparse Matrix-Vector Engine (S-MVE).
//
// Computes the dot product of one Kx*Ky feature-map window with one weight
// vector using only K_MAC multipliers, skipping the pairs whose feature value
// is zero. Datapath: one NZC per pair -> sparse crossbar (KK pairs squeezed to
// K_MAC) -> K_MAC MACs with a 0/feedback mux -> adder tree -> output register.
// The PSUM logic keeps the mask of pairs still to be computed and runs as many
// passes as the window needs: P = max(1, ceil(nnz/K_MAC)) cycles, so the
// engine's throughput is min(1, K_MAC/nnz) windows per cycle.
//
// Interface: valid/ready on both sides. A pair is accepted when the engine is
// idle or in the last pass of the previous window, so windows run back to
// back. Timing: out_valid rises P+1 cycles after a window is accepted (P
// passes, then one cycle through the adder tree into the output register).
// If the output is stalled, the MACs hold their finished partial sums and the
// engine waits. The pipeline structure follows the paper's figure; the exact
// handshake and register placement are this design's own.
module smve
  import pass_pkg::*;
#(
  parameter int unsigned KK           = 9,
  parameter int unsigned K_MAC        = 3,
  parameter bit          CHECK_WEIGHT = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  data_t [KK-1:0] in_fmap,
  input  data_t [KK-1:0] in_weight,
  output logic          out_valid,
  input  logic          out_ready,
  output acc_t          out_data
);
  logic [KK-1:0]     nz;
  data_t [KK-1:0]    fmap_q, weight_q;
  logic [KK-1:0]     rem, grant;
  logic              active, first, last, advance, load;
  logic              done_q, xfer;
  data_t [K_MAC-1:0] xb_fmap, xb_weight;
  logic [K_MAC-1:0]  xb_valid;
  acc_t [K_MAC-1:0]  mac_acc;
  acc_t              tree_sum;

  for (genvar i = 0; i < KK; i++) begin : g_nzc
    nzc #(.CHECK_WEIGHT(CHECK_WEIGHT)) u_nzc (
      .fmap(in_fmap[i]), .weight(in_weight[i]), .nz(nz[i]));
  end

  // MAC results are moved into the output register when it is free.
  assign xfer    = done_q && (!out_valid || out_ready);
  // A pass may overwrite the MAC registers only once their result has left.
  assign advance = active && (!done_q || xfer);
  assign in_ready = !active || (advance && last);
  assign load    = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (load) begin
      fmap_q   <= in_fmap;
      weight_q <= in_weight;
    end
  end

  psum_logic #(.KK(KK)) u_psum (
    .clk, .rst_n, .load, .nz_in(nz), .advance, .grant,
    .rem, .active, .first, .last);

  sparse_crossbar #(.KK(KK), .K_MAC(K_MAC)) u_xbar (
    .fmap(fmap_q), .weight(weight_q), .req(rem),
    .fmap_o(xb_fmap), .weight_o(xb_weight), .valid_o(xb_valid), .grant);

  for (genvar j = 0; j < K_MAC; j++) begin : g_mac
    smve_mac u_mac (
      .clk, .rst_n, .en(advance), .clear(first), .valid(xb_valid[j]),
      .a(xb_fmap[j]), .b(xb_weight[j]), .acc(mac_acc[j]));
  end

  adder_tree #(.N(K_MAC)) u_tree (.in(mac_acc), .sum(tree_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q    <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (advance && last) done_q <= 1'b1;
      else if (xfer)       done_q <= 1'b0;
      if (xfer) begin
        out_valid <= 1'b1;
        out_data  <= tree_sum;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));
endmodule
