// Partial-sum (PSUM) logic: the controller of the sparse matrix-vector engine.
//
// When a new window is loaded it stores the NZC flags as the mask of pairs
// still to be computed (`rem`). Each `advance` is one pass: the crossbar
// routes up to k pending pairs, and the granted bits are cleared. `first`
// selects zero at the MAC muxes on the first pass of a window, so the MACs
// start a new partial sum; on later passes they accumulate. `last` is high in
// the pass that empties the mask, after which the MAC outputs hold the
// window's final partial sums. A window with no non-zero pair still takes one
// pass (its result is zero), so a window costs max(1, ceil(nnz/k)) cycles.
// `load` may coincide with the last pass of the previous window, giving
// back-to-back windows. Asynchronous active-low reset empties the controller.
module psum_logic #(
  parameter int unsigned KK = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [KK-1:0] nz_in,
  input  logic          advance,
  input  logic [KK-1:0] grant,
  output logic [KK-1:0] rem,
  output logic          active,
  output logic          first,
  output logic          last
);
  assign last = active && ((rem & ~grant) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem    <= '0;
      active <= 1'b0;
      first  <= 1'b0;
    end else begin
      if (advance) begin
        rem   <= rem & ~grant;
        first <= 1'b0;
        if (last) active <= 1'b0;
      end
      if (load) begin
        rem    <= nz_in;
        active <= 1'b1;
        first  <= 1'b1;
      end
    end
  end

  // A new window may only be loaded when the engine is idle or finishing.
  a_load_ok: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (!active || (advance && last)));
endmodule
