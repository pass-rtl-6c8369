// Balanced binary adder tree.
//
// Adds N signed accumulator-width operands. The operands are padded with
// zeros to the next power of two and summed level by level, so the depth is
// ceil(log2 N) adders. The sparse matrix-vector engine uses it to add its k MAC
// partial sums; the barrier adder uses it to add the N_I stream results.
// Purely combinational; the instantiating module registers the sum.
module adder_tree
  import pass_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  acc_t [N-1:0] in,
  output acc_t         sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned P      = 1 << LEVELS;

  // Heap layout: node 0 is the root, leaves are P-1 .. 2P-2.
  acc_t node [2*P-1];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[P-1+i] = in[i];
    end else begin : g_zero
      assign node[P-1+i] = '0;
    end
  end

  for (genvar i = 0; i < P-1; i++) begin : g_node
    assign node[i] = node[2*i+1] + node[2*i+2];
  end

  assign sum = node[0];
endmodule
