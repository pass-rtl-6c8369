// Sparse crossbar of the sparse matrix-vector engine.
//
// Squeezes the KK = Kx*Ky (feature, weight) pairs of a window down to K_MAC
// outputs, one per MAC. Only pairs whose request bit is set (non-zero and not
// yet computed) are routed. The lowest-indexed requesting pairs go to the
// lowest-indexed MACs; `grant` marks the pairs routed in this cycle so that
// the partial-sum logic can retire them. Unused MAC lanes carry zeros with
// valid_o low. The priority order is this design's choice; the paper only
// fixes the KK-to-k squeeze and that only non-zero values are routed.
// Purely combinational.
module sparse_crossbar
  import pass_pkg::*;
#(
  parameter int unsigned KK    = 9,
  parameter int unsigned K_MAC = 3
) (
  input  data_t [KK-1:0]    fmap,
  input  data_t [KK-1:0]    weight,
  input  logic  [KK-1:0]    req,
  output data_t [K_MAC-1:0] fmap_o,
  output data_t [K_MAC-1:0] weight_o,
  output logic  [K_MAC-1:0] valid_o,
  output logic  [KK-1:0]    grant
);
  always_comb begin
    int unsigned cnt;
    cnt      = 0;
    fmap_o   = '0;
    weight_o = '0;
    valid_o  = '0;
    grant    = '0;
    for (int unsigned i = 0; i < KK; i++) begin
      if (req[i] && cnt < K_MAC) begin
        fmap_o[cnt]   = fmap[i];
        weight_o[cnt] = weight[i];
        valid_o[cnt]  = 1'b1;
        grant[i]      = 1'b1;
        cnt++;
      end
    end
  end
endmodule
