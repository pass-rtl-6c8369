// One MAC unit of the sparse matrix-vector engine, with its input mux.
//
// On every enabled cycle the unit multiplies the feature and weight routed to
// it by the sparse crossbar and adds the product to either zero (`clear`, the
// first pass over a window) or its own previous partial sum (later passes of a
// dense window that needs more than one cycle). A lane with no pair routed to
// it (`valid` low) adds nothing. The partial sum is registered: it is ready one
// cycle after the pass. The multiplier maps to a DSP slice on an FPGA.
// Asynchronous active-low reset clears the partial sum.
module smve_mac
  import pass_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clear,
  input  logic  valid,
  input  data_t a,
  input  data_t b,
  output acc_t  acc
);
  prod_t prod;
  acc_t  base;

  always_comb begin
    prod = valid ? prod_t'(a * b) : '0;
    base = clear ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= base + acc_t'(prod);
  end
endmodule
