// Accumulator: sums the S-MVE dot products over the channel dimension.
//
// Input order per output position: for each of the CI_PER input channels of
// the stream, the dot products of the CO_PER filters (filter fastest), as
// produced by the weights memory and S-MVE. A memory of CO_PER partial sums
// holds the running sums; with the last input channel the completed sums are
// emitted, one per filter, in filter order. Interface: valid/ready; the output
// is a register, and input is refused only when a completed sum cannot be
// written out. Asynchronous active-low reset zeroes counters and the output
// valid; the partial-sum memory needs none (the first channel overwrites it).
module accumulator
  import pass_pkg::*;
#(
  parameter int unsigned CI_PER = 2,
  parameter int unsigned CO_PER = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  acc_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output acc_t out_data
);
  localparam int unsigned IW = (CI_PER > 1) ? $clog2(CI_PER) : 1;
  localparam int unsigned OW = (CO_PER > 1) ? $clog2(CO_PER) : 1;

  acc_t          psum [CO_PER];
  logic [IW-1:0] ci;
  logic [OW-1:0] co;
  logic          ci_last, co_last, accept;
  acc_t          sum;

  assign ci_last  = (ci == IW'(CI_PER-1));
  assign co_last  = (co == OW'(CO_PER-1));
  assign in_ready = !ci_last || !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign sum      = ((ci == '0) ? acc_t'(0) : psum[co]) + in_data;

  always_ff @(posedge clk) begin
    if (accept && !ci_last) psum[co] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ci <= '0;
      co <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (ci_last) begin
          out_valid <= 1'b1;
          out_data  <= sum;
        end
        if (co_last) begin
          co <= '0;
          ci <= ci_last ? '0 : ci + 1'b1;
        end else begin
          co <= co + 1'b1;
        end
      end
    end
  end
endmodule
