// Bias module: adds a per-output-channel bias term.
//
// Results arrive in filter order, CO_PER per output position; a counter picks
// the bias of the current filter from a memory of CO_PER 16-bit values, loaded
// through a write port, and the sign-extended bias is added. Interface:
// valid/ready in and out, registered output (one cycle of latency, one result
// per cycle). Asynchronous active-low reset zeroes the counter and output
// valid.
module bias
  import pass_pkg::*;
#(
  parameter int unsigned CO_PER = 64,
  localparam int unsigned AW = (CO_PER > 1) ? $clog2(CO_PER) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  input  logic          in_valid,
  output logic          in_ready,
  input  acc_t          in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output acc_t          out_data
);
  data_t         mem [CO_PER];
  logic [AW-1:0] co;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      co        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_valid && in_ready) begin
      out_valid <= 1'b1;
      out_data  <= in_data + acc_t'(mem[co]);
      co        <= (co == AW'(CO_PER-1)) ? '0 : co + 1'b1;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end
endmodule
