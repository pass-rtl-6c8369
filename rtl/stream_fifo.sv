// Stream FIFO: the buffer at the input of the S-MVEs of one input stream.
//
// The S-MVEs of different input streams see different instantaneous sparsity
// and so run at different speeds, while the barrier adder downstream needs
// all streams at once. A buffer of DEPTH windows lets a fast stream run
// ahead instead of stalling immediately. The paper sizes this depth at
// compile time from a moving-average statistic of the measured sparsity;
// DEPTH is a parameter here.
//
// First-word-fall-through FIFO on a register array (LUTRAM on an FPGA) with
// valid/ready on both sides; a write and a read can happen in the same cycle,
// also when full. `count` gives the occupancy. Asynchronous active-low reset
// empties it.
module stream_fifo #(
  parameter int unsigned WIDTH = 144,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != DEPTH[$bits(count)-1:0]) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= DEPTH[$bits(count)-1:0]);
endmodule
