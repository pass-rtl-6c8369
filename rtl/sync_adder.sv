// Barrier adder: the synchronisation point between the N input streams.
//
// The S-MVEs of different input streams run at different speeds, because each
// stream has its own instantaneous sparsity. For one output lane this block
// waits until every one of the N stream accumulators offers a result, then
// takes all of them in the same cycle, adds them with an adder tree and
// registers the sum. Interface: N valid/ready inputs joined into one
// valid/ready output; an input's ready is high only in the cycle all inputs
// are taken. `waiting` flags a cycle where some but not all inputs are valid.
// Asynchronous active-low reset clears the output valid.
module sync_adder
  import pass_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  acc_t [N-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output acc_t         out_data,
  output logic         waiting
);
  logic fire;
  acc_t sum;

  assign fire     = (&in_valid) && (!out_valid || out_ready);
  assign in_ready = {N{fire}};
  assign waiting  = (|in_valid) && !(&in_valid);

  adder_tree #(.N(N)) u_tree (.in(in_data), .sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (fire) begin
      out_valid <= 1'b1;
      out_data  <= sum;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end
endmodule
