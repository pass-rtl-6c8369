// Output stream interface: the synchronisation barrier on the output side.
//
// Joins the N output lanes (N = N_O; lane n carries output channels co with
// co mod N = n) into one output word. The word is registered once every lane
// offers a value and the output register is free or being read; all lanes are
// then taken in the same cycle. Word j of an output position carries channels
// j*N .. j*N+N-1. Interface: N valid/ready in, valid/ready out. Asynchronous
// active-low reset clears the output valid.
module output_stream_interface
  import pass_pkg::*;
#(
  parameter int unsigned N = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  acc_t [N-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output acc_t [N-1:0] out_data
);
  logic fire;

  assign fire     = (&in_valid) && (!out_valid || out_ready);
  assign in_ready = {N{fire}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (fire) begin
      out_valid <= 1'b1;
      out_data  <= in_data;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end
endmodule
