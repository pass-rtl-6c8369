// Input stream interface: the synchronisation barrier on the input side.
//
// Takes one input word carrying N feature values (N = N_I; word j of a pixel
// carries channels j*N .. j*N+N-1) and hands value m to input stream m. Each
// lane has a one-entry register. A word is accepted only when every lane
// register is free or being emptied in the same cycle, so all streams receive
// the same pixels in the same order; afterwards each lane drains on its own
// handshake, letting streams run up to one value apart here (the S-MVE input
// buffers absorb the rest). Interface: valid/ready in, N valid/ready out.
// Asynchronous active-low reset empties the lanes.
module input_stream_interface
  import pass_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  data_t [N-1:0] in_data,
  output logic  [N-1:0] out_valid,
  input  logic  [N-1:0] out_ready,
  output data_t [N-1:0] out_data
);
  assign in_ready = &(~out_valid | out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_data  <= '0;
    end else if (in_valid && in_ready) begin
      out_valid <= '1;
      out_data  <= in_data;
    end else begin
      out_valid <= out_valid & ~out_ready;
    end
  end
endmodule
