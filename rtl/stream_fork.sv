// Stream fork: broadcasts each window of one input stream to its N S-MVEs
// (N = N_O, the output-channel parallelism).
//
// Eager fork: every branch sees the input as soon as it is valid; a branch
// that has taken the current item is masked (`taken`) until all branches
// have taken it, and only then is the input retired. Branches therefore never
// receive an item twice and a slow branch never blocks a fast one within the
// same item. The paper only draws the branching point; this mechanism is this
// design's choice. Asynchronous active-low reset clears the taken flags.
module stream_fork #(
  parameter int unsigned N     = 1,
  parameter int unsigned WIDTH = 144
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic [N-1:0]     out_valid,
  input  logic [N-1:0]     out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic [N-1:0] taken, done;

  assign out_valid = in_valid ? ~taken : '0;
  assign done      = taken | out_ready;
  assign in_ready  = &done;
  assign out_data  = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     taken <= '0;
    else if (in_valid && !in_ready) taken <= taken | (out_valid & out_ready);
    else                            taken <= '0;
  end
endmodule
