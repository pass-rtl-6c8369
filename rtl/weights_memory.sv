// Weights memory of one S-MVE, and the pairing of windows with weights.
//
// Holds the CI_PER*CO_PER weight vectors (KK taps each) this S-MVE needs:
// CI_PER = C_I/N_I input channels of its stream times CO_PER = C_O/N_O
// filters of its output lane. Every incoming window (one input channel of one
// output position) is presented CO_PER times, paired with the weight vector
// of each filter in turn, at address ci*CO_PER + co; ci steps once per window
// and wraps after CI_PER windows, i.e. at the next output position.
//
// Interface: a write port loads the weights (one vector per cycle, before
// streaming); the window input and the pair output use valid/ready and the
// window is released with the last filter's pair. The read is asynchronous
// (LUTRAM style). The memory organisation and order are this design's choice;
// the paper states that the engine takes pairs from the sliding window and a
// weights memory. Asynchronous active-low reset zeroes the counters.
module weights_memory
  import pass_pkg::*;
#(
  parameter int unsigned KK     = 9,
  parameter int unsigned CI_PER = 2,
  parameter int unsigned CO_PER = 64,
  localparam int unsigned DEPTH = CI_PER*CO_PER,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  data_t [KK-1:0] wr_data,
  input  logic           win_valid,
  output logic           win_ready,
  input  data_t [KK-1:0] win_data,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [KK-1:0] out_fmap,
  output data_t [KK-1:0] out_weight
);
  localparam int unsigned IW = (CI_PER > 1) ? $clog2(CI_PER) : 1;
  localparam int unsigned OW = (CO_PER > 1) ? $clog2(CO_PER) : 1;

  data_t [KK-1:0] mem [DEPTH];
  logic [IW-1:0]  ci;
  logic [OW-1:0]  co;
  logic           co_last;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign co_last    = (co == OW'(CO_PER-1));
  assign out_valid  = win_valid;
  assign out_fmap   = win_data;
  assign out_weight = mem[AW'(ci) * AW'(CO_PER) + AW'(co)];
  assign win_ready  = out_ready && co_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ci <= '0;
      co <= '0;
    end else if (out_valid && out_ready) begin
      if (co_last) begin
        co <= '0;
        ci <= (ci == IW'(CI_PER-1)) ? '0 : ci + 1'b1;
      end else begin
        co <= co + 1'b1;
      end
    end
  end
endmodule
