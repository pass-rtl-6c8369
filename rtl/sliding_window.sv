// Sliding window generator for one input stream.
//
// Input: a stream of pixels in raster order with the C channels of each pixel
// interleaved (row, then column, then channel fastest), one 16-bit value per
// handshake. Output: for each output position and channel, the KY x KX window
// of that channel, element ky*KX+kx holding row ky, column kx of the window
// (0,0 = top-left), in the same raster/channel order.
//
// The generator walks the zero-padded frame, (H+2*PAD) x (W+2*PAD) x C. At a
// padding position it inserts a zero without consuming input. At each position
// the KY-1 line buffers, memories of (W+2*PAD)*C words cascaded row to row, are
// read at (column, channel) to give the column of the window under the new
// value, and are shifted down by one row. A window register file of C entries
// shifts that column into the KY x KX window of the current channel. A window
// is emitted where the window fits in the frame and lies on the STRIDE grid.
// The output is one register (valid/ready); when it is full and not drained,
// positions that would produce a window wait. The use of line buffers follows
// the paper; the stream order, padding and stride support are this design's.
// Memories need no reset: every word read for an emitted window has been
// written earlier in the same frame. Frames follow each other back to back.
module sliding_window
  import pass_pkg::*;
#(
  parameter int unsigned H      = 56,
  parameter int unsigned W      = 56,
  parameter int unsigned C      = 2,
  parameter int unsigned KX     = 3,
  parameter int unsigned KY     = 3,
  parameter int unsigned PAD    = 1,
  parameter int unsigned STRIDE = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  data_t            in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output data_t [KY*KX-1:0] out_data
);
  localparam int unsigned HP = H + 2*PAD;
  localparam int unsigned WP = W + 2*PAD;
  localparam int unsigned KK = KY*KX;
  localparam int unsigned LB = (KY > 1) ? KY-1 : 1;
  localparam int unsigned RW = $clog2(HP+1);
  localparam int unsigned CW = $clog2(WP+1);
  localparam int unsigned HW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned AW = $clog2(WP*C+1);

  logic [RW-1:0] r;
  logic [CW-1:0] c;
  logic [HW-1:0] ch;
  logic [AW-1:0] addr;
  logic          is_pad, produces, slot_ok, step;
  data_t         v;
  data_t         col [KY];
  data_t [KK-1:0] win_old, win_new;

  data_t          lb  [LB][WP*C];
  data_t [KK-1:0] win [C];

  assign is_pad = (r < RW'(PAD)) || (r >= RW'(PAD+H)) ||
                  (c < CW'(PAD)) || (c >= CW'(PAD+W));
  assign v      = is_pad ? data_t'(0) : in_data;
  assign produces = (r >= RW'(KY-1)) && (c >= CW'(KX-1)) &&
                    (((r - RW'(KY-1)) % RW'(STRIDE)) == '0) &&
                    (((c - CW'(KX-1)) % CW'(STRIDE)) == '0);
  assign slot_ok  = !produces || !out_valid || out_ready;
  assign step     = slot_ok && (is_pad || in_valid);
  assign in_ready = !is_pad && slot_ok;
  assign addr     = AW'(c) * AW'(C) + AW'(ch);

  always_comb begin
    for (int unsigned ky = 0; ky < KY-1; ky++) col[ky] = lb[ky][addr];
    col[KY-1] = v;
    win_old = win[ch];
    for (int unsigned ky = 0; ky < KY; ky++)
      for (int unsigned kx = 0; kx < KX; kx++)
        win_new[ky*KX+kx] = (kx < KX-1) ? win_old[ky*KX+kx+1] : col[ky];
  end

  // Line buffers and window registers.
  always_ff @(posedge clk) begin
    if (step) begin
      for (int unsigned ky = 0; ky + 1 < KY; ky++)
        lb[ky][addr] <= (ky + 2 < KY) ? lb[ky+1][addr] : v;
      win[ch] <= win_new;
    end
  end

  // Frame position counters and output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; c <= '0; ch <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (step) begin
        if (produces) begin
          out_valid <= 1'b1;
          out_data  <= win_new;
        end
        if (ch == HW'(C-1)) begin
          ch <= '0;
          if (c == CW'(WP-1)) begin
            c <= '0;
            r <= (r == RW'(HP-1)) ? '0 : r + 1'b1;
          end else begin
            c <= c + 1'b1;
          end
        end else begin
          ch <= ch + 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));
endmodule
