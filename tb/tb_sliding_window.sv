// Self-checking testbench for the sliding window generator. Two frames are
// streamed back to back through two configurations: 3x3 kernel with padding
// 1 and stride 1 over a 5x6 image of 2 channels, and a 2x3 (KY x KX) kernel
// with no padding and stride 2 over a 7x8 image of 3 channels. Input gaps and
// output back-pressure are random. Every window is compared with one cut
// from the stored image by the testbench, and the window count is checked.
module tb_sliding_window;
  import pass_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // configuration A
  localparam int AH = 5, AW = 6, AC = 2, AKX = 3, AKY = 3, AP = 1, AS = 1;
  // configuration B
  localparam int BH = 7, BW = 8, BC = 3, BKX = 3, BKY = 2, BP = 0, BS = 2;

  logic a_iv, a_ir, a_ov, a_or; data_t a_id; data_t [AKX*AKY-1:0] a_od;
  logic b_iv, b_ir, b_ov, b_or; data_t b_id; data_t [BKX*BKY-1:0] b_od;

  sliding_window #(.H(AH), .W(AW), .C(AC), .KX(AKX), .KY(AKY), .PAD(AP), .STRIDE(AS)) ua (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  sliding_window #(.H(BH), .W(BW), .C(BC), .KX(BKX), .KY(BKY), .PAD(BP), .STRIDE(BS)) ub (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  localparam int FR = 2;
  data_t imga [FR][AH][AW][AC];
  data_t imgb [FR][BH][BW][BC];

  function automatic data_t pa(int f, int y, int x, int c);
    if (y < 0 || y >= AH || x < 0 || x >= AW) return 0;
    return imga[f][y][x][c];
  endfunction
  function automatic data_t pb(int f, int y, int x, int c);
    if (y < 0 || y >= BH || x < 0 || x >= BW) return 0;
    return imgb[f][y][x][c];
  endfunction

  initial begin
    for (int f = 0; f < FR; f++) begin
      for (int y = 0; y < AH; y++) for (int x = 0; x < AW; x++) for (int c = 0; c < AC; c++)
        imga[f][y][x][c] = data_t'($urandom_range(1, 30000));
      for (int y = 0; y < BH; y++) for (int x = 0; x < BW; x++) for (int c = 0; c < BC; c++)
        imgb[f][y][x][c] = data_t'($urandom_range(1, 30000));
    end
  end

  // drivers
  initial begin
    a_iv = 0; a_id = 0; b_iv = 0; b_id = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      for (int f = 0; f < FR; f++)
        for (int y = 0; y < AH; y++) for (int x = 0; x < AW; x++) for (int c = 0; c < AC; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin a_iv = 0; @(negedge clk); end
          a_iv = 1; a_id = imga[f][y][x][c];
          @(posedge clk); while (!a_ir) @(posedge clk);
          #1 a_iv = 0;
        end
      for (int f = 0; f < FR; f++)
        for (int y = 0; y < BH; y++) for (int x = 0; x < BW; x++) for (int c = 0; c < BC; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin b_iv = 0; @(negedge clk); end
          b_iv = 1; b_id = imgb[f][y][x][c];
          @(posedge clk); while (!b_ir) @(posedge clk);
          #1 b_iv = 0;
        end
    join
  end

  // monitors
  localparam int AHO = (AH + 2*AP - AKY) / AS + 1, AWO = (AW + 2*AP - AKX) / AS + 1;
  localparam int BHO = (BH + 2*BP - BKY) / BS + 1, BWO = (BW + 2*BP - BKX) / BS + 1;
  int na = 0, nb = 0;
  always @(posedge clk) begin
    a_or <= ($urandom_range(0, 2) != 0);
    b_or <= ($urandom_range(0, 2) != 0);
    if (rst_n && a_ov && a_or && na < FR*AHO*AWO*AC) begin
      int f, oy, ox, c, k;
      k = na; c = k % AC; k /= AC; ox = k % AWO; k /= AWO; oy = k % AHO; f = k / AHO;
      for (int ky = 0; ky < AKY; ky++) for (int kx = 0; kx < AKX; kx++) begin
        checks++;
        if (a_od[ky*AKX+kx] !== pa(f, oy*AS+ky-AP, ox*AS+kx-AP, c)) begin
          failures++; $display("FAIL A win %0d (f%0d y%0d x%0d c%0d) tap %0d,%0d", na, f, oy, ox, c, ky, kx);
        end
      end
      na++;
    end
    if (rst_n && b_ov && b_or && nb < FR*BHO*BWO*BC) begin
      int f, oy, ox, c, k;
      k = nb; c = k % BC; k /= BC; ox = k % BWO; k /= BWO; oy = k % BHO; f = k / BHO;
      for (int ky = 0; ky < BKY; ky++) for (int kx = 0; kx < BKX; kx++) begin
        checks++;
        if (b_od[ky*BKX+kx] !== pb(f, oy*BS+ky-BP, ox*BS+kx-BP, c)) begin
          failures++; $display("FAIL B win %0d tap %0d,%0d", nb, ky, kx);
        end
      end
      nb++;
    end
  end

  initial begin
    wait (na == FR*AHO*AWO*AC && nb == FR*BHO*BWO*BC);
    repeat (50) @(posedge clk);
    checks++;
    if (ua.out_valid || ub.out_valid) begin failures++; $display("FAIL extra windows"); end
    $display("windows A=%0d B=%0d", na, nb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
