// tb_morph_filter: checks 3x3 dilation and erosion against a reference model.
// Both operators run side by side on random frames of 8x6 pixels; every
// output pixel is compared with the max/min of the in-frame neighbours of
// (x-1,y-1), or with the neutral value on row 0 and column 0.  The latency
// of two clocks is checked too.
module tb_morph_filter;
  import ir_pkg::*;
  localparam int W = 8, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0; coord_t in_x = 0, in_y = 0; pix_t in_pix = 0;
  logic dv, ev; coord_t dx, dy, ex, ey; pix_t dp, ep;
  pix_t img [H][W];

  morph_filter #(.IMG_W(W), .MODE(MORPH_DILATE)) dut_d (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_pix,
    .out_valid(dv), .out_x(dx), .out_y(dy), .out_pix(dp));
  morph_filter #(.IMG_W(W), .MODE(MORPH_ERODE)) dut_e (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_pix,
    .out_valid(ev), .out_x(ex), .out_y(ey), .out_pix(ep));

  function automatic pix_t ref_op(int x, int y, bit erode);
    pix_t r = erode ? 8'hFF : 8'h00;
    if (x == 0 || y == 0) return r;
    for (int yy = y - 2; yy <= y; yy++)
      for (int xx = x - 2; xx <= x; xx++)
        if (yy >= 0 && xx >= 0) begin
          if (!erode && img[yy][xx] > r) r = img[yy][xx];
          if ( erode && img[yy][xx] < r) r = img[yy][xx];
        end
    return r;
  endfunction

  int sent_cycle [H][W];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (dv) begin
      checks++;
      if (dp !== ref_op(dx, dy, 0)) begin failures++; $display("dilate (%0d,%0d) got %0d exp %0d", dx, dy, dp, ref_op(dx, dy, 0)); end
      checks++;
      if (cyc - sent_cycle[dy][dx] != 2) begin failures++; $display("latency %0d", cyc - sent_cycle[dy][dx]); end
    end
    if (ev) begin
      checks++;
      if (ep !== ref_op(ex, ey, 1)) begin failures++; $display("erode (%0d,%0d) got %0d exp %0d", ex, ey, ep, ref_op(ex, ey, 1)); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = pix_t'($urandom);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_pix = img[y][x];
        sent_cycle[y][x] = cyc;
      end
      @(negedge clk) in_valid = 0;
      repeat (4) @(negedge clk);   // let the last outputs drain before img changes
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
