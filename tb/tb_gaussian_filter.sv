// tb_gaussian_filter: checks the 3x3 binomial smoothing against a reference
// model on random 10x7 frames, including zero padding at the frame edges,
// the zero row/column of the shifted output and the 2-clock latency.
module tb_gaussian_filter;
  import ir_pkg::*;
  localparam int W = 10, H = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0; coord_t in_x = 0, in_y = 0; pix_t in_pix = 0;
  logic ov; coord_t ox, oy; pix_t op;
  pix_t img [H][W];
  int sent_cycle [H][W];

  gaussian_filter #(.IMG_W(W)) dut (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_pix,
    .out_valid(ov), .out_x(ox), .out_y(oy), .out_pix(op));

  function automatic int px(int x, int y);
    return (x < 0 || y < 0) ? 0 : int'(img[y][x]);
  endfunction
  function automatic pix_t ref_g(int x, int y);
    int k [3] = '{1, 2, 1};
    int s = 0;
    if (x == 0 || y == 0) return 0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) s += k[r] * k[c] * px(x - 2 + c, y - 2 + r);
    return pix_t'((s + 8) / 16);
  endfunction

  always @(posedge clk) if (rst_n && ov) begin
    checks++;
    if (op !== ref_g(ox, oy)) begin failures++; $display("(%0d,%0d) got %0d exp %0d", ox, oy, op, ref_g(ox, oy)); end
    checks++;
    if (cyc - sent_cycle[oy][ox] != 2) begin failures++; $display("latency %0d", cyc - sent_cycle[oy][ox]); end
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
      repeat (4) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
