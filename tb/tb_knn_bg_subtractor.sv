// tb_knn_bg_subtractor: runs the background model over a small noisy static
// scene into which bright objects and shadows are painted, and compares the
// mask with an independent model of the same KNN rule.  It also checks
// directed cases: painted objects are foreground, painted shadows are not,
// the mask is empty while the model learns, and the latency is 1 clock.
module tb_knn_bg_subtractor;
  import ir_pkg::*;
  localparam int W = 6, H = 4, N = 3, K = 2, TH = 20, TAU = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_fg_obj = 0, n_shadow_obj = 0;

  logic in_valid = 0; coord_t in_x = 0, in_y = 0; pix_t in_pix = 0;
  logic ov, ofg, ready; coord_t ox, oy;

  knn_bg_subtractor #(.IMG_W(W), .IMG_H(H), .NSAMP(N), .KNN(K), .DIST_TH(TH), .TAU_Q8(TAU)) dut (
    .clk, .rst_n, .in_valid, .in_x, .in_y, .in_pix,
    .out_valid(ov), .out_x(ox), .out_y(oy), .out_fg(ofg), .model_ready(ready));

  int bgv [H][W];
  int smp [H][W][N];
  int slot = 0, seen = 0;

  // returns expected mask bit and updates the reference model
  function automatic bit ref_pixel(int x, int y, int p);
    int nc = 0, ns = 0;
    bit learning = (seen < N);
    bit bg, sh;
    for (int i = 0; i < N; i++) begin
      int d = p > smp[y][x][i] ? p - smp[y][x][i] : smp[y][x][i] - p;
      if (d < TH) nc++;
      else if (p < smp[y][x][i] && p * 256 >= smp[y][x][i] * TAU) ns++;
    end
    bg = (nc >= K); sh = !bg && (ns >= K);
    if (learning || bg) smp[y][x][slot] = p;
    return !learning && !bg && !sh;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) bgv[y][x] = 60 + int'($urandom_range(0, 120));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        int p, kind, r;
        bit exp_fg;
        p = bgv[y][x] + int'($urandom_range(0, 8)) - 4;
        kind = 0;
        if (f >= N) begin
          r = int'($urandom_range(0, 9));
          if (r == 0) begin p = bgv[y][x] + 70; kind = 1; end          // object
          else if (r == 1) begin p = (bgv[y][x] * 7) / 10; kind = 2; end // shadow
        end
        if (p > 255) p = 255;
        exp_fg = ref_pixel(x, y, p);
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_pix = pix_t'(p);
        @(posedge clk); #1;
        checks++;
        if (!ov || ox != coord_t'(x) || oy != coord_t'(y) || ofg != exp_fg) begin
          failures++; $display("f%0d (%0d,%0d) p=%0d fg=%0d exp %0d", f, x, y, p, ofg, exp_fg);
        end
        if (kind == 1) begin n_fg_obj++; checks++; if (!ofg) begin failures++; $display("object missed"); end end
        if (kind == 2) begin n_shadow_obj++; checks++; if (ofg) begin failures++; $display("shadow kept"); end end
        if (f < N) begin checks++; if (ofg) begin failures++; $display("mask during learning"); end end
        else begin checks++; if (!ready) begin failures++; $display("model not ready"); end end
      end
      slot = (slot + 1) % N;
      if (seen < N) seen++;
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (n_fg_obj == 0 || n_shadow_obj == 0) begin failures++; $display("no objects or shadows generated"); end
    $display("objects %0d shadows %0d", n_fg_obj, n_shadow_obj);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
