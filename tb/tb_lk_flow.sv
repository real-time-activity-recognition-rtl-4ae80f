// tb_lk_flow: moves random rectangles between a previous and a current binary
// frame and compares the per-frame flow sums with a reference computed in the
// testbench: gradients, window sums and Cramer's rule written out directly
// over the whole frame, with magnitude and angle from $sqrt and $atan2.
// The pixel count must match exactly, the sums within 2 LSB per pixel (CORDIC
// and Q8 truncation).  The `done` pulse must come 5 clocks after the last
// pixel (counted from the clock edge that takes it).  It also checks that a
// rectangle moving down gives a mean angle near pi/2.  (A rectangle moving
// right gives angles just above 0 and just below 2*pi, whose mean is near pi:
// that is what averaging angles in [0, 2*pi) does.)
module tb_lk_flow;
  import ir_pkg::*;
  localparam int W = 24, H = 20, WN = 5, NF = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, in_cur = 0, in_prev = 0; coord_t in_x = 0, in_y = 0;
  logic done; logic [47:0] smag, sang; logic [31:0] cnt;

  lk_flow #(.IMG_W(W), .IMG_H(H), .WIN(WN)) dut (.clk, .rst_n, .in_valid, .in_x, .in_y, .in_cur, .in_prev,
    .done, .sum_mag_q8(smag), .sum_ang_q8(sang), .count(cnt));

  bit cur [H][W], prv [H][W];
  int ixx [H][W], ixy [H][W], iyy [H][W], ixt [H][W], iyt [H][W];
  real ref_mag, ref_ang; int ref_cnt;
  real PI = 3.14159265358979;

  function automatic real absr(real a);
    return (a < 0) ? -a : a;
  endfunction

  function automatic int c_at(int x, int y);
    return (x < 0 || y < 0 || x >= W || y >= H) ? 0 : int'(cur[y][x]);
  endfunction

  task automatic reference();
    ref_mag = 0; ref_ang = 0; ref_cnt = 0;
    for (int py = 0; py < H; py++) for (int px = 0; px < W; px++) begin
      int gx = 0, gy = 0, gt = 0;
      if (px > 0 && py > 0) begin
        gx = c_at(px, py - 1) - c_at(px - 2, py - 1);
        gy = c_at(px - 1, py) - c_at(px - 1, py - 2);
        gt = c_at(px - 1, py - 1) - int'(prv[py-1][px-1]);
      end
      ixx[py][px] = gx * gx; ixy[py][px] = gx * gy; iyy[py][px] = gy * gy;
      ixt[py][px] = gx * gt; iyt[py][px] = gy * gt;
    end
    for (int by = WN - 1; by < H; by++) for (int bx = WN - 1; bx < W; bx++) begin
      longint sxx = 0, sxy = 0, syy = 0, sxt = 0, syt = 0, det, un, vn, uq, vq;
      for (int yy = by - WN + 1; yy <= by; yy++) for (int xx = bx - WN + 1; xx <= bx; xx++) begin
        sxx += ixx[yy][xx]; sxy += ixy[yy][xx]; syy += iyy[yy][xx];
        sxt += ixt[yy][xx]; syt += iyt[yy][xx];
      end
      det = sxx * syy - sxy * sxy;
      if (det > 0) begin
        real a;
        un = sxy * syt - syy * sxt;
        vn = sxy * sxt - sxx * syt;
        uq = (un * 512) / det;      // Q8, factor 2 of the central difference
        vq = (vn * 512) / det;
        a = $atan2(real'(vq), real'(uq));
        if (a < 0) a += 2 * PI;
        if (vq == 0 && uq >= 0) a = 0;
        ref_cnt++;
        ref_mag += $sqrt(real'(uq * uq + vq * vq));
        ref_ang += a * 256.0;
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int last_cyc, done_cyc;
  always @(posedge clk) if (rst_n && done) done_cyc = cyc;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      int rx, ry, rw, rh, dx, dy;
      real tol, mean_ang;
      rw = 4 + int'($urandom_range(0, 4)); rh = 4 + int'($urandom_range(0, 4));
      rx = 4 + int'($urandom_range(0, 6)); ry = 4 + int'($urandom_range(0, 5));
      case (f)
        0: begin dx = 1; dy = 0; end
        1: begin dx = 0; dy = 1; end
        default: begin dx = int'($urandom_range(0, 4)) - 2; dy = int'($urandom_range(0, 4)) - 2; end
      endcase
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        prv[y][x] = (x >= rx && x < rx + rw && y >= ry && y < ry + rh);
        cur[y][x] = (x >= rx + dx && x < rx + dx + rw && y >= ry + dy && y < ry + dy + rh);
      end
      reference();
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = coord_t'(x); in_y = coord_t'(y); in_cur = cur[y][x]; in_prev = prv[y][x];
      end
      last_cyc = cyc;
      @(negedge clk) in_valid = 0;
      repeat (8) @(negedge clk);
      tol = 2.0 * ref_cnt + 2.0;
      checks++;
      if (done_cyc - (last_cyc + 1) != 5) begin failures++; $display("f%0d done latency %0d", f, done_cyc - (last_cyc + 1)); end
      checks++;
      if (cnt != 32'(ref_cnt)) begin failures++; $display("f%0d count %0d exp %0d", f, cnt, ref_cnt); end
      checks++;
      if (absr(real'(smag) - ref_mag) > tol) begin failures++; $display("f%0d mag %0d exp %f", f, smag, ref_mag); end
      checks++;
      if (absr(real'(sang) - ref_ang) > tol) begin failures++; $display("f%0d ang %0d exp %f", f, sang, ref_ang); end
      mean_ang = (cnt != 0) ? real'(sang) / real'(cnt) / 256.0 : 0.0;
      $display("f%0d d=(%0d,%0d) count=%0d mean|v|=%f px mean angle=%f rad", f, dx, dy, cnt,
               (cnt != 0) ? real'(smag) / real'(cnt) / 256.0 : 0.0, mean_ang);
      if (f == 1) begin
        checks++;
        if (mean_ang < 0.8 || mean_ang > 2.4) begin failures++; $display("downward motion angle %f", mean_ang); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
