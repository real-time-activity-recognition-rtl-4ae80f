// lk_flow: dense windowed (Lucas-Kanade) optical flow between the current
// binary mask and the mask D frames earlier, reduced to per-frame sums of
// flow magnitude and flow angle.
//
// Stage 1 forms central-difference gradients Ix, Iy of the current mask and
// the temporal difference It = current - previous on a 3x3 window.  Stage 2
// registers the five products IxIx, IxIy, IyIy, IxIt, IyIt and box_sum adds
// each over a WIN x WIN window.  Stage 3 solves the 2x2 normal equations
//   [Sxx Sxy; Sxy Syy] [u v]' = -[Sxt Syt]'
// by Cramer's rule (divide only when det > 0) and gives u, v in Q8 pixels per
// D frames (the factor 2 of the central difference is folded back in).
// Stage 4 turns (u,v) into magnitude and angle with a CORDIC (angle in
// [0, 2*pi)).  Stage 5 adds magnitude and angle of every pixel whose window
// is inside the frame and whose system is solvable, and after the last pixel
// of the frame emits the two sums and the pixel count for one clock.
// The paper computes dense optical flow as magnitudes and angles and
// averages them; the Lucas-Kanade method and all widths are this design's
// choice, and the paper's window-size numbers (540/640/740) have no stated
// unit, so WIN is an assumed pixel window.
// Timing: fully pipelined, one pixel per clock; `done` comes 5 clocks after
// the last input pixel of a frame.
module lk_flow import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W,
  parameter int unsigned IMG_H = DEF_H,
  parameter int unsigned WIN   = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  coord_t      in_x,
  input  coord_t      in_y,
  input  logic        in_cur,
  input  logic        in_prev,
  output logic        done,
  output logic [47:0] sum_mag_q8,
  output logic [47:0] sum_ang_q8,
  output logic [31:0] count
);
  localparam int unsigned OW = $clog2(WIN * WIN + 1) + 2;
  localparam longint UV_MAX = (64'sd1 <<< 20) - 1;

  // ---- stage 1: gradients ------------------------------------------------
  logic   w_valid;
  coord_t w_x, w_y;
  logic [1:0] win [3][3];   // bit 1 = current, bit 0 = previous
  logic signed [2:0] ix, iy, it;

  win3x3 #(.IMG_W(IMG_W), .DW(2), .PAD(2'b00)) u_win (
    .clk, .rst_n, .in_valid, .in_x, .in_y, .in_d({in_cur, in_prev}),
    .out_valid(w_valid), .out_x(w_x), .out_y(w_y), .win);

  always_comb begin
    ix = 3'(signed'({2'b0, win[1][2][1]})) - 3'(signed'({2'b0, win[1][0][1]}));
    iy = 3'(signed'({2'b0, win[2][1][1]})) - 3'(signed'({2'b0, win[0][1][1]}));
    it = 3'(signed'({2'b0, win[1][1][1]})) - 3'(signed'({2'b0, win[1][1][0]}));
    if (w_x == 0 || w_y == 0) begin
      ix = '0; iy = '0; it = '0;
    end
  end

  // ---- stage 2: products -------------------------------------------------
  logic   p_valid;
  coord_t p_x, p_y;
  logic signed [2:0] p_xx, p_xy, p_yy, p_xt, p_yt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0; p_x <= '0; p_y <= '0;
      p_xx <= '0; p_xy <= '0; p_yy <= '0; p_xt <= '0; p_yt <= '0;
    end else begin
      p_valid <= w_valid;
      if (w_valid) begin
        p_x <= w_x; p_y <= w_y;
        p_xx <= 3'(ix * ix); p_xy <= 3'(ix * iy); p_yy <= 3'(iy * iy);
        p_xt <= 3'(ix * it); p_yt <= 3'(iy * it);
      end
    end
  end

  logic   s_valid [5];
  coord_t s_x [5], s_y [5];
  logic   s_full [5];
  logic signed [OW-1:0] s_sum [5];
  logic signed [2:0]    p_in [5];
  assign p_in[0] = p_xx;
  assign p_in[1] = p_xy;
  assign p_in[2] = p_yy;
  assign p_in[3] = p_xt;
  assign p_in[4] = p_yt;

  for (genvar g = 0; g < 5; g++) begin : g_box
    box_sum #(.IMG_W(IMG_W), .WIN(WIN), .IW(3), .OW(OW)) u_box (
      .clk, .rst_n, .in_valid(p_valid), .in_x(p_x), .in_y(p_y), .in_v(p_in[g]),
      .out_valid(s_valid[g]), .out_x(s_x[g]), .out_y(s_y[g]),
      .out_full(s_full[g]), .out_sum(s_sum[g]));
  end

  // ---- stage 3: solve ----------------------------------------------------
  longint det, unum, vnum, uq, vq;
  always_comb begin
    det  = longint'(s_sum[0]) * longint'(s_sum[2]) - longint'(s_sum[1]) * longint'(s_sum[1]);
    unum = longint'(s_sum[1]) * longint'(s_sum[4]) - longint'(s_sum[2]) * longint'(s_sum[3]);
    vnum = longint'(s_sum[1]) * longint'(s_sum[3]) - longint'(s_sum[0]) * longint'(s_sum[4]);
    uq = 0; vq = 0;
    if (det > 0) begin
      uq = (unum <<< 9) / det;
      vq = (vnum <<< 9) / det;
    end
    if (uq >  UV_MAX) uq =  UV_MAX;
    if (uq < -UV_MAX) uq = -UV_MAX;
    if (vq >  UV_MAX) vq =  UV_MAX;
    if (vq < -UV_MAX) vq = -UV_MAX;
  end

  logic   f_valid, f_ok;
  coord_t f_x, f_y;
  int signed f_u, f_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid <= 1'b0; f_ok <= 1'b0; f_x <= '0; f_y <= '0; f_u <= 0; f_v <= 0;
    end else begin
      f_valid <= s_valid[0];
      if (s_valid[0]) begin
        f_x <= s_x[0]; f_y <= s_y[0];
        f_ok <= s_full[0] && (det > 0);
        f_u <= int'(uq); f_v <= int'(vq);
      end
    end
  end

  // ---- stage 4: polar ----------------------------------------------------
  polar_t pol;
  assign pol = cordic_vec(f_u, f_v);

  logic   c_valid, c_ok;
  coord_t c_x, c_y;
  logic [31:0] c_mag, c_ang;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0; c_ok <= 1'b0; c_x <= '0; c_y <= '0; c_mag <= '0; c_ang <= '0;
    end else begin
      c_valid <= f_valid;
      if (f_valid) begin
        c_x <= f_x; c_y <= f_y; c_ok <= f_ok;
        c_mag <= pol.mag_q8;
        c_ang <= pol.ang_q16 >> 8;
      end
    end
  end

  // ---- stage 5: per-frame sums ---------------------------------------------
  logic [47:0] acc_mag, acc_ang, nmag, nang;
  logic [31:0] acc_cnt, ncnt;
  logic first, last;
  assign first = (c_x == 0) && (c_y == 0);
  assign last  = (c_x == coord_t'(IMG_W - 1)) && (c_y == coord_t'(IMG_H - 1));
  always_comb begin
    nmag = (first ? '0 : acc_mag) + (c_ok ? 48'(c_mag) : '0);
    nang = (first ? '0 : acc_ang) + (c_ok ? 48'(c_ang) : '0);
    ncnt = (first ? '0 : acc_cnt) + 32'(c_ok);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_mag <= '0; acc_ang <= '0; acc_cnt <= '0;
      done <= 1'b0; sum_mag_q8 <= '0; sum_ang_q8 <= '0; count <= '0;
    end else begin
      done <= 1'b0;
      if (c_valid) begin
        acc_mag <= nmag; acc_ang <= nang; acc_cnt <= ncnt;
        if (last) begin
          done <= 1'b1;
          sum_mag_q8 <= nmag; sum_ang_q8 <= nang; count <= ncnt;
        end
      end
    end
  end
endmodule
