// ir_top: programmable-logic pixel pipeline of the vision-based intention
// recognition system, from camera pixels to the weighted motion image that
// the CNN accelerator classifies.
//
// Data path (one grey pixel per clock, raster order):
//   camera -> dilation -> erosion -> Gaussian smoothing      (noise removal)
//          -> KNN background subtraction                     (binary mask)
//          -> motion_tracker                                 (start of tracking)
//          -> frame_delay (mask now, mask D frames ago)
//          -> lk_flow -> adaptive_sampler                    (rate S, Eq. 2)
//          -> weighted_accumulator                           (sum of weighted frames)
//          -> wf_* stream to the CNN accelerator
// The order of the stages and the split of the work follow the paper's
// algorithm; the CNN accelerator (a vendor DPU running AlexNet) and the
// processor are outside this module, so the weighted frame leaves on a plain
// stream and the rate and tracking state are visible as status ports.
// Input: `in_valid` marks a pixel, `in_sof` marks pixel (0,0) of a frame;
// frames must be exactly IMG_W x IMG_H pixels, back to back or with gaps.
// Timing: no stalls; a frame of the weighted image leaves about 9 clocks after
// the corresponding camera frame, the rate is known 6 clocks after its end.
// Each 3x3 stage shifts the image by one pixel right and down (see
// morph_filter), so the mask is offset by three pixels from the camera image.
// The two protocol assertions at the end are disabled while the asynchronous
// reset is low; a linter may report that reset as used both asynchronously
// and synchronously, which refers only to these checks, not to any flop.
module ir_top import ir_pkg::*; #(
  parameter int unsigned IMG_W    = DEF_W,
  parameter int unsigned IMG_H    = DEF_H,
  parameter int unsigned NSAMP    = 7,
  parameter int unsigned KNN      = 2,
  parameter int unsigned DIST_TH  = 20,
  parameter int unsigned TAU_Q8   = 128,
  parameter int unsigned MIN_AREA = 50,
  parameter int unsigned D        = 2,
  parameter int unsigned WIN      = 15,
  parameter int unsigned BETA_PCT = 40,
  parameter int unsigned S_LOW    = 2,
  parameter int unsigned S_MAX    = 255
) (
  input  logic        clk,
  input  logic        rst_n,
  // camera stream
  input  logic        in_valid,
  input  logic        in_sof,
  input  pix_t        in_pix,
  // weighted frame stream to the CNN accelerator
  output logic        wf_valid,
  output coord_t      wf_x,
  output coord_t      wf_y,
  output pix_t        wf_pix,
  output logic        wf_frame_done,
  // status
  output logic        fg_valid,
  output logic        fg_bit,
  output logic        model_ready,
  output logic        tracking,
  output logic [$clog2(IMG_W*IMG_H+1)-1:0] fg_area,
  output logic [7:0]  rate,
  output logic        rate_clamped,
  output logic        flow_done,
  output logic [31:0] mean_mag_q8,
  output logic [31:0] mean_ang_q8
);
  // ---- coordinates of the camera stream --------------------------------------
  coord_t nx, ny, cx, cy;
  assign cx = in_sof ? '0 : nx;
  assign cy = in_sof ? '0 : ny;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nx <= '0; ny <= '0;
    end else if (in_valid) begin
      if (cx == coord_t'(IMG_W - 1)) begin
        nx <= '0;
        ny <= (cy == coord_t'(IMG_H - 1)) ? '0 : cy + 1'b1;
      end else begin
        nx <= cx + 1'b1;
        ny <= cy;
      end
    end
  end

  // ---- noise removal -----------------------------------------------------------
  logic   d_v, e_v, g_v;
  coord_t d_x, d_y, e_x, e_y, g_x, g_y;
  pix_t   d_p, e_p, g_p;

  morph_filter #(.IMG_W(IMG_W), .MODE(MORPH_DILATE)) u_dilate (
    .clk, .rst_n, .in_valid, .in_x(cx), .in_y(cy), .in_pix,
    .out_valid(d_v), .out_x(d_x), .out_y(d_y), .out_pix(d_p));

  morph_filter #(.IMG_W(IMG_W), .MODE(MORPH_ERODE)) u_erode (
    .clk, .rst_n, .in_valid(d_v), .in_x(d_x), .in_y(d_y), .in_pix(d_p),
    .out_valid(e_v), .out_x(e_x), .out_y(e_y), .out_pix(e_p));

  gaussian_filter #(.IMG_W(IMG_W)) u_gauss (
    .clk, .rst_n, .in_valid(e_v), .in_x(e_x), .in_y(e_y), .in_pix(e_p),
    .out_valid(g_v), .out_x(g_x), .out_y(g_y), .out_pix(g_p));

  // ---- background subtraction -----------------------------------------------
  logic   k_v, k_fg;
  coord_t k_x, k_y;

  knn_bg_subtractor #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NSAMP(NSAMP), .KNN(KNN),
                      .DIST_TH(DIST_TH), .TAU_Q8(TAU_Q8)) u_bg (
    .clk, .rst_n, .in_valid(g_v), .in_x(g_x), .in_y(g_y), .in_pix(g_p),
    .out_valid(k_v), .out_x(k_x), .out_y(k_y), .out_fg(k_fg), .model_ready);

  assign fg_valid = k_v;
  assign fg_bit   = k_fg;

  // ---- tracking --------------------------------------------------------------
  logic track_start;

  motion_tracker #(.IMG_W(IMG_W), .IMG_H(IMG_H), .MIN_AREA(MIN_AREA)) u_track (
    .clk, .rst_n, .in_valid(k_v), .in_x(k_x), .in_y(k_y), .in_fg(k_fg),
    .tracking, .track_start, .area(fg_area));

  // ---- frame pair for optical flow -------------------------------------------
  logic   f_v, f_cur, f_prev, f_prev_ok;
  coord_t f_x, f_y;

  frame_delay #(.IMG_W(IMG_W), .IMG_H(IMG_H), .D(D)) u_delay (
    .clk, .rst_n, .in_valid(k_v), .in_x(k_x), .in_y(k_y), .in_bit(k_fg),
    .out_valid(f_v), .out_x(f_x), .out_y(f_y), .out_cur(f_cur), .out_prev(f_prev),
    .out_prev_ok(f_prev_ok));

  // ---- optical flow and sampling rate ----------------------------------------
  logic [47:0] sum_mag, sum_ang;
  logic [31:0] flow_cnt;
  logic        take, frame_start;

  lk_flow #(.IMG_W(IMG_W), .IMG_H(IMG_H), .WIN(WIN)) u_flow (
    .clk, .rst_n, .in_valid(f_v && f_prev_ok), .in_x(f_x), .in_y(f_y),
    .in_cur(f_cur), .in_prev(f_prev),
    .done(flow_done), .sum_mag_q8(sum_mag), .sum_ang_q8(sum_ang), .count(flow_cnt));

  assign frame_start = f_v && (f_x == 0) && (f_y == 0);

  adaptive_sampler #(.S_LOW(S_LOW), .S_MAX(S_MAX)) u_sampler (
    .clk, .rst_n, .flow_done, .sum_mag_q8(sum_mag), .sum_ang_q8(sum_ang),
    .count(flow_cnt), .tracking, .track_start, .frame_start,
    .take, .rate, .rate_clamped, .mean_mag_q8, .mean_ang_q8);

  // ---- sum of weighted frames ------------------------------------------------
  weighted_accumulator #(.IMG_W(IMG_W), .IMG_H(IMG_H), .BETA_PCT(BETA_PCT)) u_acc (
    .clk, .rst_n, .in_valid(f_v), .in_x(f_x), .in_y(f_y), .in_mask(f_cur),
    .take, .clear(track_start),
    .out_valid(wf_valid), .out_x(wf_x), .out_y(wf_y), .out_pix(wf_pix),
    .frame_done(wf_frame_done));

  // ---- protocol checks ---------------------------------------------------------
  // A frame must start exactly where the previous one ended.
  a_sof_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_sof) |-> (nx == 0 && ny == 0))
    else $error("start of frame before the previous frame was complete");
  a_in_frame: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (cx < coord_t'(IMG_W) && cy < coord_t'(IMG_H)))
    else $error("camera coordinates out of frame");
endmodule
