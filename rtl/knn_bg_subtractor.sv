// knn_bg_subtractor: per-pixel K-nearest-neighbour background model with
// shadow removal, turning the smoothed grey stream into a binary mask
// (1 = moving subject, 0 = background), as in the paper's binary video.
//
// Each pixel keeps NSAMP past grey values.  A pixel is background when at
// least KNN of them lie within DIST_TH of the new value.  Otherwise it is a
// shadow, and also background, when at least KNN samples are brighter than
// it by a ratio no larger than 1/TAU (p < s and p >= TAU*s, TAU in Q8);
// otherwise it is foreground.  The first NSAMP frames only fill the model and
// give an empty mask.  Afterwards a background pixel overwrites one sample;
// the slot rotates once per frame, so the model forgets its oldest sample.
// The paper names KNN background removal with shadow removal but not its
// settings; NSAMP=7, KNN=2, DIST_TH=20 (squared 400) and TAU=0.5 follow the
// usual defaults of that method and are this design's choice.
// Timing: 1 clock; output tagged with the input coordinates.  The sample
// memory is NSAMP*8 bits per pixel, read and written at the same address.
module knn_bg_subtractor import ir_pkg::*; #(
  parameter int unsigned IMG_W   = DEF_W,
  parameter int unsigned IMG_H   = DEF_H,
  parameter int unsigned NSAMP   = 7,
  parameter int unsigned KNN     = 2,
  parameter int unsigned DIST_TH = 20,
  parameter int unsigned TAU_Q8  = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coord_t in_x,
  input  coord_t in_y,
  input  pix_t   in_pix,
  output logic   out_valid,
  output coord_t out_x,
  output coord_t out_y,
  output logic   out_fg,
  output logic   model_ready
);
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned AW   = $clog2(NPIX);
  localparam int unsigned SW   = (NSAMP > 1) ? $clog2(NSAMP) : 1;
  localparam int unsigned CNTW = $clog2(NSAMP + 1);

  pix_t samples [NPIX][NSAMP];

  logic [AW-1:0]   addr;
  logic [SW-1:0]   slot;          // sample overwritten during this frame
  logic [CNTW-1:0] frames_seen;   // saturates at NSAMP
  logic [CNTW-1:0] n_close, n_shadow;
  logic            is_bg, is_shadow, learning, last_pix;

  assign addr     = AW'(in_y) * AW'(IMG_W) + AW'(in_x);
  assign learning = (frames_seen < CNTW'(NSAMP));
  assign last_pix = (in_x == coord_t'(IMG_W - 1)) && (in_y == coord_t'(IMG_H - 1));
  assign model_ready = !learning;

  always_comb begin
    n_close  = '0;
    n_shadow = '0;
    for (int i = 0; i < NSAMP; i++) begin
      automatic pix_t s = samples[addr][i];
      automatic logic [8:0] d = (in_pix > s) ? 9'(in_pix - s) : 9'(s - in_pix);
      if (d < 9'(DIST_TH)) n_close = n_close + 1'b1;
      else if (in_pix < s && (16'(in_pix) << 8) >= 16'(s) * 16'(TAU_Q8))
        n_shadow = n_shadow + 1'b1;
    end
    is_bg     = (n_close >= CNTW'(KNN));
    is_shadow = !is_bg && (n_shadow >= CNTW'(KNN));
  end

  always_ff @(posedge clk) begin
    if (in_valid && (learning || is_bg))
      samples[addr][slot] <= in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      frames_seen <= '0;
      out_valid <= 1'b0;
      out_x <= '0; out_y <= '0; out_fg <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_x  <= in_x;
        out_y  <= in_y;
        out_fg <= !learning && !is_bg && !is_shadow;
        if (last_pix) begin
          slot <= (slot == SW'(NSAMP - 1)) ? '0 : slot + 1'b1;
          if (learning) frames_seen <= frames_seen + 1'b1;
        end
      end
    end
  end
endmodule
