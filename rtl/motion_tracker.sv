// motion_tracker: decides from the binary mask whether a moving subject is in
// the scene, which starts (and ends) tracking.
//
// The paper takes "the presence of a moving contour in the image" as the
// starting point for tracking and finds contours in software.  This block
// keeps only that decision: it counts foreground pixels over a frame and
// declares a subject present when the count reaches MIN_AREA (an assumed
// threshold).  It does not extract contour outlines.
// Timing: `tracking` and `area` update on the clock after the last pixel
// (IMG_W-1, IMG_H-1) of a frame; `track_start` pulses for one clock when
// tracking turns on.
module motion_tracker import ir_pkg::*; #(
  parameter int unsigned IMG_W    = DEF_W,
  parameter int unsigned IMG_H    = DEF_H,
  parameter int unsigned MIN_AREA = 50
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coord_t in_x,
  input  coord_t in_y,
  input  logic   in_fg,
  output logic   tracking,
  output logic   track_start,
  output logic [$clog2(IMG_W*IMG_H+1)-1:0] area
);
  localparam int unsigned AW = $clog2(IMG_W * IMG_H + 1);
  logic [AW-1:0] cnt, cnt_next;
  logic last_pix, present;

  assign last_pix = in_valid && (in_x == coord_t'(IMG_W - 1)) && (in_y == coord_t'(IMG_H - 1));
  assign cnt_next = ((in_x == 0 && in_y == 0) ? '0 : cnt) + AW'(in_fg);
  assign present  = (cnt_next >= AW'(MIN_AREA));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; tracking <= 1'b0; track_start <= 1'b0; area <= '0;
    end else begin
      track_start <= 1'b0;
      if (in_valid) cnt <= cnt_next;
      if (last_pix) begin
        area        <= cnt_next;
        tracking    <= present;
        track_start <= present && !tracking;
      end
    end
  end
endmodule
