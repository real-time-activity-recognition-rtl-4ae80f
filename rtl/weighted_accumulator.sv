// weighted_accumulator: frame memory holding the weighted sum of the sampled
// binary frames, the single image that the CNN classifies.
//
// For each pixel of a taken frame:
//     acc <= min(255, acc * BETA_PCT / 100 + 255 * mask)
// so each new sampled frame is added at full intensity and every earlier one
// keeps BETA_PCT percent of its intensity per step; the oldest frames fade
// most.  This is the paper's weighting; BETA_PCT = 40 is the "intensity of
// previous frames" that gave the best result on the intention data (Fig. 12).
// Frames that are not taken leave the memory unchanged and produce no
// output.  `clear` (a pulse, e.g. at the start of tracking) makes the next
// taken frame start from an empty memory.
// Interface: `take` is sampled at the first pixel (0,0) of a frame and holds
// for that frame.  Output stream: one updated pixel per input pixel of a
// taken frame, 1 clock later; `frame_done` pulses with the last pixel, when
// the weighted frame is complete for the classifier.
module weighted_accumulator import ir_pkg::*; #(
  parameter int unsigned IMG_W    = DEF_W,
  parameter int unsigned IMG_H    = DEF_H,
  parameter int unsigned BETA_PCT = 40
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coord_t in_x,
  input  coord_t in_y,
  input  logic   in_mask,
  input  logic   take,
  input  logic   clear,
  output logic   out_valid,
  output coord_t out_x,
  output coord_t out_y,
  output pix_t   out_pix,
  output logic   frame_done
);
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned AW   = $clog2(NPIX);

  pix_t acc [NPIX];

  logic [AW-1:0] addr;
  logic first, last, take_f, take_now, clear_pend, restart_f, restart_now;
  pix_t decayed;
  pix_t old_v, new_v;

  assign addr  = AW'(in_y) * AW'(IMG_W) + AW'(in_x);
  assign first = (in_x == 0) && (in_y == 0);
  assign last  = (in_x == coord_t'(IMG_W - 1)) && (in_y == coord_t'(IMG_H - 1));
  assign take_now    = first ? take : take_f;
  assign restart_now = first ? (clear_pend || clear) : restart_f;

  always_comb begin
    old_v   = restart_now ? 8'd0 : acc[addr];
    decayed = pix_t'((16'(old_v) * 16'(BETA_PCT)) / 16'd100);
    new_v   = in_mask ? 8'hFF : decayed;
  end

  always_ff @(posedge clk) begin
    if (in_valid && take_now) acc[addr] <= new_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      take_f <= 1'b0; restart_f <= 1'b0; clear_pend <= 1'b1;
      out_valid <= 1'b0; out_x <= '0; out_y <= '0; out_pix <= '0; frame_done <= 1'b0;
    end else begin
      out_valid  <= in_valid && take_now;
      frame_done <= in_valid && take_now && last;
      if (clear) clear_pend <= 1'b1;
      if (in_valid) begin
        if (first) begin
          take_f    <= take;
          restart_f <= clear_pend || clear;
          if (take) clear_pend <= 1'b0;
        end
        if (take_now) begin
          out_x <= in_x; out_y <= in_y; out_pix <= new_v;
        end
      end
    end
  end
endmodule
