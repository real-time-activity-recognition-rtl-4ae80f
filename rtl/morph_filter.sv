// morph_filter: 3x3 grey-level dilation or erosion of a raster pixel stream.
//
// Dilation outputs the maximum of the 3x3 neighbourhood, erosion the minimum.
// The paper removes noise with "dilation and erosion operations" before
// smoothing; it does not give the structuring element, so a full 3x3 square
// is used here.  Pixels outside the frame are neutral (0 for dilation, 255
// for erosion).
// Timing: the output for input pixel (x,y) appears 2 clocks later, tagged
// (x,y), and holds the result centred on (x-1,y-1).  The output image is
// therefore shifted one pixel right and down; its row 0 and column 0 carry
// the neutral value.  One pixel per clock, no stalls.
module morph_filter import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W,
  parameter morph_mode_e MODE  = MORPH_DILATE
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
  output pix_t   out_pix
);
  localparam pix_t NEUTRAL = (MODE == MORPH_DILATE) ? 8'h00 : 8'hFF;

  logic   w_valid;
  coord_t w_x, w_y;
  pix_t   win [3][3];
  pix_t   res;

  win3x3 #(.IMG_W(IMG_W), .DW(8), .PAD(NEUTRAL)) u_win (
    .clk, .rst_n, .in_valid, .in_x, .in_y, .in_d(in_pix),
    .out_valid(w_valid), .out_x(w_x), .out_y(w_y), .win);

  always_comb begin
    res = win[1][1];
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        if (MODE == MORPH_DILATE) begin
          if (win[r][c] > res) res = win[r][c];
        end else begin
          if (win[r][c] < res) res = win[r][c];
        end
    if (w_x == 0 || w_y == 0) res = NEUTRAL;   // centre lies outside the frame
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x <= '0; out_y <= '0; out_pix <= '0;
    end else begin
      out_valid <= w_valid;
      if (w_valid) begin
        out_x <= w_x; out_y <= w_y; out_pix <= res;
      end
    end
  end
endmodule
