// gaussian_filter: 3x3 Gaussian smoothing of a raster pixel stream.
//
// Kernel [1 2 1; 2 4 2; 1 2 1]/16 with rounding (+8 before the shift).  The
// paper asks for "a proper Gaussian filter" without a size or sigma; the
// 3x3 binomial kernel is this design's choice.  Pixels outside the frame
// count as 0.
// Timing: as morph_filter, 2 clocks, output tagged (x,y) is centred on
// (x-1,y-1); row 0 and column 0 of the output are 0.
module gaussian_filter import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W
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
  logic   w_valid;
  coord_t w_x, w_y;
  pix_t   win [3][3];
  logic [11:0] acc;
  pix_t        blur;

  win3x3 #(.IMG_W(IMG_W), .DW(8), .PAD(8'h00)) u_win (
    .clk, .rst_n, .in_valid, .in_x, .in_y, .in_d(in_pix),
    .out_valid(w_valid), .out_x(w_x), .out_y(w_y), .win);

  always_comb begin
    acc = 12'(win[0][0]) + 12'(win[0][2]) + 12'(win[2][0]) + 12'(win[2][2])
        + (12'(win[0][1]) << 1) + (12'(win[1][0]) << 1)
        + (12'(win[1][2]) << 1) + (12'(win[2][1]) << 1)
        + (12'(win[1][1]) << 2) + 12'd8;
    blur = pix_t'(acc >> 4);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x <= '0; out_y <= '0; out_pix <= '0;
    end else begin
      out_valid <= w_valid;
      if (w_valid) begin
        out_x <= w_x; out_y <= w_y;
        out_pix <= (w_x == 0 || w_y == 0) ? 8'h00 : blur;
      end
    end
  end
endmodule
