// win3x3: 3x3 neighbourhood generator for a raster pixel stream.
//
// Two line buffers hold the previous two rows; a 3x3 register array shifts in
// one new column per pixel.  When pixel (x,y) enters, the window registered on
// the next clock is centred on (x-1,y-1): row 0 is y-2, column 0 is x-2.
// Neighbours that fall outside the frame read as PAD, so a stage can choose
// the value that does not disturb its operator (0 for max, all ones for min).
// Interface: in_valid/in_x/in_y/in_d, out_valid/out_x/out_y/win, latency 1.
// The window shape is the common 3x3 one; the paper gives no filter sizes.
module win3x3 import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W,
  parameter int unsigned DW    = 8,
  parameter logic [DW-1:0] PAD = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  coord_t        in_x,
  input  coord_t        in_y,
  input  logic [DW-1:0] in_d,
  output logic          out_valid,
  output coord_t        out_x,
  output coord_t        out_y,
  output logic [DW-1:0] win [3][3]
);
  logic [DW-1:0] lb1 [IMG_W];   // row y-1
  logic [DW-1:0] lb2 [IMG_W];   // row y-2
  logic [DW-1:0] col [3];
  localparam int unsigned XIW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  logic [XIW-1:0] xi;
  assign xi = in_x[XIW-1:0];

  always_comb begin
    col[2] = in_d;
    col[1] = (in_y >= 1) ? lb1[xi] : PAD;
    col[0] = (in_y >= 2) ? lb2[xi] : PAD;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb1[xi] <= in_d;
      lb2[xi] <= lb1[xi];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x <= '0;
      out_y <= '0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) win[r][c] <= PAD;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_x <= in_x;
        out_y <= in_y;
        for (int r = 0; r < 3; r++) begin
          win[r][0] <= (in_x >= 2) ? win[r][1] : PAD;
          win[r][1] <= (in_x >= 1) ? win[r][2] : PAD;
          win[r][2] <= col[r];
        end
      end
    end
  end
endmodule
