// frame_delay: pairs each pixel of the binary mask with the same pixel D
// frames earlier, the two frames between which optical flow is computed.
//
// The paper computes optical flow "between two fixed frames" and evaluates
// the distance between them (Fig. 13: 2, 4, 6, 8, 10 frames; 2 was best on
// the intention data).  D one-bit frame slots form a ring: at each pixel the
// slot of the current ring position is read (the mask from D frames ago)
// and then overwritten with the new mask bit.  The ring moves on after the
// last pixel of a frame.  `out_prev_ok` stays low until D frames have been
// stored.
// Timing: 1 clock, output tagged with the input coordinates.
module frame_delay import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W,
  parameter int unsigned IMG_H = DEF_H,
  parameter int unsigned D     = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coord_t in_x,
  input  coord_t in_y,
  input  logic   in_bit,
  output logic   out_valid,
  output coord_t out_x,
  output coord_t out_y,
  output logic   out_cur,
  output logic   out_prev,
  output logic   out_prev_ok
);
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned AW   = $clog2(NPIX * D);
  localparam int unsigned SW   = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned FW   = $clog2(D + 1);

  logic mem [NPIX * D];
  logic [SW-1:0] slot;
  logic [FW-1:0] filled;
  logic [AW-1:0] addr;
  logic last_pix;

  assign addr = AW'(slot) * AW'(NPIX) + AW'(in_y) * AW'(IMG_W) + AW'(in_x);
  assign last_pix = (in_x == coord_t'(IMG_W - 1)) && (in_y == coord_t'(IMG_H - 1));

  always_ff @(posedge clk) begin
    if (in_valid) mem[addr] <= in_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; filled <= '0;
      out_valid <= 1'b0; out_x <= '0; out_y <= '0;
      out_cur <= 1'b0; out_prev <= 1'b0; out_prev_ok <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_x <= in_x; out_y <= in_y;
        out_cur  <= in_bit;
        out_prev <= (filled == FW'(D)) ? mem[addr] : 1'b0;
        out_prev_ok <= (filled == FW'(D));
        if (last_pix) begin
          slot <= (slot == SW'(D - 1)) ? '0 : slot + 1'b1;
          if (filled != FW'(D)) filled <= filled + 1'b1;
        end
      end
    end
  end
endmodule
