// box_sum: running sum of a signed value over a WIN x WIN window of a raster
// stream, one pixel per clock.
//
// A WIN-row history buffer and one column sum per x give the vertical sums:
// each column sum adds the new value and drops the value from WIN rows above.
// A WIN-deep shift register of column sums gives the horizontal running sum.
// The sum output with input pixel (x,y) covers rows y-WIN+1..y and columns
// x-WIN+1..x; `out_full` is high when that window lies wholly inside the
// frame.  Latency 1 clock, output tagged with the input coordinates.
module box_sum import ir_pkg::*; #(
  parameter int unsigned IMG_W = DEF_W,
  parameter int unsigned WIN   = 15,
  parameter int unsigned IW    = 3,
  parameter int unsigned OW    = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  coord_t               in_x,
  input  coord_t               in_y,
  input  logic signed [IW-1:0] in_v,
  output logic                 out_valid,
  output coord_t               out_x,
  output coord_t               out_y,
  output logic                 out_full,
  output logic signed [OW-1:0] out_sum
);
  localparam int unsigned RW = (WIN > 1) ? $clog2(WIN) : 1;
  localparam int unsigned HW = $clog2(WIN * IMG_W);

  logic signed [IW-1:0] hist   [WIN * IMG_W];
  logic signed [OW-1:0] colsum [IMG_W];
  logic signed [OW-1:0] cs_sr  [WIN];
  logic signed [OW-1:0] rowsum, cs_new, rs_new, old_v;
  logic [RW-1:0] rslot, slot_used;
  logic [HW-1:0] haddr;
  localparam int unsigned XIW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  logic [XIW-1:0] xi;
  assign xi = in_x[XIW-1:0];

  always_comb begin
    slot_used = (in_y == 0) ? '0 : rslot;
    haddr  = HW'(slot_used) * HW'(IMG_W) + HW'(in_x);
    old_v  = (in_y >= coord_t'(WIN)) ? OW'(hist[haddr]) : '0;
    cs_new = ((in_y == 0) ? '0 : colsum[xi]) + OW'(in_v) - old_v;
    rs_new = ((in_x == 0) ? '0 : rowsum) + cs_new
           - ((in_x >= coord_t'(WIN)) ? cs_sr[WIN-1] : '0);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hist[haddr]    <= in_v;
      colsum[xi]   <= cs_new;
      cs_sr[0]       <= cs_new;
      for (int i = 1; i < WIN; i++) cs_sr[i] <= cs_sr[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rslot <= '0; rowsum <= '0;
      out_valid <= 1'b0; out_x <= '0; out_y <= '0; out_full <= 1'b0; out_sum <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        rowsum <= rs_new;
        if (in_x == coord_t'(IMG_W - 1))
          rslot <= (slot_used == RW'(WIN - 1)) ? '0 : slot_used + 1'b1;
        out_x <= in_x; out_y <= in_y;
        out_full <= (in_x >= coord_t'(WIN - 1)) && (in_y >= coord_t'(WIN - 1));
        out_sum  <= rs_new;
      end
    end
  end
endmodule
