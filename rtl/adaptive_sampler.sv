// adaptive_sampler: turns the per-frame optical flow sums into the adaptive
// sampling rate S of the paper's Eq. (2) and selects every S-th frame.
//
// When `flow_done` arrives, the mean magnitude m and mean angle a are the
// sums divided by the pixel count (Q8), and
//     S = round( sqrt(m^2 + a^2) )      frames.
// The paper defines u in Eq. (2) as "the mean value of the amplitude" and v
// as "the mean value of the angles"; this block follows those definitions
// literally (angle in radians).  If no pixel carried flow, or S rounds to 0,
// or S exceeds S_MAX (the "zero or infinite values" caused by noise), S is
// set to S_LOW = 2, the low value the paper names.
// Frame selection: `take` is the decision for the frame that starts next.
// The first frame after tracking starts is taken; after a taken frame the
// next S-1 frames are skipped.  The phase moves on at each `frame_start`
// while `tracking` is high; `track_start` re-arms it.  The paper runs this
// step in software on the processor; here it is a small hardware block.
// Timing: `rate` updates 1 clock after `flow_done`; the square root and
// divisions are combinational in that clock.
module adaptive_sampler import ir_pkg::*; #(
  parameter int unsigned S_LOW = 2,
  parameter int unsigned S_MAX = 255
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flow_done,
  input  logic [47:0] sum_mag_q8,
  input  logic [47:0] sum_ang_q8,
  input  logic [31:0] count,
  input  logic        tracking,
  input  logic        track_start,
  input  logic        frame_start,
  output logic        take,
  output logic [7:0]  rate,
  output logic        rate_clamped,
  output logic [31:0] mean_mag_q8,
  output logic [31:0] mean_ang_q8
);
  logic [47:0] m, a;
  logic [63:0] sq;
  logic [31:0] s_q8, s_int;
  logic        bad;
  logic [7:0]  phase;

  always_comb begin
    m = '0; a = '0;
    if (count != 0) begin
      m = sum_mag_q8 / 48'(count);
      a = sum_ang_q8 / 48'(count);
    end
    sq    = 64'(m[31:0]) * 64'(m[31:0]) + 64'(a[31:0]) * 64'(a[31:0]);
    s_q8  = isqrt64(sq);
    s_int = (s_q8 + 32'd128) >> 8;
    bad   = (count == 0) || (s_int == 0) || (s_int > 32'(S_MAX))
         || (m[47:32] != 0) || (a[47:32] != 0);
  end

  assign take = tracking && (phase == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rate <= 8'(S_LOW); rate_clamped <= 1'b0; phase <= '0;
      mean_mag_q8 <= '0; mean_ang_q8 <= '0;
    end else begin
      if (flow_done) begin
        rate         <= bad ? 8'(S_LOW) : s_int[7:0];
        rate_clamped <= bad;
        mean_mag_q8  <= m[31:0];
        mean_ang_q8  <= a[31:0];
      end
      if (track_start)
        phase <= '0;
      else if (frame_start && tracking)
        phase <= (phase + 8'd1 >= rate) ? 8'd0 : phase + 8'd1;
    end
  end
endmodule
