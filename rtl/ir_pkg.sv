// ir_pkg: types, constants and arithmetic helpers shared by the intention
// recognition pixel pipeline.
//
// Every stage of the pipeline moves one pixel per clock in raster order
// (x fastest), tagged with its column and row.  There is no back-pressure:
// a camera cannot be stalled, so every stage accepts a pixel on every cycle.
// The frame size is not stated in the paper; 320x240 grey pixels is this
// design's choice and every module takes it as a parameter.
package ir_pkg;

  localparam int unsigned CW = 12;               // coordinate width (frames up to 4095 wide/high)
  typedef logic [CW-1:0] coord_t;
  typedef logic [7:0]    pix_t;

  localparam int unsigned DEF_W = 320;           // assumed frame width
  localparam int unsigned DEF_H = 240;           // assumed frame height

  // Grey-level morphology operator selected by morph_filter.
  typedef enum logic { MORPH_DILATE = 1'b0, MORPH_ERODE = 1'b1 } morph_mode_e;

  // Fixed-point scales.  Flow components and magnitudes are Q8 pixels,
  // angles are radians in Q16 inside the CORDIC and Q8 outside it.
  localparam int signed PI_Q16    = 205887;
  localparam int signed TWOPI_Q16 = 411775;
  localparam int signed CORDIC_KINV_Q16 = 39797;  // 1/1.64676
  localparam int unsigned CORDIC_ITER = 16;

  function automatic int signed cordic_atan_q16(input int unsigned i);
    case (i)
      0: return 51472;   1: return 30386;   2: return 16055;   3: return 8150;
      4: return 4091;    5: return 2047;    6: return 1024;    7: return 512;
      8: return 256;     9: return 128;    10: return 64;     11: return 32;
     12: return 16;     13: return 8;      14: return 4;      default: return 2;
    endcase
  endfunction

  typedef struct packed {
    logic [31:0] mag_q8;   // |(u,v)| in Q8
    logic [31:0] ang_q16;  // atan2(v,u) mapped to [0, 2*pi) in Q16 radians
  } polar_t;

  // CORDIC in vectoring mode: turns a Cartesian vector (Q8) into magnitude
  // and angle.  Inputs must stay within +/-2^20 to leave headroom.
  function automatic polar_t cordic_vec(input int signed u, input int signed v);
    int signed x, y, z, xn;
    polar_t r;
    x = u; y = v; z = 0;
    if (x < 0) begin
      x = -x; y = -y; z = PI_Q16;
    end
    x = x <<< 2; y = y <<< 2;              // two guard bits
    for (int unsigned i = 0; i < CORDIC_ITER; i++) begin
      if (y > 0) begin
        xn = x + (y >>> i); y = y - (x >>> i); z = z + cordic_atan_q16(i);
      end else begin
        xn = x - (y >>> i); y = y + (x >>> i); z = z - cordic_atan_q16(i);
      end
      x = xn;
    end
    if (v == 0 && u >= 0) z = 0;           // exact +x axis: avoid a 2*pi alias
    if (z < 0) z = z + TWOPI_Q16;
    if (z >= TWOPI_Q16) z = z - TWOPI_Q16;
    r.mag_q8  = 32'((longint'(x) * CORDIC_KINV_Q16 + 64'sd131072) >>> 18);
    r.ang_q16 = 32'(z);
    return r;
  endfunction

  // Integer square root (floor) of a 64-bit value, bit by bit.
  function automatic logic [31:0] isqrt64(input logic [63:0] a);
    logic [63:0] rem, root, trial;
    rem = a; root = '0;
    for (int i = 31; i >= 0; i--) begin
      trial = root | (64'd1 << (2 * i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) | (64'd1 << (2 * i));
      end else begin
        root = root >> 1;
      end
    end
    return root[31:0];
  endfunction

endpackage
