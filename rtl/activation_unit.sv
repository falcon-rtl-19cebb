// activation_unit: the activation unit (AU), a piecewise-linear sigmoid.
//
// Converts a Q16.16 neuron sum into a Q8.8 activation in [0, 1] (1.0 = 256).
// The segments are held in a small look-up table (the LUT beside the AU). The
// engine is described only as using a piecewise-linear sigmoid with a LUT;
// the segment values are this design's choice, the widely used four-segment
// "PLAN" approximation, applied to |x| and mirrored for negative x:
//   |x| <  1      : 0.25    |x| + 0.5
//   1 <= |x| < 2.375: 0.125 |x| + 0.625
//   2.375 <= |x| < 5: 0.03125 |x| + 0.84375
//   |x| >= 5      : 1
//   y(x<0) = 1 - y(|x|)
// Truncation: y(|x|) = floor(((slope*|x|) >> 8 + icpt) / 256) with slope in
// Q8.8 and icpt in Q16.16. Purely combinational; the NU chain rotates one sum
// through it per cycle.
module activation_unit
  import falcon_pkg::*;
(
  input  acc_t  x,
  output data_t y
);
  typedef struct packed {
    logic [ACC_W:0]   lo;     // segment start, Q16.16 of |x|
    logic [15:0]      slope;  // Q8.8
    logic [ACC_W-1:0] icpt;   // Q16.16
  } seg_t;

  localparam int unsigned NSEG = 4;
  localparam seg_t LUT [NSEG] = '{
    '{lo: 33'd0,      slope: 16'd64, icpt: 32'd32768},   // 0.25,    0.5
    '{lo: 33'd65536,  slope: 16'd32, icpt: 32'd40960},   // 0.125,   0.625
    '{lo: 33'd155648, slope: 16'd8,  icpt: 32'd55296},   // 0.03125, 0.84375
    '{lo: 33'd327680, slope: 16'd0,  icpt: 32'd65536}    // 0,       1
  };

  logic [ACC_W:0]   ax;
  logic [ACC_W+16:0] prod;
  logic [ACC_W+16:0] ypos;
  seg_t s;

  always_comb begin
    ax = x[ACC_W-1] ? (ACC_W+1)'(-$signed({x[ACC_W-1], x})) : {1'b0, x};
    s  = LUT[0];
    for (int i = 1; i < NSEG; i++)
      if (ax >= LUT[i].lo) s = LUT[i];
    prod = (ACC_W+17)'(ax) * (ACC_W+17)'(s.slope);
    ypos = ((prod >> 8) + (ACC_W+17)'(s.icpt)) >> 8;
    if (ypos > 256) ypos = 256;
    y = x[ACC_W-1] ? data_t'(16'd256 - ypos[15:0]) : data_t'(ypos[15:0]);
  end
endmodule
