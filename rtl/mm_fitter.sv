// mm_fitter: computes a Micromegas segment from the hit slopes of one fired road.
// Inputs are the per-plane hit flags and slopes. X planes are given by X_MASK (default the
// two outer planes of each quadruplet, planes 0,1,6,7), stereo U planes by U_MASK and V by
// V_MASK. Outputs, as in the paper's fitter: mean X slope -> R-index (slope bits 15:8),
// phi from the difference of mean U and mean V slopes, delta-theta as mean slope of the back
// X planes (second quadruplet) minus that of the front X planes.
// From the paper: mean slopes per plane type, R-index from the X slope, delta-theta from the
// two halves of the wedge. This design's choices: plane assignment, phi = 32 + (mU - mV) / 4
// saturated to 6 bits, delta-theta saturated to a signed 8-bit value, integer division by
// the hit count. Purely combinational.
module mm_fitter
  import nsw_pkg::*;
#(
  parameter logic [7:0] X_MASK = 8'b1100_0011,
  parameter logic [7:0] U_MASK = 8'b0010_0100,
  parameter logic [7:0] V_MASK = 8'b0001_1000
) (
  input  logic             fire,
  input  logic [7:0]       hit,
  input  logic [7:0][15:0] slope,
  output segment_t         seg
);
  function automatic logic [15:0] mean(logic [7:0] m, logic [7:0] h, logic [7:0][15:0] sl);
    logic [19:0] sum;
    logic [3:0]  n;
    sum = '0; n = '0;
    for (int p = 0; p < 8; p++)
      if (m[p] && h[p]) begin sum += 20'(sl[p]); n++; end
    return (n == 0) ? 16'd0 : 16'(sum / 20'(n));
  endfunction

  always_comb begin
    logic signed [17:0] d_uv, d_x;
    logic [15:0] mx;
    mx   = mean(X_MASK, hit, slope);
    d_uv = 18'(mean(U_MASK, hit, slope)) - 18'(mean(V_MASK, hit, slope));
    d_x  = 18'(mean(X_MASK & 8'hF0, hit, slope)) - 18'(mean(X_MASK & 8'h0F, hit, slope));
    seg.valid = fire;
    seg.ridx  = mx[15:8];
    d_uv = (d_uv >>> 2) + 18'sd32;
    seg.phi   = d_uv < 0 ? 6'd0 : d_uv > 63 ? 6'd63 : 6'(d_uv);
    seg.dtheta = d_x < -128 ? -8'sd128 : d_x > 127 ? 8'sd127 : 8'(d_x);
  end
endmodule
