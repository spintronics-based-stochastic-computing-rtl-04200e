// df_workload_pkg: the target-location workload for the data-fusion system,
// computed in the testbench.
//
// Three sensors at (0,0), (0,32) and (32,0) each report a distance D and a
// bearing B of a target at (28,29); the readings used here are the exact
// ones (no sensor noise). For a candidate position (x, y):
//   p(D_i|x,y) = N(D_i; mu_d, s_d), mu_d = distance sensor->position,
//                                    s_d = 5 + mu_d/10
//   p(B_i|x,y) = N(B_i; mu_b, s_b), mu_b = bearing sensor->position (deg),
//                                    s_b = 14.0626 deg
// Each likelihood is scaled into [0,1] for an SBG bias: the distance one by
// 5*sqrt(2 pi) (its largest possible peak), the bearing one by its peak.
// The same constant per factor leaves the normalised posterior unchanged.
// The grid of GRID x GRID cells covers the square 0..32 x 0..32 and a cell
// is represented by its centre (the plane's extent is this testbench's
// choice). Row index r = y*GRID + x.
package df_workload_pkg;
  import bis_pkg::*;

  localparam real PI       = 3.14159265358979;
  localparam real PLANE    = 32.0;
  localparam real TX       = 28.0;
  localparam real TY       = 29.0;
  localparam real SIGMA_B  = 14.0626;

  function automatic real sensor_x(input int i);
    return (i == 2) ? 32.0 : 0.0;
  endfunction
  function automatic real sensor_y(input int i);
    return (i == 1) ? 32.0 : 0.0;
  endfunction

  function automatic real distance(input int i, input real x, input real y);
    return $sqrt((x - sensor_x(i)) ** 2 + (y - sensor_y(i)) ** 2);
  endfunction
  function automatic real bearing(input int i, input real x, input real y);
    return $atan2(y - sensor_y(i), x - sensor_x(i)) * 180.0 / PI;
  endfunction

  // likelihood k of a cell, k = 2*i (distance of sensor i) or 2*i+1 (bearing)
  function automatic real likelihood(input int k, input int grid, input int r);
    int  i = k / 2;
    real x = (real'(r % grid) + 0.5) * PLANE / grid;
    real y = (real'(r / grid) + 0.5) * PLANE / grid;
    if (k % 2 == 0) begin
      real mu = distance(i, x, y);
      real s  = 5.0 + mu / 10.0;
      real d  = distance(i, TX, TY) - mu;
      return (5.0 / s) * $exp(-d * d / (2.0 * s * s));
    end else begin
      real d = bearing(i, TX, TY) - bearing(i, x, y);
      if (d > 180.0)  d -= 360.0;
      if (d < -180.0) d += 360.0;
      return $exp(-d * d / (2.0 * SIGMA_B * SIGMA_B));
    end
  endfunction

  function automatic prob_t to_code(input real p);
    real c = p * real'(PROB_ONE) + 0.5;
    if (c > real'(PROB_ONE)) c = real'(PROB_ONE);
    return prob_t'($rtoi(c));
  endfunction

  // exact (unnormalised) posterior of a cell from the quantised biases,
  // i.e. what an ideal infinitely long bitstream would give
  function automatic real exact_post(input int grid, input int r);
    real p = 1.0;
    for (int k = 0; k < 6; k++) p *= real'(to_code(likelihood(k, grid, r))) / real'(PROB_ONE);
    return p;
  endfunction

  function automatic int target_cell(input int grid);
    int cx = $rtoi(TX * grid / PLANE);
    int cy = $rtoi(TY * grid / PLANE);
    return cy * grid + cx;
  endfunction

endpackage
