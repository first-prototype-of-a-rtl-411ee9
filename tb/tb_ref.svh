// tb_ref.svh -- reference arithmetic shared by the testbenches, written from
// the retina formulas and independent of the RTL's tables:
//   cell (i,j): x- = (i - 15.5)*Delta, x+ = x+(0) + j*Delta, Delta = 70
//   quarter units (x+(0) = -161); plane k at z = 40 + 80k (0.1 mm units);
//   intercept on plane z = x+ + x-*(z - z+)/z-, z+ = 320, z- = -280;
//   response = 65535*exp(-s^2/(2 sigma^2)), sigma = Delta, zero for s >= 2 sigma.
// Include inside a module.

function automatic int ref_round(real v);
  return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
endfunction

function automatic int ref_intercept(int i, int j, int z);
  real xm;
  xm = (real'(i) - 15.5) * 70.0;
  return -161 + 70 * j + ref_round(xm * (real'(z) - 320.0) / (-280.0));
endfunction

function automatic int ref_dist(int x, int z, int i, int j);
  int d;
  d = 4 * x - ref_intercept(i, j, z);
  if (d < 0) d = -d;
  return (d > 1023) ? 1023 : d;
endfunction

function automatic int ref_resp(int d);
  real s;
  if (d >= 140) return 0;
  s = real'(d) / 70.0;
  return int'($floor(65535.0 * $exp(-0.5 * s * s) + 0.5));
endfunction
