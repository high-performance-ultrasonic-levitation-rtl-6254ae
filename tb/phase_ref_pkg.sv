// phase_ref_pkg: reference model of the phase calculation for testbenches,
// written from the equations, not from the pipelined hardware:
//   LP    = floor(sqrt((fx-tx)^2 + (fy-ty)^2 + (fz-tz)^2))   [um]
//   phi   = floor((LP mod lambda) * period / lambda)         [cycles]
//   delay = (period - phi) mod period
// and of the flat 8x8 transducer grid (pitch 16.5 mm, centred, z = 0).
package phase_ref_pkg;

  function automatic longint isqrt(input longint x);
    longint r;
    r = longint'($sqrt(real'(x)));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  function automatic int ref_delay(input int fx, fy, fz, tx, ty, tz,
                                   input int wl, input int period);
    longint dx, dy, dz, lp, rem, phi;
    dx  = fx - tx;
    dy  = fy - ty;
    dz  = fz - tz;
    lp  = isqrt(dx * dx + dy * dy + dz * dz);
    rem = lp % wl;
    phi = rem * period / wl;
    return (phi == 0) ? 0 : int'(period - phi);
  endfunction

  function automatic void grid_pos(input int i, input int cols, input int rows,
                                   input int pitch, output int x, output int y);
    x = (2 * (i % cols) - (cols - 1)) * pitch / 2;
    y = (2 * (i / cols) - (rows - 1)) * pitch / 2;
  endfunction

endpackage
