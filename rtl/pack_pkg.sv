// Shared constants and sizing functions for DSP-packed arithmetic.
//
// The DSP48E2 slice has a 27-bit pre-adder / multiplier A path, an 18-bit
// B path and a 48-bit accumulator. The functions below derive the lane
// geometry of the two packing schemes from operand widths:
//  * SDV (one packed operand): lane size L = wa + wb - 1, and the leftmost
//    lane needs only its own width plus one sign-protection bit.
//  * BSEG (both operands packed): lane counts from
//    (n-1)*L + w + 1 <= datapath width, and the guard condition
//    2^(L-1) >= min(nk,ni) * 2^(wk-1) * (2^wi - 1)
//    for signed kernels and unsigned inputs.
package pack_pkg;

  localparam int unsigned DSP_AW = 27;  // pre-adder / multiplier A width
  localparam int unsigned DSP_BW = 18;  // multiplier B width
  localparam int unsigned DSP_PW = 48;  // accumulator width

  // SDV lane size
  function automatic int unsigned sdv_lane(input int unsigned wa, input int unsigned wb);
    return wa + wb - 1;
  endfunction

  // SDV: number of lanes packed into the A path
  function automatic int unsigned sdv_lanes(input int unsigned wa, input int unsigned wb);
    return (DSP_AW - wa - 1) / sdv_lane(wa, wb) + 1;
  endfunction

  // BSEG: lanes that fit a factor of width w_path for elements of width w
  function automatic int unsigned bseg_fit(input int unsigned w_path, input int unsigned w,
                                           input int unsigned l);
    return (w_path - w - 1) / l + 1;
  endfunction

  function automatic int unsigned min_u(input int unsigned a, input int unsigned b);
    return (a < b) ? a : b;
  endfunction

  // Guard condition (signed kernels, unsigned inputs), low part width 0
  function automatic bit bseg_guard_ok(input int unsigned l, input int unsigned wk,
                                       input int unsigned wi, input int unsigned nmin);
    longint unsigned lhs, rhs;
    lhs = 64'd1 << (l - 1);
    rhs = longint'(nmin) * (64'd1 << (wk - 1)) * ((64'd1 << wi) - 1);
    return lhs >= rhs;
  endfunction

  // Largest low-part width that keeps the positive side free of overflow:
  // 2^(L-1) > nmin*(2^(wk-1)-1)*(2^wi-1) + (2^wl - 1)
  function automatic int unsigned bseg_low_width(input int unsigned l, input int unsigned wk,
                                                 input int unsigned wi, input int unsigned nmin);
    longint unsigned room;
    int unsigned wl;
    room = (64'd1 << (l - 1)) - longint'(nmin) * ((64'd1 << (wk - 1)) - 1) * ((64'd1 << wi) - 1);
    // need 2^wl - 1 < room, i.e. 2^wl <= room
    wl = 0;
    while (wl < l - 1 && (64'd1 << (wl + 1)) <= room) wl++;
    return wl;
  endfunction

endpackage
