// error_map: maps the prediction residual of a 3-bit sample to 0..7.
//
// With X and its prediction X^ both in 0..7, the residual e = X - X^ can
// take only the eight values -X^ .. 7-X^. They are folded onto 0..7 so
// that small magnitudes get small codes, alternating signs while both are
// possible and counting on with the remaining sign after that:
//   X^ <= 4:  e > 0 -> min(e-1, X^) + e       e < 0 -> min(-e, 7-X^) - e
//   X^ >  4:  e > 0 -> min(e, X^) + e         e < 0 -> min(-e-1, 7-X^) - e
// and e = 0 -> 0. For X^ below the middle a positive residual gets the
// first odd code, above it a negative one. The two formulas follow the
// paper; it leaves X^ = 4 open, and here that case uses the first formula.
// Purely combinational.
module error_map
  import microshift_pkg::*;
(
  input  qpix_t x,
  input  qpix_t xhat,
  output qpix_t emap
);
  int e, r, lo_room, hi_room;

  always_comb begin
    e       = int'(x) - int'(xhat);
    lo_room = int'(xhat);             // -e_possible,min
    hi_room = MAX_VAL - int'(xhat);   //  e_possible,max
    if (e == 0)
      r = 0;
    else if (int'(xhat) <= (1 << (M_BITS - 1))) begin
      if (e > 0) r = ((e - 1 < lo_room) ? e - 1 : lo_room) + e;
      else       r = ((-e < hi_room) ? -e : hi_room) - e;
    end else begin
      if (e > 0) r = ((e < lo_room) ? e : lo_room) + e;
      else       r = ((-e - 1 < hi_room) ? -e - 1 : hi_room) - e;
    end
    emap = qpix_t'(r);
  end
endmodule
