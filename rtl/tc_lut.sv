// tc_lut: time-constant configuration table for one first-order dynamic.
//
// A decay x <- x - x/tau_nom with tau_nom = 2^K_NOM is a shift and subtract.
// Compressing time by a ratio g makes one new step stand for g old steps, so
// the exact per-step factor becomes (1 - 2^-K_NOM)^g and the scaled
// normalised time constant is
//     tau_c = 1 / (1 - (1 - 2^-K_NOM)^g)
// (not simply tau_nom/g, which is inaccurate for large g). tau_c is in
// general not a power of two, so it is realised by time averaging between
// its two neighbouring powers of two 2^k_lo <= tau_c < 2^(k_lo+1): out of
// every 2^P_W steps, n_hi use 2^(k_lo+1) and the rest 2^k_lo, giving the
// arithmetic mean 2^k_lo * (1 + n_hi/2^P_W) = tau_c (rounded to 1/2^P_W).
//
// The table is filled at elaboration by a constant function that evaluates
// the formula in fixed point (FRAC fractional bits): it repeats the
// shift-and-subtract decay g times, inverts 1 - result, and splits the
// quotient into k_lo and n_hi. Nothing is stored in files.
//
// Interface: combinational read, ratio in 1..MAXR (0 reads as 1, larger
// values as MAXR). The formula follows the paper; the averaging period 2^P_W
// and the fixed-point precision are this design's choices.
module tc_lut
  import tc_pkg::*;
#(
  parameter int unsigned K_NOM = 5,           // uncompressed tau_nom = 2^K_NOM
  parameter int unsigned P_W   = 4,           // averaging period 2^P_W steps
  parameter int unsigned MAXR  = MAX_RATIO
) (
  input  ratio_t         ratio,
  output shift_t         k_lo,                // shift of the smaller constant
  output logic [P_W:0]   n_hi                 // steps per period using k_lo+1
);

  localparam int unsigned FRAC  = 24;
  localparam int unsigned ENT_W = SHIFT_W + P_W + 1;

  typedef logic [ENT_W-1:0] entry_t;
  typedef entry_t rom_t [MAXR+1];

  function automatic entry_t calc_entry(input int unsigned g);
    logic [63:0] x, den, tau, base, frac, nh;
    int unsigned k2;
    x = 64'd1 << FRAC;
    for (int unsigned s = 0; s < g; s++) x = x - (x >> K_NOM);
    den = (64'd1 << FRAC) - x;
    if (den == 0) den = 1;
    tau = (64'd1 << (2 * FRAC)) / den;        // tau_c in Q.FRAC
    k2 = 0;
    while ((k2 < 15) && ((tau >> (FRAC + k2 + 1)) != 0)) k2++;
    base = 64'd1 << (FRAC + k2);
    frac = (tau > base) ? tau - base : 64'd0;
    nh = ((frac << P_W) + (base >> 1)) / base;
    if (nh >= (64'd1 << P_W)) begin
      k2 = k2 + 1;
      nh = 0;
    end
    return {SHIFT_W'(k2), (P_W + 1)'(nh)};
  endfunction

  function automatic rom_t build_rom();
    rom_t r;
    r[0] = calc_entry(1);
    for (int unsigned g = 1; g <= MAXR; g++) r[g] = calc_entry(g);
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  ratio_t idx;
  always_comb begin
    idx = (ratio > ratio_t'(MAXR)) ? ratio_t'(MAXR) : ratio;
    {k_lo, n_hi} = ROM[idx];
  end

endmodule
