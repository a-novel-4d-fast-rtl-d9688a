// exp_lut: the Gaussian exponentiation table shared by the space and time responses of
// one engine.
//
// The address is {is_time, n}. For the space half (is_time = 0) the entry is
// round(255 * exp(-d^2 / (2 sigma^2))) with d = (n + 0.5) * 2^EXP_SHIFT_X x units, and 0
// for d >= 2 sigma, which implements the cut W_ijk = 0 for s_ijk > 2 sigma. For the time
// half the entry is round(255 * exp(-d^2 / (2 sigma_t^2))) with d = (n + 0.5) *
// 2^EXP_SHIFT_T ps. Both are computed at elaboration (retina_pkg::exp_entry); in hardware
// the table is a 256 x 8 ROM. The paper computes the exponentials with one LUT per engine
// shared between the four serialized inputs; putting both Gaussians in one ROM, the
// bin sizes and the 8-bit output are this design's choices.
//
// Timing: registered output, one cycle after the address.
module exp_lut
  import retina_pkg::*;
(
  input  logic              clk,
  input  logic              is_time,
  input  logic [EXP_AW-1:0] n,
  output logic [E_W-1:0]    q
);

  localparam int DEPTH = 2 << EXP_AW;
  typedef logic [DEPTH-1:0][E_W-1:0] rom_t;

  function automatic rom_t build_rom();
    rom_t r;
    for (int a = 0; a < DEPTH; a++) r[a] = exp_entry(a >= (1 << EXP_AW), a % (1 << EXP_AW));
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  always_ff @(posedge clk) q <= ROM[{is_time, n}];

endmodule
