// tb_pkg: reference functions shared by the testbenches. Conductance levels and input
// codes come from fixed formulas of a seed, so each testbench can compute the expected
// ADC codes on its own: code(c) = min(255, (sum over rows r of v(r) * g(r, c)) >> 5),
// for the 32 x 32 crossbar with 4-bit levels, 4-bit inputs and 8-bit outputs.
package tb_pkg;
  import soc_pkg::*;

  localparam int ROWS = 32, COLS = 32;

  function automatic int gval(int seed, int r, int c);
    return (r * 7 + c * 13 + seed * 5 + r * c) % 16;
  endfunction

  function automatic int vval(int seed, int r);
    return (r * 11 + seed * 3 + 1) % 16;
  endfunction

  // word k (0..3) of the row image of row r: columns 8k .. 8k+7, 4 bits each
  function automatic logic [31:0] g_word(int seed, int r, int k);
    logic [31:0] w;
    for (int j = 0; j < 8; j++) w[4*j +: 4] = 4'(gval(seed, r, 8*k + j));
    return w;
  endfunction

  // word k (0..3) of the input vector: rows 8k .. 8k+7
  function automatic logic [31:0] v_word(int seed, int k);
    logic [31:0] w;
    for (int j = 0; j < 8; j++) w[4*j +: 4] = 4'(vval(seed, 8*k + j));
    return w;
  endfunction

  function automatic int exp_code(int gseed, int vseed, int c);
    int acc;
    acc = 0;
    for (int r = 0; r < ROWS; r++) acc += vval(vseed, r) * gval(gseed, r, c);
    acc = acc >> 5;
    return (acc > 255) ? 255 : acc;
  endfunction

  // word k (0..7) of the result vector: columns 4k .. 4k+3, 8 bits each
  function automatic logic [31:0] r_word(int gseed, int vseed, int k);
    logic [31:0] w;
    for (int j = 0; j < 4; j++) w[8*j +: 8] = 8'(exp_code(gseed, vseed, 4*k + j));
    return w;
  endfunction
endpackage
