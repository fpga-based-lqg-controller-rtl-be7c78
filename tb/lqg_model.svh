// lqg_model.svh: bit-exact behavioural model of one LQG controller sample, shared by the
// controller testbenches. Mirrors the word formats of lqg_pkg: every shift-float product
// res * x >> sh is formed at full width, summed in 48 bits (36 fraction bits), then
// truncated and saturated to the state format (25/22) or negated, truncated and saturated
// to the output format (14/13).
function automatic longint mdl_wrap48(longint v);
  return (v <<< 16) >>> 16;
endfunction
function automatic longint mdl_satx(longint s);
  longint t = s >>> 14;
  if (t > 64'sd16777215) return 64'sd16777215;
  if (t < -64'sd16777216) return -64'sd16777216;
  return t;
endfunction
function automatic longint mdl_satu(longint s);
  longint t = -(s >>> 23);
  if (t > 64'sd8191) return 64'sd8191;
  if (t < -64'sd8192) return -64'sd8192;
  return t;
endfunction
function automatic longint mdl_term(longint res, int sh, longint x);
  return (res * x) >>> sh;
endfunction
// One sample: u from the old state, then the new state from old state, new u and chi.
task automatic mdl_sample(input lqg_pkg::lqg_set_t p, input bit fb, input longint chi [2],
                          inout longint xs [7], output longint uo [2]);
  longint xn [7];
  for (int i = 0; i < 2; i++) begin
    longint s = 0;
    for (int c = 0; c < 7; c++)
      s = mdl_wrap48(s + mdl_term(longint'(p.k[i][c].res), int'(p.k[i][c].sh), xs[c]));
    uo[i] = fb ? mdl_satu(s) : 0;
  end
  for (int r = 0; r < 7; r++) begin
    longint s = 0;
    for (int c = 0; c < 7; c++)
      s = mdl_wrap48(s + mdl_term(longint'(p.m[r][c].res), int'(p.m[r][c].sh), xs[c]));
    for (int c = 0; c < 2; c++)
      s = mdl_wrap48(s + mdl_term(longint'(p.b[r][c].res), int'(p.b[r][c].sh), uo[c] <<< 9));
    for (int c = 0; c < 2; c++)
      s = mdl_wrap48(s + mdl_term(longint'(p.l[r][c].res), int'(p.l[r][c].sh), chi[c] <<< 9));
    xn[r] = mdl_satx(s);
  end
  xs = xn;
endtask
// Random parameter set with shift exponents in [lo, hi]
function automatic lqg_pkg::lqg_set_t mdl_random_set(int lo, int hi);
  lqg_pkg::lqg_set_t p;
  for (int r = 0; r < 7; r++) begin
    for (int c = 0; c < 7; c++) p.m[r][c] = '{res: 18'($urandom), sh: 5'($urandom_range(lo, hi))};
    for (int c = 0; c < 2; c++) p.b[r][c] = '{res: 18'($urandom), sh: 5'($urandom_range(lo, hi))};
    for (int c = 0; c < 2; c++) p.l[r][c] = '{res: 18'($urandom), sh: 5'($urandom_range(lo, hi))};
  end
  for (int i = 0; i < 2; i++)
    for (int c = 0; c < 7; c++) p.k[i][c] = '{res: 18'($urandom), sh: 6'($urandom_range(lo, hi + 8))};
  return p;
endfunction
// Parameter word for address a of set p (layout of lqg_pkg)
function automatic logic [23:0] mdl_word(lqg_pkg::lqg_set_t p, int a);
  if (a < 49) return {1'b0, p.m[a / 7][a % 7].sh, p.m[a / 7][a % 7].res};
  if (a < 63) return {1'b0, p.b[(a - 49) / 2][(a - 49) % 2].sh, p.b[(a - 49) / 2][(a - 49) % 2].res};
  if (a < 77) return {1'b0, p.l[(a - 63) / 2][(a - 63) % 2].sh, p.l[(a - 63) / 2][(a - 63) % 2].res};
  return {p.k[(a - 77) / 7][(a - 77) % 7].sh, p.k[(a - 77) / 7][(a - 77) % 7].res};
endfunction
