// Bit-true reference of a cascade of transposed direct form II sections,
// written from the section equations (w = b0 x + s1, s1 = b1 x - a1 w + s2,
// s2 = b2 x - a2 w, y = gain w) with the fixed-point rule: product >>> Q,
// truncated to the M+G bit word, sums wrapping. The including module
// defines M, G, Q, NS (sections modelled) and the arrays below.
typedef logic signed [M+G-1:0] mw_t;
mw_t ms1 [NS], ms2 [NS];

function automatic mw_t mmul(logic signed [M-1:0] c, mw_t d);
  logic signed [2*M+G-1:0] p;
  p = c * d;
  return mw_t'(p >>> Q);
endfunction

// c[s][0..4] = b0, b1, b2, a1, a2 of section s; nused sections are run
function automatic mw_t model_step(mw_t x, logic signed [M-1:0] c [NS][5],
                                   logic signed [M-1:0] gain, int nused);
  mw_t v, w;
  v = x;
  for (int s = 0; s < nused; s++) begin
    w = mmul(c[s][0], v) + ms1[s];
    ms1[s] = mmul(c[s][1], v) - mmul(c[s][3], w) + ms2[s];
    ms2[s] = mmul(c[s][2], v) - mmul(c[s][4], w);
    v = mmul(gain, w);
  end
  return v;
endfunction

function automatic void model_reset();
  foreach (ms1[s]) begin ms1[s] = '0; ms2[s] = '0; end
endfunction
