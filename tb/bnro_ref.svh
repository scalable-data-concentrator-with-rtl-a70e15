// Reference routing for the testbenches: where does network input k end up
// for a given set of switch controls? The trace follows the recursive
// definition of the baseline network directly: in layer l the word sits on
// input k[l] of switch r = {bitrev(m[l-1:0]), k[N-1:l+1]}, where m[l-1:0] are
// the output bits chosen so far, and leaves on output k[l] ^ cross; that output
// is bit l of the final network output number.
// The including module must define LAYERS and NSW.
function automatic int unsigned ref_rev(int unsigned v, int unsigned n);
  int unsigned r;
  r = 0;
  for (int unsigned b = 0; b < n; b++) r = (r << 1) | ((v >> b) & 1);
  return r;
endfunction

function automatic int unsigned ref_trace(logic [LAYERS-1:0][NSW-1:0] c, int unsigned k);
  int unsigned m, r, j;
  m = 0;
  for (int unsigned l = 0; l < LAYERS; l++) begin
    r = (ref_rev(m, l) << (LAYERS - 1 - l)) | (k >> (l + 1));
    j = ((k >> l) & 1) ^ int'(c[l][r]);
    m = m | (j << l);
  end
  return m;
endfunction
