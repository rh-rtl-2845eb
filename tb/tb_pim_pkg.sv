// Testbench helpers shared by the pseudo-channel and stack testbenches:
// the weight pattern stored in the behavioural DRAM, an input-vector
// pattern, and the dot product the PUs are expected to form.
package tb_pim_pkg;
  import pim_pkg::*;

  // Weight element (lane l of column c, row r, bank b, pseudo-channel p):
  // an integer hash of the address, so every element differs and a MAC that
  // reads the wrong address gives a wrong result.
  function automatic logic [ELEM_W-1:0] wgt(int p, int b, int r, int c, int l);
    int unsigned h;
    h = (p * 32'd2654435761) ^ (b * 32'd40503) ^ (r * 32'd9973) ^ (c * 32'd127) ^ (l * 32'd31);
    h = h * 32'd747796405 + 32'd2891336453;
    h = h ^ (h >> 15);
    return ELEM_W'(h);
  endfunction

  function automatic column_t wcol(int p, int b, int r, int c);
    column_t v;
    for (int l = 0; l < LANES; l++) v[l*ELEM_W +: ELEM_W] = wgt(p, b, r, c, l);
    return v;
  endfunction

  function automatic column_t xcol(int seed, int k);
    column_t v;
    for (int l = 0; l < LANES; l++)
      v[l*ELEM_W +: ELEM_W] = ELEM_W'((seed * 31 + k * 17 + l * 7) * 2246822519);
    return v;
  endfunction

  function automatic longint dot(column_t a, column_t b);
    longint s = 0;
    for (int i = 0; i < LANES; i++)
      s += longint'($signed(a[i*ELEM_W +: ELEM_W])) * longint'($signed(b[i*ELEM_W +: ELEM_W]));
    return s;
  endfunction
endpackage
