// dram_model_pkg: the "process variation" of the behavioural DRAM model.
//
// A cell left at Vdd/2 and then sensed settles to a value set by the
// chip's manufacturing variation. The model stands that in with a fixed
// hash of the cell's position, shared by the bank model and by the
// testbenches that predict PUF responses. About one cell in sixteen
// resolves to 1 (real chips show far fewer, 0.01% to 0.22%; the higher
// rate keeps small test arrays interesting).
package dram_model_pkg;
  function automatic logic pv_cell(int bank, int row, int col);
    int unsigned h;
    h = 32'h9E37_79B9 * (32'(bank) * 32'd4099 + 32'(row) * 32'd131 + 32'(col) + 32'd7);
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    return (h[7:4] == 4'hA);
  endfunction

  // Sense amplifier alone (no cell connected): depends on the column only.
  function automatic logic pv_sa(int bank, int col);
    return pv_cell(bank, 32'hFFFF, col);
  endfunction
endpackage
