// tb_heps_pkg -- test helpers shared by the testbenches: the counter value
// a chip model reports for a pixel, and the readout/configuration chain
// mappings worked out independently of the RTL.
package tb_heps_pkg;
  // Unique 28-bit value per (frame, chip, row, col), rows < 256, cols < 128.
  function automatic logic [27:0] pix_val(int f, int chip, int row, int col);
    logic [27:0] v;
    v = {f[5:0], chip[4:0], row[7:0], col[6:0], 2'b00};
    v[1:0] = ^v[27:14] ? 2'b10 : 2'b01;
    return v;
  endfunction

  // Readout chain c (of `chains` over `cols` columns), step p -> row/col
  function automatic int ro_row(int p, int rows);
    int lc = p / rows, r = p % rows;
    return (lc % 2 == 0) ? r : rows - 1 - r;
  endfunction
  function automatic int ro_col(int c, int p, int rows, int cols, int chains);
    return c * (cols / chains) + p / rows;
  endfunction

  // pixel-configuration word for (table, row, col)
  function automatic logic [31:0] cfg_val(int t, int row, int col);
    return {t[7:0], 8'hC0 ^ row[7:0], row[7:0], col[7:0]};
  endfunction
endpackage
