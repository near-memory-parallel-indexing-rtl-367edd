// tb_mem_pkg: memory contents used by the testbenches, defined as a function of the
// address so no data file is needed.
//
// Below IDX_REGION the 32-bit word at a (4-byte aligned) is an index: by default a hash of a
// reduced modulo idx_range (set by the testbench; a small range gives much block reuse, a
// large one little), or the column indices of a sparse matrix (idx_mode, below). Above it every word is a plain hash of its address. byte_at/elem_at/idx_at give
// the reference values that the testbenches compare with.
package tb_mem_pkg;
  import isu_pkg::*;

  localparam logic [47:0] IDX_REGION = 48'h0010_0000;
  int unsigned idx_range = 512;
  // idx_mode 1: the index region holds the column indices of a 27-point stencil matrix on a
  // grid x grid x grid mesh (the HPCG matrix), 27 entries per row in row order, neighbours
  // outside the mesh clamped to the boundary (padding as in a sliced ELLPACK layout).
  // idx_mode 2: a banded random matrix, 16 entries per row, columns row-band/2 .. row+band/2.
  int unsigned idx_mode = 0;
  int unsigned grid = 12;
  int unsigned band = 2048;

  function automatic int unsigned clampi(int v, int unsigned hi);
    return (v < 0) ? 0 : (v > int'(hi)) ? hi : int'(v);
  endfunction

  function automatic logic [31:0] stencil_col(int unsigned i);
    int unsigned row, k, x, y, z;
    row = i / 27; k = i % 27;
    x = row % grid; y = (row / grid) % grid; z = row / (grid * grid);
    x = clampi(int'(x) + int'(k % 3) - 1, grid - 1);
    y = clampi(int'(y) + int'((k / 3) % 3) - 1, grid - 1);
    z = clampi(int'(z) + int'(k / 9) - 1, grid - 1);
    return 32'(x + grid * (y + grid * z));
  endfunction

  function automatic logic [31:0] hash32(logic [47:0] a);
    logic [31:0] x;
    x = a[31:0] ^ {16'h0, a[47:32]};
    x = x * 32'h9E37_79B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return x;
  endfunction

  function automatic logic [31:0] word32(logic [47:0] a);
    logic [47:0] wa;
    wa = {a[47:2], 2'b00};
    if (wa < IDX_REGION && idx_mode == 1) return stencil_col(int'(wa >> 2));
    if (wa < IDX_REGION && idx_mode == 2)
      return 32'(clampi(int'(wa >> 6) + int'(hash32(wa) % band) - int'(band / 2), 32'h00FF_FFFF));
    if (wa < IDX_REGION) return hash32(wa) % idx_range;
    return hash32(wa);
  endfunction

  function automatic logic [7:0] byte_at(logic [47:0] a);
    return 8'(word32(a) >> (8 * a[1:0]));
  endfunction

  function automatic wide_t block_at(logic [47:0] a);
    wide_t d;
    for (int w = 0; w < 16; w++) d[32*w +: 32] = word32({a[47:6], 6'b0} + 48'(4*w));
    return d;
  endfunction

  function automatic logic [63:0] elem_at(logic [47:0] a);
    return {word32(a + 48'd4), word32(a)};
  endfunction

  // index i of an index array at base with 2**sz-byte indices
  function automatic logic [63:0] idx_at(logic [47:0] base, int unsigned i, int unsigned sz);
    logic [63:0] v;
    v = '0;
    for (int b = 0; b < (1 << sz); b++)
      v[8*b +: 8] = byte_at(base + 48'(i << sz) + 48'(b));
    return v;
  endfunction
endpackage
