// ortho_pkg -- constants and the code-construction function shared by the
// orthogonal-code transmitter and receiver.
//
// A k-bit data word d is mapped to an n = 2^(k-1) chip bi-orthogonal code.
// The low k-1 bits of d select a Walsh (Sylvester-Hadamard) row: chip j of
// row r is the parity of (r AND j). The top bit of d selects the antipodal
// (inverted) copy of that row. With k = 4 this reproduces the 16-entry table
// of 8-chip codes the design is built around (data 0110 -> 00111100).
//
// Bit order convention used everywhere: chip 0, the leftmost chip of the
// printed code, sits in the MSB of an n-bit vector and is transmitted first.
package ortho_pkg;

  // Data width of the main configuration (4-bit data, 8-chip code).
  parameter int unsigned K_DEFAULT = 4;

  // Widest code the function below can build (n = 64, k = 7).
  parameter int unsigned MAX_N = 64;

  // Chip j of the code for data word d, k-bit data.
  function automatic logic ortho_chip(int unsigned k, int unsigned d, int unsigned j);
    logic [31:0] row_sel;
    logic [31:0] col;
    row_sel = 32'(d) & ((32'd1 << (k - 1)) - 32'd1);
    col     = 32'(j);
    return (^(row_sel & col)) ^ d[k-1];
  endfunction

  // Whole n-chip code for data word d, right-aligned: chip 0 in bit n-1.
  function automatic logic [MAX_N-1:0] ortho_row(int unsigned k, int unsigned d);
    logic [MAX_N-1:0] row;
    int unsigned n;
    n   = 1 << (k - 1);
    row = '0;
    for (int unsigned j = 0; j < n; j++) row[n-1-j] = ortho_chip(k, d, j);
    return row;
  endfunction

endpackage
