// tb_ortho_ref_pkg -- reference model for the orthogonal-code testbenches,
// written independently of the RTL.
//
// Codes come from the Sylvester construction of a Hadamard matrix
// (H(2m) = [H(m) H(m); H(m) ~H(m)], 0 for +1 and 1 for -1), rows in
// natural order, with the antipodal half inverted. For 4-bit data the table
// FIG_CODES below is the literal 16-entry 8-chip code table of the design,
// and the testbenches check both against each other. Nearest-code search
// is a plain loop over all codes.
package tb_ortho_ref_pkg;

  // The 8-chip table for 4-bit data, data value 0 first, leftmost chip in
  // the MSB.
  localparam logic [7:0] FIG_CODES [16] = '{
    8'b00000000, 8'b01010101, 8'b00110011, 8'b01100110,
    8'b00001111, 8'b01011010, 8'b00111100, 8'b01101001,
    8'b11111111, 8'b10101010, 8'b11001100, 8'b10011001,
    8'b11110000, 8'b10100101, 8'b11000011, 8'b10010110
  };

  // Element (i, j) of the m x m Sylvester-Hadamard matrix, 1 meaning -1.
  function automatic logic hadamard(int m, int i, int j);
    int h;
    if (m == 1) return 1'b0;
    h = m / 2;
    return hadamard(h, i % h, j % h) ^ ((i >= h) && (j >= h));
  endfunction

  // n-chip code of data word d for k-bit data, chip 0 in bit n-1.
  function automatic logic [63:0] ref_code(int k, int d);
    logic [63:0] c;
    int n;
    logic anti;
    n    = 1 << (k - 1);
    anti = ((d >> (k - 1)) & 1) != 0;
    c    = '0;
    for (int j = 0; j < n; j++) c[n-1-j] = hadamard(n, d % n, j) ^ anti;
    return c;
  endfunction

  function automatic int ones(logic [63:0] v);
    int s;
    s = 0;
    for (int i = 0; i < 64; i++) s += int'(v[i]);
    return s;
  endfunction

  // Nearest code to rx: smallest distance, first data value reaching it,
  // and how many codes reach it.
  function automatic void ref_nearest(int k, logic [63:0] rx,
                                      output int best, output int mind,
                                      output int nmin);
    int d;
    mind = 1000;
    best = 0;
    nmin = 0;
    for (int a = 0; a < (1 << k); a++) begin
      d = ones(rx ^ ref_code(k, a));
      if (d < mind) begin
        mind = d;
        best = a;
        nmin = 1;
      end else if (d == mind) begin
        nmin++;
      end
    end
  endfunction

endpackage
