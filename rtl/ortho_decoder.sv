// ortho_decoder -- decodes a valid N-chip bi-orthogonal code to its K-bit
// data word.
//
// Chip 0 of every Walsh row is 0, so chip 0 of the code is the antipodal
// flag and becomes data bit K-1. After undoing the inversion, chip 2^m of a
// Walsh row r equals bit m of r, so data bit m (m < K-1) is chip 2^m XOR
// chip 0. Combinational. The result is only meaningful for codes in the
// table, which is what the error-correction stage supplies. data[K-1] is
// a plain wire from ortho[N-1]; that is the code's structure, not an
// unconnected output.
//
// Follows the design: the corrected code is decoded to k-bit data. Own
// choice: reading the data bits from chips 0, 1, 2, 4, ... instead of a
// reverse table search.
module ortho_decoder
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N = 2 ** (K - 1)
) (
  input  logic [N-1:0] ortho,
  output logic [K-1:0] data
);

  logic anti;

  assign anti = ortho[N-1];

  always_comb begin
    data      = '0;
    data[K-1] = anti;
    for (int unsigned m = 0; m + 1 < K; m++) data[m] = ortho[N-1-(1<<m)] ^ anti;
  end

endmodule
