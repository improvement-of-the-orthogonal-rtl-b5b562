// ortho_lut -- the look-up table of all 2^K bi-orthogonal codes.
//
// Entry a holds the N = 2^(K-1) chip code for data value a: entries
// 0 .. 2^(K-1)-1 are the orthogonal (Walsh) codes and the upper half their
// antipodal inverses, the same table the transmitter encodes from and the
// receiver searches. The contents are computed at elaboration from
// ortho_pkg::ortho_row, so the table grows with K without a data file.
// The read is combinational: code follows addr in the same cycle.
//
// Follows the design: one table of every code combination, indexed by the
// data word. Own choice: a constant array built from the Walsh formula
// rather than a stored memory image.
module ortho_lut
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N = 2 ** (K - 1)
) (
  input  logic [K-1:0] addr,
  output logic [N-1:0] code
);

  logic [N-1:0] rom [2**K];

  for (genvar a = 0; a < 2 ** K; a++) begin : g_entry
    assign rom[a] = N'(ortho_row(K, a));
  end

  assign code = rom[addr];

endmodule
