// ortho_encoder -- maps a K-bit data word to its N = 2^(K-1) chip
// orthogonal code.
//
// The mapping is a read of the code look-up table at the data value, so the
// encoder and the receiver's search use the same table. Purely
// combinational: ortho follows data in the same cycle. Example for K = 4:
// data 4'b0110 gives ortho 8'b00111100 (chip 0 in the MSB).
module ortho_encoder
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N = 2 ** (K - 1)
) (
  input  logic [K-1:0] data,
  output logic [N-1:0] ortho
);

  ortho_lut #(.K(K)) u_lut (
    .addr (data),
    .code (ortho)
  );

endmodule
