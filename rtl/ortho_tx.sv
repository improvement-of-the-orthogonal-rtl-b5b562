// ortho_tx -- orthogonal-code transmitter: encoder followed by a
// parallel-to-serial shift register.
//
// ortho is the N-chip code of the current data input (combinational). While
// en is high the transmitter takes a word whenever its shift register is
// ready: accept pulses for one cycle, data is sampled at that clock edge,
// and the code leaves on txcode over the next N cycles, chip 0 first, with
// txvalid high. Holding en high sends words back to back; dropping en after
// accept sends exactly one.
//
// Follows the design: two blocks, an encoder mapping k-bit data to an
// n = 2^(k-1) chip code and a shift register sending it on rising clock
// edges under an enable. Own choices: the accept/txvalid signals and the
// reading of en as a level that keeps transmission going.
module ortho_tx
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N = 2 ** (K - 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [K-1:0] data,
  output logic [N-1:0] ortho,
  output logic         accept,
  output logic         txcode,
  output logic         txvalid
);

  logic ready;

  ortho_encoder #(.K(K)) u_enc (
    .data  (data),
    .ortho (ortho)
  );

  assign accept = en && ready;

  tx_p2s #(.N(N)) u_p2s (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (en),
    .par_in    (ortho),
    .ready     (ready),
    .ser_out   (txcode),
    .ser_valid (txvalid)
  );

endmodule
