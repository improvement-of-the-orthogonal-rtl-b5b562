// ortho_codec_top -- both ends of an orthogonal-code link: the transmitter
// and the receiver.
//
// The transmitter encodes tx_data (K bits) into an N = 2^(K-1) chip
// bi-orthogonal code and sends it serially on tx_code with tx_valid; the
// receiver takes chips on rx_bit with rx_en, corrects up to N/4-1 chip
// errors, flags any detected error and requests retransmission when the
// received code is equally close to two codes. The channel between them,
// which may flip chips, is outside this module: connect tx_code/tx_valid to
// rx_bit/rx_en through it (directly for a loop-back). Timing: a code taken
// at tx_accept leaves over the next N cycles; the receiver's result appears
// 2N+2 cycles after the last chip is in, on rx_valid.
//
// Follows the design: transmitter and receiver as described, joined by an
// external channel. Own choice: both in one clocked module with a shared
// asynchronous active-low reset.
module ortho_codec_top
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N  = 2 ** (K - 1),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // transmitter
  input  logic          tx_en,
  input  logic [K-1:0]  tx_data,
  output logic          tx_accept,
  output logic [N-1:0]  tx_ortho,
  output logic          tx_code,
  output logic          tx_valid,
  // receiver
  input  logic          rx_en,
  input  logic          rx_bit,
  output logic [N-1:0]  rx_code,
  output logic          rx_valid,
  output logic [CW-1:0] rx_count,
  output logic          rx_err,
  output logic [N-1:0]  rx_ortho,
  output logic [K-1:0]  rx_data,
  output logic          rx_req,
  output logic          rx_overrun
);

  ortho_tx #(.K(K)) u_tx (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (tx_en),
    .data    (tx_data),
    .ortho   (tx_ortho),
    .accept  (tx_accept),
    .txcode  (tx_code),
    .txvalid (tx_valid)
  );

  ortho_rx #(.K(K)) u_rx (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (rx_en),
    .rxbit   (rx_bit),
    .rxcode  (rx_code),
    .valid   (rx_valid),
    .count   (rx_count),
    .err     (rx_err),
    .ortho   (rx_ortho),
    .data    (rx_data),
    .req     (rx_req),
    .overrun (rx_overrun)
  );

endmodule
