// ortho_rx -- orthogonal-code receiver: serial-to-parallel converter,
// error detection, error correction with REQ, and decoder.
//
// Serial chips arrive on rxbit, one per clock while en is high. After N of
// them rxcode holds the received code and a search starts. The detector
// compares it with all 2^K = 2N table codes, one per clock; the correction
// stage then picks the table code with the fewest differing chips, and the
// decoder turns it into data. All outputs are registered together: valid
// is high for one cycle exactly 2N+2 cycles after the cycle in which a new
// rxcode first appears, and then
//   count  smallest number of differing chips (0: code received intact),
//   err    count is not zero: an error was detected,
//   ortho  corrected code, data its K-bit data word,
//   req    the smallest count is shared by several codes: no unique
//          correction, retransmission requested; count, ortho and data
//          then keep their previous values.
// Up to N/4-1 chip errors are always corrected. A code that completes while
// a search is still running is dropped and overrun pulses; senders must
// space codes at least 2N cycles apart.
//
// Follows the design: the four blocks in sequence, the comparison against
// every stored code, minimum-count selection, REQ on a shared minimum and
// the 2n+2 cycle processing time. Own choices: the frame enable, the valid
// and overrun flags, and holding outputs while req is high.
module ortho_rx
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N  = 2 ** (K - 1),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          rxbit,
  output logic [N-1:0]  rxcode,
  output logic          valid,
  output logic [CW-1:0] count,
  output logic          err,
  output logic [N-1:0]  ortho,
  output logic [K-1:0]  data,
  output logic          req,
  output logic          overrun
);

  logic          code_valid;
  logic          det_busy;
  logic          det_done;
  logic [CW-1:0] det_min;
  logic [K-1:0]  det_idx;
  logic          det_tie;
  logic          cor_valid;
  logic [N-1:0]  cor_ortho;
  logic [CW-1:0] cor_count;
  logic          cor_req;
  logic          cor_err;
  logic [K-1:0]  dec_data;

  rx_s2p #(.N(N)) u_s2p (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (en),
    .rxbit      (rxbit),
    .rxcode     (rxcode),
    .code_valid (code_valid)
  );

  err_detect #(.K(K)) u_det (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (code_valid),
    .rxcode    (rxcode),
    .busy      (det_busy),
    .done      (det_done),
    .min_count (det_min),
    .best_idx  (det_idx),
    .tie       (det_tie)
  );

  err_correct #(.K(K)) u_cor (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (det_done),
    .best_idx  (det_idx),
    .min_count (det_min),
    .tie       (det_tie),
    .out_valid (cor_valid),
    .ortho     (cor_ortho),
    .count     (cor_count),
    .req       (cor_req),
    .err       (cor_err)
  );

  ortho_decoder #(.K(K)) u_dec (
    .ortho (cor_ortho),
    .data  (dec_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      count   <= '0;
      err     <= 1'b0;
      ortho   <= '0;
      data    <= '0;
      req     <= 1'b0;
      overrun <= 1'b0;
    end else begin
      valid   <= cor_valid;
      overrun <= code_valid && det_busy;
      if (cor_valid) begin
        count <= cor_count;
        err   <= cor_err;
        ortho <= cor_ortho;
        data  <= dec_data;
        req   <= cor_req;
      end
    end
  end

endmodule
