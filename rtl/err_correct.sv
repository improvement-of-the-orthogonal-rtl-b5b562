// err_correct -- error correction by mapping the best match back to its
// table code, and the retransmission request REQ.
//
// On a cycle with in_valid high (the detector's done) the block registers
// its outputs for the next cycle, when out_valid is high:
//   * tie low: ortho takes the look-up-table code at best_idx, the closest
//     valid code and so the corrected code, count takes min_count;
//   * tie high: no unique closest code exists; req goes high and ortho,
//     count and idx keep their previous values.
// req and err (min_count not zero) are updated on every result and hold
// until the next one. Asynchronous active-low reset clears everything.
//
// Follows the design: the table code at the minimum count is the corrected
// code; REQ goes high when the minimum count belongs to more than one code.
// Own choice, read from the example waveform where count, ortho and data
// stay at their reset values while REQ is high: outputs hold on a tie.
module err_correct
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N  = 2 ** (K - 1),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [K-1:0]  best_idx,
  input  logic [CW-1:0] min_count,
  input  logic          tie,
  output logic          out_valid,
  output logic [N-1:0]  ortho,
  output logic [CW-1:0] count,
  output logic          req,
  output logic          err
);

  logic [N-1:0] lut_code;

  ortho_lut #(.K(K)) u_lut (
    .addr (best_idx),
    .code (lut_code)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      ortho     <= '0;
      count     <= '0;
      req       <= 1'b0;
      err       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        req <= tie;
        err <= (min_count != '0);
        if (!tie) begin
          ortho <= lut_code;
          count <= min_count;
        end
      end
    end
  end

endmodule
