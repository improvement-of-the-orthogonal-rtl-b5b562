// tx_p2s -- parallel-to-serial shift register of the transmitter.
//
// On a clock edge where load is high and ready is high, par_in is captured;
// over the next N cycles ser_out presents its bits MSB first (chip 0 first),
// one per rising edge, with ser_valid high. ready is high when the register
// is empty or showing its last bit, so a new word loaded then follows the
// previous one with no gap. Asynchronous active-low reset empties the
// register and holds ser_out low.
//
// Follows the design: a shift register clocked on the rising edge sends the
// code serially. Own choices: MSB-first order, the ser_valid/ready
// handshake and the reset behaviour.
module tx_p2s #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] par_in,
  output logic         ready,
  output logic         ser_out,
  output logic         ser_valid
);

  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0]  sr;
  logic [CW-1:0] left;

  assign ready     = (left <= CW'(1));
  assign ser_out   = sr[N-1];
  assign ser_valid = (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr   <= '0;
      left <= '0;
    end else if (load && ready) begin
      sr   <= par_in;
      left <= CW'(N);
    end else if (left != '0) begin
      sr   <= {sr[N-2:0], 1'b0};
      left <= left - CW'(1);
    end
  end

  // A word taken is always followed by N valid chips.
  assert property (@(posedge clk) disable iff (!rst_n) (load && ready) |=> ser_valid);

endmodule
