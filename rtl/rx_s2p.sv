// rx_s2p -- serial-to-parallel converter of the receiver.
//
// Every clock edge with en high shifts rxbit in at the LSB. When the N-th
// bit of a frame arrives, the whole word is copied to rxcode (so the first
// bit received, chip 0, ends up in the MSB) and code_valid is high for the
// following cycle. rxcode then holds until the next complete frame. A cycle
// with en low abandons a partly received frame, so en marks the frame.
// Asynchronous active-low reset clears rxcode to zero.
//
// Follows the design: incoming serial bits are turned into an n-bit
// parallel code. Own choices: framing by en, the code_valid strobe and the
// reset value.
module rx_s2p #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         rxbit,
  output logic [N-1:0] rxcode,
  output logic         code_valid
);

  localparam int unsigned CW = $clog2(N);

  logic [N-2:0]  sr;
  logic [CW-1:0] cnt;
  logic [N-1:0]  next_sr;

  assign next_sr = {sr[N-2:0], rxbit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr         <= '0;
      cnt        <= '0;
      rxcode     <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= 1'b0;
      if (!en) begin
        cnt <= '0;
      end else begin
        sr <= next_sr[N-2:0];
        if (cnt == CW'(N - 1)) begin
          cnt        <= '0;
          rxcode     <= next_sr;
          code_valid <= 1'b1;
        end else begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end

endmodule
