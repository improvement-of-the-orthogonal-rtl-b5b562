// err_detect -- error detection by XOR and ones-counting against every
// entry of the code look-up table, one entry per clock.
//
// A start pulse while idle begins a search of rxcode: in that cycle entry 0
// is compared with rxcode directly and rxcode is copied; entries 1 ..
// 2^K-1 follow, one per cycle, against the copy. For each entry the
// received code is XORed with the table code and the ones in the result
// (the Hamming distance) are counted. The search keeps the smallest count,
// the first index that reached it, and a tie flag set when a later entry
// reaches the same smallest count. done is high for one cycle, 2^K = 2N
// cycles after the start cycle, with min_count, best_idx and tie valid
// until the next search. busy is high while a search is in progress; a
// start pulse during busy is ignored (the receiver reports it as overrun).
// A min_count other than zero means the received code is corrupted.
//
// Follows the design: XOR with each table code, count ones, search for the
// minimum count, detect that the minimum belongs to more than one code.
// Own choices: one comparison per clock (this gives the 2n+2 cycle receive
// time together with one cycle each for correction and output), the
// ones-counter as a combinational adder, first-index-wins on ties.
module err_detect
  import ortho_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  localparam int unsigned N  = 2 ** (K - 1),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  rxcode,
  output logic          busy,
  output logic          done,
  output logic [CW-1:0] min_count,
  output logic [K-1:0]  best_idx,
  output logic          tie
);

  logic [N-1:0]  code_q;
  logic [K-1:0]  addr;
  logic [K-1:0]  lut_addr;
  logic [N-1:0]  lut_code;
  logic [N-1:0]  diff;
  logic [CW-1:0] hamming;

  assign lut_addr = busy ? addr : '0;

  ortho_lut #(.K(K)) u_lut (
    .addr (lut_addr),
    .code (lut_code)
  );

  // XOR of the received code with the current table entry, then count ones.
  assign diff = (busy ? code_q : rxcode) ^ lut_code;

  always_comb begin
    hamming = '0;
    for (int unsigned i = 0; i < N; i++) hamming = hamming + CW'(diff[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      code_q    <= '0;
      addr      <= '0;
      min_count <= '0;
      best_idx  <= '0;
      tie       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          code_q    <= rxcode;
          min_count <= hamming;
          best_idx  <= '0;
          tie       <= 1'b0;
          addr      <= K'(1);
          busy      <= 1'b1;
        end
      end else begin
        if (hamming < min_count) begin
          min_count <= hamming;
          best_idx  <= addr;
          tie       <= 1'b0;
        end else if (hamming == min_count) begin
          tie <= 1'b1;
        end
        addr <= addr + K'(1);
        if (addr == '1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A search ends with done and never overlaps it; a tie needs a count the
  // search has already seen, which a zero distance (an exact match) cannot
  // share with any other code.
  assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);
  assert property (@(posedge clk) disable iff (!rst_n) done |-> !(tie && min_count == '0));

endmodule
