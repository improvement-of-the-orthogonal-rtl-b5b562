// tb_rx_sweep -- helper for tb_workloads: drives one receiver of K-bit
// data (N = 2^(K-1) chips) serially and checks every result.
//
// EXHAUSTIVE = 1: every one of the 2^N possible received words is sent.
// The receiver's err, req, count and data are compared with a brute-force
// nearest-code search, and the words it cannot tell from a valid code
// (err low) are counted in undetected.
// EXHAUSTIVE = 0: SAMPLES random codes are sent with exactly N/4-1 chips
// flipped (the correction limit) or none; every one must be decoded to the
// data that was sent, with count equal to the number of flips and req low.
// done goes high when the sweep is over.
module tb_rx_sweep
  import tb_ortho_ref_pkg::*;
#(
  parameter int K = 4,
  parameter bit EXHAUSTIVE = 1'b1,
  parameter int SAMPLES = 100
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   undetected,
  output int   total
);

  localparam int N  = 2 ** (K - 1);
  localparam int CW = $clog2(N + 1);
  localparam int T  = N / 4 - 1;

  logic          en = 1'b0;
  logic          rxbit = 1'b0;
  logic [N-1:0]  rxcode;
  logic          valid;
  logic [CW-1:0] count;
  logic          err;
  logic [N-1:0]  ortho;
  logic [K-1:0]  data;
  logic          req;
  logic          overrun;

  logic [N-1:0] codes [2**K];

  ortho_rx #(.K(K)) dut (.*);

  task automatic send(logic [N-1:0] w);
    for (int i = N - 1; i >= 0; i--) begin
      en    = 1'b1;
      rxbit = w[i];
      @(negedge clk);
    end
    en = 1'b0;
    while (!valid) @(negedge clk);
  endtask

  function automatic void nearest(logic [N-1:0] w, output int best, output int mind,
                                  output int nmin);
    int d;
    mind = N + 1;
    best = 0;
    nmin = 0;
    for (int a = 0; a < 2 ** K; a++) begin
      d = $countones(w ^ codes[a]);
      if (d < mind) begin
        mind = d;
        best = a;
        nmin = 1;
      end else if (d == mind) begin
        nmin++;
      end
    end
  endfunction

  initial begin
    done       = 1'b0;
    checks     = 0;
    failures   = 0;
    undetected = 0;
    total      = 0;
    for (int a = 0; a < 2 ** K; a++) codes[a] = ref_code(K, a)[N-1:0];
    @(posedge rst_n);
    @(negedge clk);
    if (EXHAUSTIVE) begin
      for (longint w = 0; w < (longint'(1) << N); w++) begin
        int best, mind, nmin;
        nearest(N'(w), best, mind, nmin);
        send(N'(w));
        total++;
        if (!err) undetected++;
        checks++;
        if (err !== (mind != 0) || req !== (nmin > 1) ||
            (nmin == 1 && (int'(data) != best || int'(count) != mind))) begin
          failures++;
          if (failures < 10)
            $display("FAIL K=%0d word %b: err %b req %b data %0d count %0d, expected %0d/%0d/%0d",
                     K, N'(w), err, req, data, count, best, mind, nmin);
        end
        if (mind <= T) begin
          checks++;
          if (req !== 1'b0) begin
            failures++;
            $display("FAIL K=%0d word %b within %0d chips not corrected", K, N'(w), T);
          end
        end
      end
    end else begin
      for (int s = 0; s < SAMPLES; s++) begin
        int d, nf;
        logic [N-1:0] w;
        logic [N-1:0] mask;
        d    = $urandom % (2 ** K);
        nf   = ($urandom % 4 == 0) ? 0 : T;
        mask = '0;
        while ($countones(mask) < nf) mask[$urandom % N] = 1'b1;
        w = codes[d] ^ mask;
        send(w);
        total++;
        checks++;
        if (int'(data) != d || int'(count) != nf || req !== 1'b0 || err !== (nf != 0) ||
            ortho !== codes[d]) begin
          failures++;
          $display("FAIL K=%0d data %0d with %0d flips: data %0d count %0d req %b",
                   K, d, nf, data, count, req);
        end
      end
    end
    done = 1'b1;
  end

endmodule
