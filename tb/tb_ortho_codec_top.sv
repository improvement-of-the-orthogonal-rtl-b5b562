// tb_ortho_codec_top -- end-to-end test of the link at its default size
// (4-bit data, 8-chip codes). The testbench is the channel: tx_code goes to
// rx_bit through an XOR with a per-frame noise mask, tx_valid to rx_en.
// Each frame sends a random data word with 0, 1, 2 or 3 chips flipped and
// checks the receiver's result against a brute-force nearest-code search
// and the sent data. It counts how often each mechanism occurs and fails if
// one never does:
//   intact     no chip flipped, count 0, err low;
//   corrected  one chip flipped (up to n/4-1 = 1), data recovered, err high;
//   request    received word equally close to several codes, req high;
//   wrong      more errors than can be corrected, nearest code is another
//              code: err high, data differs from what was sent;
//   overrun    tx_en held for two words: the second arrives during the
//              search and is dropped.
// rx_valid must come 27 cycles after the cycle with tx_accept: the code
// is loaded at that cycle's edge, its N = 8 chips take the next 8 edges,
// and the receiver then needs 2N+2 = 18 cycles.
module tb_ortho_codec_top;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       tx_en = 1'b0;
  logic [3:0] tx_data = '0;
  logic       tx_accept;
  logic [7:0] tx_ortho;
  logic       tx_code;
  logic       tx_valid;
  logic       rx_en;
  logic       rx_bit;
  logic [7:0] rx_code;
  logic       rx_valid;
  logic [3:0] rx_count;
  logic       rx_err;
  logic [7:0] rx_ortho;
  logic [3:0] rx_data;
  logic       rx_req;
  logic       rx_overrun;

  // Channel.
  logic [7:0] noise = '0;
  int         chip = 0;
  assign rx_en  = tx_valid;
  assign rx_bit = tx_code ^ noise[7 - chip];
  always @(posedge clk) begin
    if (!tx_valid) chip <= 0;
    else chip <= (chip + 1) % 8;
  end

  int n_intact = 0, n_corrected = 0, n_request = 0, n_wrong = 0, n_overrun = 0;
  int n_valid = 0;
  always @(posedge clk) begin
    if (rx_overrun) n_overrun++;
    if (rx_valid) n_valid++;
  end

  ortho_codec_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(int d, logic [7:0] mask);
    int best, mind, nmin, cyc, nf;
    logic [7:0] rx;
    rx = FIG_CODES[d] ^ mask;
    nf = $countones(mask);
    ref_nearest(4, 64'(rx), best, mind, nmin);
    noise   = mask;
    tx_data = 4'(d);
    tx_en   = 1'b1;
    #1;
    checks++;
    if (tx_accept !== 1'b1 || tx_ortho !== FIG_CODES[d]) begin
      failures++;
      $display("FAIL transmitter not ready or wrong code %b", tx_ortho);
    end
    @(negedge clk);
    tx_en = 1'b0;
    cyc = 1;
    while (!rx_valid && cyc < 200) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 27) begin
      failures++;
      $display("FAIL latency %0d cycles, expected 27", cyc);
    end
    checks++;
    if (rx_code !== rx || rx_err !== (mind != 0) || rx_req !== (nmin > 1)) begin
      failures++;
      $display("FAIL data %0d mask %b: rx_code %b err %b req %b", d, mask, rx_code, rx_err, rx_req);
    end
    if (nmin == 1) begin
      checks++;
      if (int'(rx_data) != best || rx_ortho !== FIG_CODES[best] || int'(rx_count) != mind) begin
        failures++;
        $display("FAIL data %0d mask %b: got %0d/%b/%0d expected %0d/%0d", d, mask,
                 rx_data, rx_ortho, rx_count, best, mind);
      end
    end
    if (nf <= 1) begin
      checks++;
      if (int'(rx_data) != d) begin
        failures++;
        $display("FAIL data %0d with %0d flipped chips not recovered: %0d", d, nf, rx_data);
      end
    end
    if (nf == 0 && rx_count == 0 && !rx_err) n_intact++;
    if (nf == 1 && int'(rx_data) == d && rx_err) n_corrected++;
    if (rx_req) n_request++;
    if (!rx_req && rx_err && int'(rx_data) != d) n_wrong++;
    noise = '0;
    repeat ($urandom % 4) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 600; i++) begin
      logic [7:0] mask;
      int nf;
      nf   = $urandom % 4;
      mask = '0;
      while ($countones(mask) < nf) mask[$urandom % 8] = 1'b1;
      frame($urandom % 16, mask);
    end

    // Two words back to back.
    begin
      int v0;
      v0      = n_valid;
      tx_data = 4'd5;
      tx_en   = 1'b1;
      #1;
      while (!tx_accept) begin
        @(negedge clk);
        #1;
      end
      @(negedge clk);
      tx_data = 4'd10;
      #1;
      while (!tx_accept) begin
        @(negedge clk);
        #1;
      end
      @(negedge clk);
      tx_en = 1'b0;
      repeat (60) @(negedge clk);
      checks++;
      if (n_valid != v0 + 1 || rx_data !== 4'd5) begin
        failures++;
        $display("FAIL back-to-back: %0d results, data %0d", n_valid - v0, rx_data);
      end
    end

    $display("mechanisms: intact %0d corrected %0d request %0d wrong %0d overrun %0d",
             n_intact, n_corrected, n_request, n_wrong, n_overrun);
    checks++;
    if (n_intact == 0 || n_corrected == 0 || n_request == 0 || n_wrong == 0 || n_overrun == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
