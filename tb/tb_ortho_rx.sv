// tb_ortho_rx -- receiver checks with 8-chip codes, chips sent serially.
//   * The three worked cases: 00110000 right after reset (tie: req high,
//     count/ortho/data stay 0); 00111100 (intact: count 0, data 0110);
//     00110100 (one chip wrong: count 1, ortho 00111100, data 0110); and
//     00101100 (the link example, one chip wrong: data 0110).
//   * 400 random codes with 0..3 flipped chips, compared with a brute-force
//     nearest-code search; every single-chip error must be corrected.
//   * Every result must appear exactly 2N+2 = 18 cycles after the edge that
//     takes the last chip.
//   * Two frames back to back: the second ends during the search, is
//     dropped, and overrun pulses.
module tb_ortho_rx;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       en = 1'b0;
  logic       rxbit = 1'b0;
  logic [7:0] rxcode;
  logic       valid;
  logic [3:0] count;
  logic       err;
  logic [7:0] ortho;
  logic [3:0] data;
  logic       req;
  logic       overrun;

  logic [7:0] held_ortho = '0;
  logic [3:0] held_count = '0;
  int         overruns = 0;
  int         valids = 0;

  ortho_rx dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (overrun) overruns++;
    if (valid) valids++;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [7:0] w);
    for (int i = 7; i >= 0; i--) begin
      en    = 1'b1;
      rxbit = w[i];
      @(negedge clk);
    end
    en = 1'b0;
  endtask

  // Send w, wait for the result, check it against the reference.
  task automatic receive(logic [7:0] w, int sent_data, int nflip);
    int best, mind, nmin, cyc;
    ref_nearest(4, 64'(w), best, mind, nmin);
    send(w);
    cyc = 0;
    while (!valid && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 18) begin
      failures++;
      $display("FAIL %b: result after %0d cycles, expected 18", w, cyc);
    end
    checks++;
    if (rxcode !== w || err !== (mind != 0) || req !== (nmin > 1)) begin
      failures++;
      $display("FAIL %b: rxcode %b err %b req %b", w, rxcode, err, req);
    end
    if (nmin == 1) begin
      held_ortho = FIG_CODES[best];
      held_count = 4'(mind);
    end
    checks++;
    if (ortho !== held_ortho || count !== held_count) begin
      failures++;
      $display("FAIL %b: ortho %b count %0d, expected %b %0d", w, ortho, count, held_ortho, held_count);
    end
    checks++;
    if (FIG_CODES[data] !== held_ortho) begin
      failures++;
      $display("FAIL %b: data %b does not match ortho %b", w, data, held_ortho);
    end
    if (nflip <= 1) begin
      checks++;
      if (int'(data) != sent_data || req !== 1'b0) begin
        failures++;
        $display("FAIL %b: %0d flipped chips not corrected, data %b sent %0d", w, nflip, data, sent_data);
      end
    end
    @(negedge clk);
    checks++;
    if (valid !== 1'b0) begin
      failures++;
      $display("FAIL valid longer than one cycle");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // Tie right after reset.
    receive(8'b00110000, -1, 2);
    checks++;
    if (req !== 1'b1 || count !== 4'd0 || ortho !== 8'b0 || data !== 4'b0) begin
      failures++;
      $display("FAIL case 3: req %b count %0d ortho %b data %b", req, count, ortho, data);
    end
    // Intact code.
    receive(8'b00111100, 6, 0);
    checks++;
    if (count !== 4'd0 || ortho !== 8'b00111100 || data !== 4'b0110 || req !== 1'b0 || err !== 1'b0) begin
      failures++;
      $display("FAIL case 1: count %0d ortho %b data %b req %b", count, ortho, data, req);
    end
    // One chip wrong.
    receive(8'b00110100, 6, 1);
    checks++;
    if (count !== 4'd1 || ortho !== 8'b00111100 || data !== 4'b0110 || req !== 1'b0 || err !== 1'b1) begin
      failures++;
      $display("FAIL case 2: count %0d ortho %b data %b req %b", count, ortho, data, req);
    end

    // The link example: 00111100 sent, chip 3 flipped in the channel.
    receive(8'b00101100, 6, 1);
    checks++;
    if (count !== 4'd1 || ortho !== 8'b00111100 || data !== 4'b0110 || req !== 1'b0) begin
      failures++;
      $display("FAIL link example: count %0d ortho %b data %b req %b", count, ortho, data, req);
    end

    for (int i = 0; i < 400; i++) begin
      int d, nf;
      logic [7:0] w;
      d  = $urandom % 16;
      nf = $urandom % 4;
      w  = FIG_CODES[d];
      for (int f = 0; f < nf; f++) w[$urandom % 8] ^= 1'b1;
      receive(w, d, (w == FIG_CODES[d]) ? 0 : ($countones(w ^ FIG_CODES[d])));
      repeat ($urandom % 3) @(negedge clk);
    end

    // Back-to-back frames: the second is dropped.
    begin
      int v0;
      v0 = valids;
      overruns = 0;
      send(FIG_CODES[3]);
      send(FIG_CODES[9]);
      repeat (40) @(negedge clk);
      checks++;
      if (overruns != 1 || valids != v0 + 1 || data !== 4'd3) begin
        failures++;
        $display("FAIL overrun: %0d overruns, %0d results, data %0d", overruns, valids - v0, data);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
