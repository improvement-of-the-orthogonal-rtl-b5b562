// tb_err_detect -- search checks for 8-chip (K=4) and 16-chip (K=5) codes.
// Each received word is started once; done must appear exactly 2N cycles
// after the start cycle (16 and 32), with min_count, best_idx (first code
// at the minimum) and tie (more than one code at the minimum) equal to a
// brute-force nearest-code search over the Hadamard model. All 256 8-bit
// words are tried, plus random 16-bit words with 0..4 flipped chips. One
// extra start pulse during a search must be ignored.
module tb_err_detect;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;

  logic       start4 = 1'b0;
  logic [7:0] rx4 = '0;
  logic       busy4, done4, tie4;
  logic [3:0] min4, idx4;

  logic        start5 = 1'b0;
  logic [15:0] rx5 = '0;
  logic        busy5, done5, tie5;
  logic [4:0]  min5, idx5;

  int ties = 0;

  err_detect dut4 (.clk(clk), .rst_n(rst_n), .start(start4), .rxcode(rx4),
                   .busy(busy4), .done(done4), .min_count(min4),
                   .best_idx(idx4), .tie(tie4));
  err_detect #(.K(5)) dut5 (.clk(clk), .rst_n(rst_n), .start(start5), .rxcode(rx5),
                   .busy(busy5), .done(done5), .min_count(min5),
                   .best_idx(idx5), .tie(tie5));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run4(logic [7:0] w, bit disturb);
    int best, mind, nmin, cyc;
    ref_nearest(4, 64'(w), best, mind, nmin);
    rx4    = w;
    start4 = 1'b1;
    @(negedge clk);
    start4 = 1'b0;
    rx4    = 8'($urandom);
    cyc    = 1;
    while (!done4 && cyc < 100) begin
      if (disturb && cyc == 3) start4 = 1'b1;
      else start4 = 1'b0;
      @(negedge clk);
      cyc++;
    end
    start4 = 1'b0;
    checks++;
    if (cyc != 16) begin
      failures++;
      $display("FAIL k=4 %b: done after %0d cycles, expected 16", w, cyc);
    end
    checks++;
    if (int'(min4) != mind || tie4 !== (nmin > 1) || (nmin == 1 && int'(idx4) != best)) begin
      failures++;
      $display("FAIL k=4 %b: min %0d idx %0d tie %b, expected %0d %0d %0d codes",
               w, min4, idx4, tie4, mind, best, nmin);
    end
    if (nmin > 1) ties++;
    @(negedge clk);
    checks++;
    if (done4 !== 1'b0 || busy4 !== 1'b0) begin
      failures++;
      $display("FAIL k=4 done/busy not cleared");
    end
  endtask

  task automatic run5(logic [15:0] w);
    int best, mind, nmin, cyc;
    ref_nearest(5, 64'(w), best, mind, nmin);
    rx5    = w;
    start5 = 1'b1;
    @(negedge clk);
    start5 = 1'b0;
    cyc    = 1;
    while (!done5 && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 32) begin
      failures++;
      $display("FAIL k=5 %b: done after %0d cycles, expected 32", w, cyc);
    end
    checks++;
    if (int'(min5) != mind || tie5 !== (nmin > 1) || (nmin == 1 && int'(idx5) != best)) begin
      failures++;
      $display("FAIL k=5 %b: min %0d idx %0d tie %b, expected %0d %0d %0d codes",
               w, min5, idx5, tie5, mind, best, nmin);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int w = 0; w < 256; w++) run4(8'(w), w == 100);
    for (int i = 0; i < 300; i++) begin
      logic [15:0] w;
      w = ref_code(5, $urandom % 32)[15:0];
      repeat ($urandom % 5) w[$urandom % 16] ^= 1'b1;
      run5(w);
    end
    checks++;
    if (ties == 0) begin
      failures++;
      $display("FAIL no tie case seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
