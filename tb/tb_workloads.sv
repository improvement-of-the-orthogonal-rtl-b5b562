// tb_workloads -- the code sizes the design is evaluated at, run through
// the receiver:
//   * 8-chip codes (4-bit data): all 256 received words. Exactly the 16
//     valid codes go undetected, a detection rate of 240/256 = 93.75 %;
//     every word one chip from a code is corrected.
//   * 16-chip codes (5-bit data): all 65536 received words. Exactly 32 go
//     undetected, 65504/65536 = 99.95 %; every word up to 3 chips from a
//     code is corrected.
//   * 32-chip (6-bit data) and 64-chip (7-bit data) codes: random codes with
//     7 and 15 flipped chips respectively (n/4-1) are all corrected; the
//     2^32 and 2^64 word spaces are too large to sweep.
// Every result is also checked against a brute-force nearest-code search.
module tb_workloads;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;

  logic d4, d5, d6, d7;
  int c4, c5, c6, c7;
  int f4, f5, f6, f7;
  int u4, u5, u6, u7;
  int t4, t5, t6, t7;

  tb_rx_sweep #(.K(4), .EXHAUSTIVE(1'b1)) s4 (
    .clk(clk), .rst_n(rst_n), .done(d4), .checks(c4), .failures(f4), .undetected(u4), .total(t4));
  tb_rx_sweep #(.K(5), .EXHAUSTIVE(1'b1)) s5 (
    .clk(clk), .rst_n(rst_n), .done(d5), .checks(c5), .failures(f5), .undetected(u5), .total(t5));
  tb_rx_sweep #(.K(6), .EXHAUSTIVE(1'b0), .SAMPLES(2000)) s6 (
    .clk(clk), .rst_n(rst_n), .done(d6), .checks(c6), .failures(f6), .undetected(u6), .total(t6));
  tb_rx_sweep #(.K(7), .EXHAUSTIVE(1'b0), .SAMPLES(2000)) s7 (
    .clk(clk), .rst_n(rst_n), .done(d7), .checks(c7), .failures(f7), .undetected(u7), .total(t7));

  always #5 clk = ~clk;

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d4 && d5 && d6 && d7);
    checks   = c4 + c5 + c6 + c7;
    failures = f4 + f5 + f6 + f7;
    $display("8-chip:  %0d words, %0d undetected, detection rate %0.2f %%",
             t4, u4, 100.0 * real'(t4 - u4) / real'(t4));
    $display("16-chip: %0d words, %0d undetected, detection rate %0.2f %%",
             t5, u5, 100.0 * real'(t5 - u5) / real'(t5));
    $display("32-chip: %0d codes with 0 or 7 flipped chips decoded", t6);
    $display("64-chip: %0d codes with 0 or 15 flipped chips decoded", t7);
    checks += 2;
    if (t4 != 256 || u4 != 16) begin
      failures++;
      $display("FAIL 8-chip sweep: %0d words, %0d undetected", t4, u4);
    end
    if (t5 != 65536 || u5 != 32) begin
      failures++;
      $display("FAIL 16-chip sweep: %0d words, %0d undetected", t5, u5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
