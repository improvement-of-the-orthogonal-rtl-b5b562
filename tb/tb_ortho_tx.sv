// tb_ortho_tx -- transmitter checks. First the worked example: data 0110
// sent once must give ortho 00111100 and the chips 0,0,1,1,1,1,0,0 on
// txcode over 8 cycles with txvalid high, then txvalid low. Then en and data
// change at random; each accepted word's table code (from the literal code
// table) is queued and the serial output is compared chip by chip.
module tb_ortho_tx;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       en = 1'b0;
  logic [3:0] data = '0;
  logic [7:0] ortho;
  logic       accept;
  logic       txcode;
  logic       txvalid;

  bit expq[$];
  int accepted = 0;

  ortho_tx dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && accept) begin
      accepted++;
      for (int i = 7; i >= 0; i--) expq.push_back(FIG_CODES[data][i]);
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (txvalid !== (expq.size() != 0)) begin
        failures++;
        $display("FAIL txvalid %b with %0d chips queued", txvalid, expq.size());
      end
      if (expq.size() != 0) begin
        checks++;
        if (txcode !== expq[0]) begin
          failures++;
          $display("FAIL txcode %b expected %b", txcode, expq[0]);
        end
        void'(expq.pop_front());
      end
    end
  end

  initial begin
    logic [7:0] seen;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Worked example.
    @(negedge clk);
    data = 4'b0110;
    en   = 1'b1;
    #1;
    checks++;
    if (ortho !== 8'b00111100 || accept !== 1'b1) begin
      failures++;
      $display("FAIL example: ortho %b accept %b", ortho, accept);
    end
    @(negedge clk);
    en = 1'b0;
    seen = '0;
    for (int i = 0; i < 8; i++) begin
      seen = {seen[6:0], txcode};
      @(negedge clk);
    end
    checks++;
    if (seen !== 8'b00111100 || txvalid !== 1'b0) begin
      failures++;
      $display("FAIL example: serial %b, txvalid after %b", seen, txvalid);
    end
    // Random traffic.
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      #1;
      en   = ($urandom % 3) != 0;
      data = 4'($urandom);
    end
    @(negedge clk);
    en = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (accepted < 20) begin
      failures++;
      $display("FAIL only %0d words accepted", accepted);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
