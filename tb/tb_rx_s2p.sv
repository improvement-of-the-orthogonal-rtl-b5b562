// tb_rx_s2p -- serial-to-parallel checks. Random 8-bit words are sent MSB
// first with en high, with random idle gaps and some frames cut short by
// dropping en. After each complete frame code_valid must be high for
// exactly the one cycle after the last bit's edge with rxcode equal to the
// word; rxcode must not change at any other time.
module tb_rx_s2p;

  localparam int N = 8;

  int checks = 0;
  int failures = 0;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         en = 1'b0;
  logic         rxbit = 1'b0;
  logic [N-1:0] rxcode;
  logic         code_valid;

  logic [N-1:0] last_code = '0;
  int           frames = 0;

  rx_s2p #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle(int cycles);
    en = 1'b0;
    repeat (cycles) begin
      @(negedge clk);
      checks++;
      if (code_valid !== 1'b0 || rxcode !== last_code) begin
        failures++;
        $display("FAIL idle: code_valid %b rxcode %b", code_valid, rxcode);
      end
    end
  endtask

  task automatic send(logic [N-1:0] w, int nbits);
    for (int i = N - 1; i >= N - nbits; i--) begin
      en    = 1'b1;
      rxbit = w[i];
      @(negedge clk);
      if (i != N - nbits || nbits != N) begin
        checks++;
        if (code_valid !== 1'b0 || rxcode !== last_code) begin
          failures++;
          $display("FAIL mid-frame: code_valid %b rxcode %b", code_valid, rxcode);
        end
      end
    end
    if (nbits == N) begin
      last_code = w;
      frames++;
      checks++;
      if (code_valid !== 1'b1 || rxcode !== w) begin
        failures++;
        $display("FAIL frame end: code_valid %b rxcode %b expected %b", code_valid, rxcode, w);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (rxcode !== '0 || code_valid !== 1'b0) begin
      failures++;
      $display("FAIL reset state");
    end
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < 200; f++) begin
      int kind;
      kind = $urandom % 4;
      if (kind == 0) begin
        send(N'($urandom), 1 + ($urandom % (N - 1)));
        idle(1 + $urandom % 3);
      end else begin
        send(N'($urandom), N);
        if (kind == 1) idle(1 + $urandom % 5);
      end
    end
    idle(3);
    checks++;
    if (frames < 100) begin
      failures++;
      $display("FAIL only %0d frames", frames);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
