// tb_tx_p2s -- checks the transmit shift register against a bit queue.
// Every word accepted (load and ready at a rising edge) appends its 8 bits,
// MSB first, to the queue; on every later cycle ser_valid must equal
// "queue not empty" and ser_out the head of the queue. Phase 1 loads at
// random; phase 2 holds load high for 10 words and checks that the stream
// is gap-free (80 valid cycles in a row).
module tb_tx_p2s;

  localparam int N = 8;

  int checks = 0;
  int failures = 0;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         load = 1'b0;
  logic [N-1:0] par_in = '0;
  logic         ready;
  logic         ser_out;
  logic         ser_valid;

  bit expq[$];
  int run_len = 0;
  int max_run = 0;

  tx_p2s #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model: record accepted words at the rising edge.
  always @(posedge clk) begin
    if (rst_n) begin
      if (load && ready) begin
        if (expq.size() > 1) begin
          failures++;
          $display("FAIL ready high with %0d bits still queued", expq.size());
        end
        for (int i = N - 1; i >= 0; i--) expq.push_back(par_in[i]);
      end
    end
  end

  // Checker: compare the output once per cycle, away from the edge.
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (ser_valid !== (expq.size() != 0)) begin
        failures++;
        $display("FAIL ser_valid %b with %0d bits queued", ser_valid, expq.size());
      end
      if (expq.size() != 0) begin
        checks++;
        if (ser_out !== expq[0]) begin
          failures++;
          $display("FAIL ser_out %b expected %b", ser_out, expq[0]);
        end
        void'(expq.pop_front());
      end
      if (ser_valid) run_len++;
      else run_len = 0;
      if (run_len > max_run) max_run = run_len;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (ser_valid !== 1'b0 || ready !== 1'b1) begin
      failures++;
      $display("FAIL reset state");
    end
    rst_n = 1'b1;
    // Phase 1: random loads.
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      #1;
      load   = ($urandom % 4) == 0;
      par_in = N'($urandom);
    end
    @(negedge clk);
    #1;
    load = 1'b0;
    repeat (2 * N) @(negedge clk);
    max_run = 0;
    // Phase 2: load held high, new data every cycle.
    for (int c = 0; c < 10 * N; c++) begin
      #1;
      load   = 1'b1;
      par_in = N'($urandom);
      @(negedge clk);
    end
    #1;
    load = 1'b0;
    repeat (2 * N) @(negedge clk);
    checks++;
    if (max_run < 10 * N) begin
      failures++;
      $display("FAIL back-to-back stream had gaps: longest run %0d", max_run);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
