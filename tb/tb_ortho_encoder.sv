// tb_ortho_encoder -- drives all sixteen 4-bit data words through the
// encoder and compares with the literal code table; the worked example
// 0110 -> 00111100 is checked on its own.
module tb_ortho_encoder;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [3:0] data;
  logic [7:0] ortho;

  ortho_encoder dut (.data(data), .ortho(ortho));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      data = 4'(d);
      #1;
      checks++;
      if (ortho !== FIG_CODES[d]) begin
        failures++;
        $display("FAIL data %b: ortho %b, expected %b", data, ortho, FIG_CODES[d]);
      end
    end
    data = 4'b0110;
    #1;
    checks++;
    if (ortho !== 8'b00111100) begin
      failures++;
      $display("FAIL example: ortho %b", ortho);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
