// tb_ortho_decoder -- decodes every code of the 8-chip and 16-chip tables
// and checks that the data word it came from is recovered.
module tb_ortho_decoder;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [7:0]  c4;
  logic [3:0]  d4;
  logic [15:0] c5;
  logic [4:0]  d5;

  ortho_decoder dut4 (.ortho(c4), .data(d4));
  ortho_decoder #(.K(5)) dut5 (.ortho(c5), .data(d5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      c4 = FIG_CODES[d];
      #1;
      checks++;
      if (d4 !== 4'(d)) begin
        failures++;
        $display("FAIL code %b: data %b, expected %0d", c4, d4, d);
      end
    end
    for (int d = 0; d < 32; d++) begin
      c5 = ref_code(5, d)[15:0];
      #1;
      checks++;
      if (d5 !== 5'(d)) begin
        failures++;
        $display("FAIL code %b: data %b, expected %0d", c5, d5, d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
