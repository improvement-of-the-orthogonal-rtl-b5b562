// tb_ortho_lut -- checks every entry of the code table for 4-bit data
// (against the literal 16-code table and the Hadamard model) and for 5-bit
// data (16-chip codes, against the Hadamard model), plus the balance of
// ones and zeros in every code except the all-zero and all-one pair.
module tb_ortho_lut;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [3:0]  a4;
  logic [7:0]  c4;
  logic [4:0]  a5;
  logic [15:0] c5;

  ortho_lut dut4 (.addr(a4), .code(c4));
  ortho_lut #(.K(5)) dut5 (.addr(a5), .code(c5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      a4 = 4'(a);
      #1;
      checks++;
      if (c4 !== FIG_CODES[a]) begin
        failures++;
        $display("FAIL k=4 addr %0d: %b, table %b", a, c4, FIG_CODES[a]);
      end
      checks++;
      if (c4 !== ref_code(4, a)[7:0]) begin
        failures++;
        $display("FAIL k=4 addr %0d: %b, model %b", a, c4, ref_code(4, a)[7:0]);
      end
    end
    for (int a = 0; a < 32; a++) begin
      a5 = 5'(a);
      #1;
      checks++;
      if (c5 !== ref_code(5, a)[15:0]) begin
        failures++;
        $display("FAIL k=5 addr %0d: %b, model %b", a, c5, ref_code(5, a)[15:0]);
      end
      if (a % 16 != 0) begin
        checks++;
        if ($countones(c5) != 8) begin
          failures++;
          $display("FAIL k=5 addr %0d not balanced: %b", a, c5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
