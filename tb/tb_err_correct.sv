// tb_err_correct -- correction-stage checks. Random (index, min_count, tie)
// results are presented with in_valid; one cycle later out_valid must be
// high and, when tie is low, ortho must be the table code of the index and
// count the min_count; when tie is high req must be high and ortho/count
// must keep their previous values. err must follow min_count != 0. Cycles
// without in_valid must leave everything unchanged.
module tb_err_correct;
  import tb_ortho_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       in_valid = 1'b0;
  logic [3:0] best_idx = '0;
  logic [3:0] min_count = '0;
  logic       tie = 1'b0;
  logic       out_valid;
  logic [7:0] ortho;
  logic [3:0] count;
  logic       req;
  logic       err;

  logic [7:0] exp_ortho = '0;
  logic [3:0] exp_count = '0;
  logic       exp_req = 1'b0;
  logic       exp_err = 1'b0;
  int         reqs = 0;

  err_correct dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      logic v;
      v         = ($urandom % 2) == 0;
      in_valid  = v;
      best_idx  = 4'($urandom);
      min_count = 4'($urandom % 5);
      tie       = ($urandom % 4) == 0;
      if (v) begin
        exp_req = tie;
        exp_err = (min_count != 0);
        if (!tie) begin
          exp_ortho = FIG_CODES[best_idx];
          exp_count = min_count;
        end else begin
          reqs++;
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid !== v || ortho !== exp_ortho || count !== exp_count ||
          req !== exp_req || err !== exp_err) begin
        failures++;
        $display("FAIL step %0d: valid %b ortho %b count %0d req %b err %b, expected %b %b %0d %b %b",
                 i, out_valid, ortho, count, req, err, v, exp_ortho, exp_count, exp_req, exp_err);
      end
    end
    checks++;
    if (reqs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
