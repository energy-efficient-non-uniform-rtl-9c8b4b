// tb_zero_detector: checks the all-zero line flag on the zero line, on every
// single-bit line and on random lines, against a bit-by-bit reference.
module tb_zero_detector;
  localparam int LB = 512;
  logic [LB-1:0] line;
  logic          is_zero;
  int checks = 0, failures = 0;

  zero_detector #(.LINE_BITS(LB)) dut (.line, .is_zero);

  task automatic check(input logic [LB-1:0] v);
    logic ref_zero;
    line = v;
    #1;
    ref_zero = 1'b1;
    for (int i = 0; i < LB; i++) if (v[i]) ref_zero = 1'b0;
    checks++;
    if (is_zero !== ref_zero) begin
      failures++;
      $display("FAIL: line bit count %0d -> is_zero %0b", $countones(v), is_zero);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LB-1:0] v;
    check('0);
    for (int i = 0; i < LB; i++) check(LB'(1) << i);
    for (int k = 0; k < 50; k++) begin
      for (int w = 0; w < LB / 32; w++) v[w*32 +: 32] = $urandom;
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
