// tb_fv_table: loads 32 random 64-byte values, then checks that each encodes
// to the one-hot codeword of its entry, that other lines miss, that every
// codeword decodes back to its value, and that codewords of weight 0 or 2 and
// unloaded entries do not decode.
module tb_fv_table;
  localparam int LB = 512, NFV = 32, CWB = 32;
  logic clk = 0, rst_n = 0;
  logic load_valid;
  logic [4:0] load_idx;
  logic [LB-1:0] load_value, search_value, decode_value;
  logic search_hit, decode_hit;
  logic [CWB-1:0] search_cw, decode_cw;
  logic [LB-1:0] vals [NFV];
  int checks = 0, failures = 0;

  fv_table dut (.*);

  always #5 clk = ~clk;

  function automatic logic [LB-1:0] rnd_line();
    logic [LB-1:0] v;
    for (int w = 0; w < LB / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load_valid = 0; load_idx = 0; load_value = '0; search_value = '0; decode_cw = '0;
    for (int i = 0; i < NFV; i++) vals[i] = rnd_line();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // before loading: nothing hits
    search_value = vals[3]; decode_cw = 32'h8; #1;
    chk(!search_hit && !decode_hit, "empty table hit");
    // load all but entry 31
    for (int i = 0; i < NFV - 1; i++) begin
      @(negedge clk);
      load_valid = 1; load_idx = 5'(i); load_value = vals[i];
    end
    @(negedge clk); load_valid = 0;
    for (int i = 0; i < NFV - 1; i++) begin
      search_value = vals[i]; decode_cw = 32'(1) << i; #1;
      chk(search_hit && search_cw == (32'(1) << i), $sformatf("encode entry %0d", i));
      chk($countones(search_cw) == 1, "codeword weight 1");
      chk(decode_hit && decode_value == vals[i], $sformatf("decode entry %0d", i));
    end
    search_value = vals[31]; decode_cw = 32'(1) << 31; #1;
    chk(!search_hit && search_cw == '0, "unloaded value must miss");
    chk(!decode_hit, "unloaded codeword must not decode");
    for (int k = 0; k < 20; k++) begin
      search_value = rnd_line(); #1;
      chk(!search_hit, "random line miss");
    end
    decode_cw = 32'h3; #1; chk(!decode_hit, "weight-2 codeword");
    decode_cw = 32'h0; #1; chk(!decode_hit, "weight-0 codeword");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
