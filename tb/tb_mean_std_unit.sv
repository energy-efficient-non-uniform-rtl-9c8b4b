// tb_mean_std_unit: feeds sets of 64 values (uniform, all equal, skewed,
// random) and compares mean and standard deviation with floor(sum/64) and
// floor(sqrt(floor(sum x^2/64) - mean^2)) computed here; checks that the
// result comes N + 2 + W cycles after the first value is taken (no gaps).
module tb_mean_std_unit;
  localparam int N = 64, W = 12;
  logic clk = 0, rst_n = 0, start = 0, x_valid = 0, done, busy;
  logic [W-1:0] x, mean, stddev;
  int checks = 0, failures = 0;
  int unsigned xs [N];

  mean_std_unit #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned isqrt(longint unsigned v);
    longint unsigned r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic run_set();
    longint unsigned s1 = 0, s2 = 0, m, e2, var_, sd;
    int cyc = 0;
    for (int i = 0; i < N; i++) begin s1 += xs[i]; s2 += longint'(xs[i]) * xs[i]; end
    m = s1 / N; e2 = s2 / N; var_ = (e2 > m * m) ? e2 - m * m : 0; sd = isqrt(var_);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < N; i++) begin
      x_valid = 1; x = W'(xs[i]);
      @(negedge clk);
    end
    x_valid = 0;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks += 3;
    if (mean != W'(m)) begin failures++; $display("FAIL mean %0d exp %0d", mean, m); end
    if (stddev != W'(sd)) begin failures++; $display("FAIL std %0d exp %0d", stddev, sd); end
    // done is seen W+2 negedges after the last value is driven: ACC, DIV, VAR, W root steps
    if (cyc != W + 2) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) xs[i] = 100;          run_set();
    for (int i = 0; i < N; i++) xs[i] = i;            run_set();
    for (int i = 0; i < N; i++) xs[i] = (i < 6) ? 4000 : 3;  run_set();
    for (int i = 0; i < N; i++) xs[i] = 4095;         run_set();
    for (int k = 0; k < 10; k++) begin
      for (int i = 0; i < N; i++) xs[i] = $urandom_range(0, 4095);
      run_set();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
