// tb_cache_controller: drives request packets flit by flit into one
// controller (four 16-line banks) and checks the response packets it sends
// back (raw = head + 4 flits, codeword = head + 1 flit, miss = head only),
// the per-bank C_A/C_C/C_I/C_X snapshot taken on `snap` against counts kept
// here, the restart of the counters, 12-bit saturation, and that a bank
// switched off through its T field drains and sends its dirty line out of
// the merged eviction port.
module tb_cache_controller;
  import nfv_pkg::*;
  localparam int LINES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  flit_t flit_in, flit_out;
  logic  flit_in_ready, flit_out_ready, snap, evict_ready;
  logic [CNT_W-1:0] cx [4], ca [4], cc [4], ci [4];
  logic [3:0] t_on, m_discard, powered;
  evict_t evict;

  cache_controller #(.LINES(LINES), .SCHEME(SCHEME_NFV)) dut (.*);

  flit_t rxlog [$];
  evict_t elog [$];
  always @(posedge clk) begin
    if (flit_out.valid && flit_out_ready) rxlog.push_back(flit_out);
    if (evict.valid && evict_ready) elog.push_back(evict);
  end

  int ra [4], rc [4], ri [4];   // reference counts

  function automatic logic [ADDR_W-1:0] A(int tg, int idx, int bank);
    return {9'(tg), 4'(idx), 4'd3, 2'(bank), 6'd0};   // controller 3
  endfunction
  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < LINE_BITS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input cmd_e cmd, input logic [ADDR_W-1:0] a, input logic cmp,
                      input logic [LINE_BITS-1:0] d);
    hdr_t h;
    int n;
    h = '0; h.cmd = cmd; h.cmp = cmp; h.src = 4'd1; h.addr = a;
    n = payload_flits(h, SCHEME_NFV);
    rxlog.delete();
    @(negedge clk);
    flit_in = '0; flit_in.valid = 1; flit_in.head = 1; flit_in.last = (n == 0); flit_in.data = FLIT_BITS'(h);
    while (!flit_in_ready) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while (!flit_in_ready) @(negedge clk);
      flit_in.head = 0; flit_in.last = (i == n - 1);
      flit_in.data = cmp ? FLIT_BITS'(d[31:0]) : d[i*FLIT_BITS +: FLIT_BITS];
    end
    @(negedge clk);
    flit_in = '0;
    repeat (12) @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LINE_BITS-1:0] d [4];
    hdr_t h;
    flit_in = '0; flit_out_ready = 1; snap = 0; evict_ready = 1; t_on = '1; m_discard = '1;
    for (int b = 0; b < 4; b++) begin d[b] = rnd_line(); ra[b] = 0; rc[b] = 0; ri[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int b = 0; b < 4; b++) begin
      send(CMD_WR, A(1, b, b), 0, d[b]);           ra[b]++; ri[b]++;
      send(CMD_WR, A(1, b + 4, b), 1, LINE_BITS'(32'(1) << b)); ra[b]++; ri[b]++;
    end
    for (int b = 0; b < 4; b++) begin
      send(CMD_RD, A(1, b, b), 0, '0);               ra[b]++;
      h = hdr_t'(rxlog[0].data[$bits(hdr_t)-1:0]);
      chk(rxlog.size() == 5 && h.cmd == CMD_RSP && h.hit && !h.cmp && h.src == 4'd1 &&
          {rxlog[4].data, rxlog[3].data, rxlog[2].data, rxlog[1].data} == d[b],
          $sformatf("raw read response bank %0d", b));
      send(CMD_RD, A(1, b + 4, b), 0, '0);           ra[b]++; rc[b]++;
      h = hdr_t'(rxlog[0].data[$bits(hdr_t)-1:0]);
      chk(rxlog.size() == 2 && h.hit && h.cmp && rxlog[1].data == FLIT_BITS'(32'(1) << b),
          $sformatf("codeword read response bank %0d", b));
    end
    send(CMD_RD, A(2, 9, 2), 0, '0);                 ra[2]++; ri[2]++;
    h = hdr_t'(rxlog[0].data[$bits(hdr_t)-1:0]);
    chk(rxlog.size() == 1 && !h.hit, "miss response is a head flit");

    @(negedge clk); snap = 1; @(negedge clk); snap = 0;
    for (int b = 0; b < 4; b++) begin
      chk(ca[b] == CNT_W'(ra[b]) && cc[b] == CNT_W'(rc[b]) && ci[b] == CNT_W'(ri[b]) &&
          cx[b] == CNT_W'(ra[b] - rc[b] - ri[b]),
          $sformatf("counters bank %0d: A=%0d C=%0d I=%0d X=%0d", b, ca[b], cc[b], ci[b], cx[b]));
    end
    // next interval starts from zero: one read only
    send(CMD_RD, A(1, 0, 0), 0, '0);
    @(negedge clk); snap = 1; @(negedge clk); snap = 0;
    chk(ca[0] == 1 && ca[1] == 0 && cx[0] == 1, "counters restart each interval");

    // saturation: 4100 compressed-line reads on bank 3 (about 4100*8 cycles)
    for (int k = 0; k < 4100; k++) begin
      hdr_t hh;
      hh = '0; hh.cmd = CMD_RD; hh.addr = A(1, 7, 3);
      @(negedge clk);
      flit_in = '0; flit_in.valid = 1; flit_in.head = 1; flit_in.last = 1; flit_in.data = FLIT_BITS'(hh);
      while (!flit_in_ready) @(negedge clk);
      @(negedge clk); flit_in = '0;
      repeat (3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    snap = 1; @(negedge clk); snap = 0;
    chk(ca[3] == '1 && cc[3] == '1 && cx[3] == 0, "12-bit counters saturate");

    // T field: bank 1 off, its dirty raw line leaves through evict
    elog.delete();
    t_on[1] = 0;
    repeat (LINES + 10) @(negedge clk);
    chk(!powered[1] && powered[0] && powered[2] && powered[3], "only bank 1 powered off");
    chk(elog.size() == 1 && elog[0].addr == A(1, 1, 1) && elog[0].data == d[1], "bank 1 dirty line evicted");
    send(CMD_RD, A(1, 5, 1), 0, '0);
    h = hdr_t'(rxlog[0].data[$bits(hdr_t)-1:0]);
    chk(h.hit && h.cmp, "compressed line of the off bank still served");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
