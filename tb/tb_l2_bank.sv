// tb_l2_bank: directed test of one bank (16 lines) in both schemes.
// NFV bank: read miss on an invalid line, raw and codeword writes and reads,
// the C_A/C_C/C_I event pulses, a dirty victim write-back, power-off with
// M=1 (dirty raw lines written back, clean raw lines dropped, compressed lines
// kept and still readable, drain length), write-around and compressed writes
// while off, power-on, and power-off with M=0 (raw lines handed out for
// migration). NIZ bank: a zero line is stored as a zero bit only and reads
// back as zero while the bank is off.
module tb_l2_bank;
  import nfv_pkg::*;
  localparam int LINES = 16;
  localparam logic [BANK_W-1:0] BK = 6'd5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bank_req_t req, zreq;
  bank_rsp_t rsp, zrsp;
  bank_ev_t  ev, zev;
  evict_t    evict, zevict;
  logic req_ready, zreq_ready, power_on, m_discard, powered, draining, evict_ready;
  logic zpower_on, zpowered;

  l2_bank #(.LINES(LINES), .SCHEME(SCHEME_NFV)) dut (
    .clk, .rst_n, .req, .req_ready, .rsp, .ev, .power_on, .m_discard,
    .powered, .draining, .evict, .evict_ready);
  l2_bank #(.LINES(LINES), .SCHEME(SCHEME_NIZ)) dutz (
    .clk, .rst_n, .req (zreq), .req_ready (zreq_ready), .rsp (zrsp), .ev (zev),
    .power_on (zpower_on), .m_discard (1'b1), .powered (zpowered), .draining (),
    .evict (zevict), .evict_ready (1'b1));

  // evictions are logged as they are accepted
  evict_t elog [$];
  always @(posedge clk) if (evict.valid && evict_ready) elog.push_back(evict);

  function automatic logic [ADDR_W-1:0] A(int tg, int idx);
    return {9'(tg), 4'(idx), BK, 6'd0};
  endfunction
  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < LINE_BITS / 32; w++) v[w*32 +: 32] = $urandom | 32'h1;
    return v;
  endfunction

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue one request; returns the event pulse seen with it and, for reads, the response
  task automatic issue(input cmd_e cmd, input logic [ADDR_W-1:0] a, input logic cmp,
                       input logic [LINE_BITS-1:0] d, output bank_ev_t e, output bank_rsp_t r);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req = '0; req.valid = 1; req.cmd = cmd; req.addr = a; req.cmp = cmp; req.data = d;
    #1 e = ev;
    @(negedge clk);
    req = '0;
    r = rsp;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_ev_t e; bank_rsp_t r;
    logic [LINE_BITS-1:0] d1, d2, d3;
    int cyc;
    req = '0; zreq = '0; power_on = 1; zpower_on = 1; m_discard = 1; evict_ready = 1;
    d1 = rnd_line(); d2 = rnd_line(); d3 = rnd_line();
    repeat (2) @(negedge clk);
    rst_n = 1;

    issue(CMD_RD, A(1, 2), 0, '0, e, r);
    chk(r.valid && !r.hit, "read of invalid line misses");
    chk(e.access && e.invalid && !e.cmp_hit, "events on invalid read");

    issue(CMD_WR, A(1, 2), 0, d1, e, r);
    issue(CMD_RD, A(1, 2), 0, '0, e, r);
    chk(r.hit && !r.cmp && r.data == d1, "raw write then read");
    chk(e.access && !e.invalid && !e.cmp_hit, "events on raw hit");

    issue(CMD_WR, A(3, 4), 1, LINE_BITS'(32'h0000_0400), e, r);
    issue(CMD_RD, A(3, 4), 0, '0, e, r);
    chk(r.hit && r.cmp && r.data == LINE_BITS'(32'h0000_0400), "codeword write then read");
    chk(e.access && e.cmp_hit && !e.invalid, "events on compressed hit");

    issue(CMD_FILL, A(2, 6), 0, d3, e, r);       // clean raw line
    // dirty victim: different tag at index 2
    elog.delete();
    issue(CMD_WR, A(7, 2), 0, d2, e, r);
    @(negedge clk);
    chk(elog.size() == 1 && elog[0].dirty && elog[0].addr == A(1, 2) && elog[0].data == d1,
        "dirty victim written back");
    issue(CMD_RD, A(1, 2), 0, '0, e, r);
    chk(!r.hit, "old tag misses after replacement");

    // ---- power off, M = 1 -----------------------------------------------
    elog.delete();
    @(negedge clk);
    power_on = 0; m_discard = 1;
    cyc = 0;
    @(negedge clk);
    while (powered && cyc < 1000) begin @(negedge clk); cyc++; end
    chk(!powered, "bank powered off");
    chk(cyc <= LINES + 1, $sformatf("drain took %0d cycles", cyc));
    chk(elog.size() == 1 && elog[0].addr == A(7, 2) && elog[0].data == d2 && elog[0].dirty &&
        !elog[0].migrate, "only the dirty raw line is written back (M=1)");
    issue(CMD_RD, A(7, 2), 0, '0, e, r);
    chk(!r.hit, "raw line gone after power-off");
    issue(CMD_RD, A(2, 6), 0, '0, e, r);
    chk(!r.hit, "clean raw line dropped");
    issue(CMD_RD, A(3, 4), 0, '0, e, r);
    chk(r.hit && r.cmp && r.data == LINE_BITS'(32'h0000_0400), "compressed line readable while off");

    // writes while off
    elog.delete();
    issue(CMD_WR, A(5, 9), 0, d3, e, r);
    @(negedge clk);
    chk(elog.size() == 1 && elog[0].addr == A(5, 9) && elog[0].data == d3, "raw write-around while off");
    issue(CMD_RD, A(5, 9), 0, '0, e, r);
    chk(!r.hit, "raw line not stored while off");
    issue(CMD_WR, A(5, 10), 1, LINE_BITS'(32'h8000_0000), e, r);
    issue(CMD_RD, A(5, 10), 0, '0, e, r);
    chk(r.hit && r.cmp && r.data[31:0] == 32'h8000_0000, "compressed write while off");

    // ---- power on, then off with M = 0 -------------------------------------
    power_on = 1;
    @(negedge clk); @(negedge clk);
    chk(powered, "bank powered on");
    issue(CMD_FILL, A(6, 12), 0, d1, e, r);
    issue(CMD_RD, A(6, 12), 0, '0, e, r);
    chk(r.hit && r.data == d1, "raw line after power-on");
    elog.delete();
    evict_ready = 0;                 // back-pressure stalls the drain
    power_on = 0; m_discard = 0;
    repeat (LINES + 5) @(negedge clk);
    chk(powered, "drain waits for the write buffer");
    evict_ready = 1;
    cyc = 0;
    while (powered && cyc < 1000) begin @(negedge clk); cyc++; end
    chk(elog.size() == 1 && elog[0].migrate && !elog[0].dirty && elog[0].addr == A(6, 12) &&
        elog[0].data == d1, "clean raw line migrated (M=0)");
    issue(CMD_RD, A(3, 4), 0, '0, e, r);
    chk(r.hit && r.cmp, "compressed line survives second power-off");

    // ---- NIZ bank: zero lines ------------------------------------------------
    @(negedge clk);
    zreq = '0; zreq.valid = 1; zreq.cmd = CMD_WR; zreq.addr = A(1, 1); zreq.data = '0;
    @(negedge clk);
    zreq.addr = A(1, 3); zreq.data = d2;
    @(negedge clk);
    zreq = '0; zpower_on = 0;
    repeat (LINES + 4) @(negedge clk);
    chk(!zpowered, "NIZ bank off");
    zreq.valid = 1; zreq.cmd = CMD_RD; zreq.addr = A(1, 1);
    #1 chk(zev.cmp_hit, "zero line counted as compressed");
    @(negedge clk);
    zreq = '0;
    chk(zrsp.valid && zrsp.hit && zrsp.cmp && zrsp.data == '0, "zero line read while off");
    @(negedge clk);
    zreq.valid = 1; zreq.cmd = CMD_RD; zreq.addr = A(1, 3);
    @(negedge clk);
    zreq = '0;
    chk(zrsp.valid && !zrsp.hit, "non-zero line misses while off");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
