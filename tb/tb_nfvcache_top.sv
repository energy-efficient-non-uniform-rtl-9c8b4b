// tb_nfvcache_top: end-to-end run of the whole cache (16 tiles, 64 banks of
// LINES lines, short intervals). The testbench stands in for the mesh network:
// it moves whole packets from a tile's TSV link to the controller that owns
// the address and back to the requesting tile. A scoreboard keeps the last
// value written to every line and checks each read hit and each dirty line
// that leaves the banks.
// Interval by interval it provokes: FV-coded (32-wire) and raw (128-wire)
// writes; uniform reads; an idle interval whose mean falls below half of the
// one two intervals before (power-off of the N_OFF coldest banks, migration);
// a skewed interval (power-off of the cold banks, write-back and discard);
// reads of compressed lines held by off banks; write-around to an off bank;
// individual and collective power-on. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_nfvcache_top #(
  parameter int          LINES    = 16,
  parameter int unsigned INTERVAL = 6000
);
  import nfv_pkg::*;
  localparam int NT = NUM_CC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fv_load_t  fv_load;
  core_req_t core_req [NT];
  core_rsp_t core_rsp [NT];
  flit_t     ni_tx [NT], ni_rx [NT], cc_in [NT], cc_out [NT];
  evict_t    evict [NT];
  logic [NT-1:0] core_req_ready, ni_tx_ready, ni_rx_ready, cc_in_ready, cc_out_ready, evict_ready;
  logic [NUM_BANKS-1:0] t_on, m_discard, powered;
  logic [CNT_W-1:0] last_mean, last_std;
  logic [15:0] n_intervals, n_nonuniform, n_consecutive, n_on_individual, n_on_collective;

  nfvcache_top #(.SCHEME(SCHEME_NFV), .LINES(LINES), .INTERVAL(INTERVAL), .N_OFF(16)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- network model: packet-level, one queue per destination ---------------
  flit_t q_cc [NT][$];
  flit_t q_ni [NT][$];
  int    dst_of_src [NT];
  int    n_fv_pkts = 0, n_raw_wr_pkts = 0, n_narrow_ok = 0;
  always_comb for (int t = 0; t < NT; t++) begin
    ni_tx_ready[t]  = 1'b1;
    cc_out_ready[t] = 1'b1;
    evict_ready[t]  = 1'b1;
    cc_in[t] = (q_cc[t].size() > 0) ? q_cc[t][0] : '0;
    ni_rx[t] = (q_ni[t].size() > 0) ? q_ni[t][0] : '0;
  end
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      if (q_cc[t].size() > 0 && cc_in_ready[t]) void'(q_cc[t].pop_front());
      if (q_ni[t].size() > 0 && ni_rx_ready[t]) void'(q_ni[t].pop_front());
    end
    for (int t = 0; t < NT; t++) begin
      if (ni_tx[t].valid) begin
        if (ni_tx[t].head) begin
          hdr_t h;
          h = hdr_t'(ni_tx[t].data[$bits(hdr_t)-1:0]);
          dst_of_src[t] = int'(bank_of(h.addr)) / BANKS_PER_CC;
          if (h.cmd != CMD_RD && h.cmp) n_fv_pkts++;
          if (h.cmd == CMD_WR && !h.cmp) n_raw_wr_pkts++;
        end else if (ni_tx[t].data[FLIT_BITS-1:CW_BITS] == '0 && $countones(ni_tx[t].data) == 1) begin
          n_narrow_ok++;     // an FV payload: one wire of 32 high, the other 96 off
        end
        q_cc[dst_of_src[t]].push_back(ni_tx[t]);
      end
      if (cc_out[t].valid) begin
        hdr_t h;
        if (cc_out[t].head) begin
          h = hdr_t'(cc_out[t].data[$bits(hdr_t)-1:0]);
          rsp_dst[t] = int'(h.src);
        end
        q_ni[rsp_dst[t]].push_back(cc_out[t]);
      end
    end
  end
  int rsp_dst [NT];

  // ---- scoreboard and mechanism counters -----------------------------------
  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  logic [LINE_BITS-1:0] fv [8];
  int n_migrate = 0, n_writeback = 0, n_wraround = 0, n_raw_hit = 0, n_cmp_hit = 0,
      n_cmp_hit_off = 0, n_miss = 0, n_drain = 0;
  logic [NUM_BANKS-1:0] powered_q;
  logic [ADDR_W-1:0] wa_addr;
  always @(posedge clk) begin
    powered_q <= powered;
    if (rst_n) n_drain += $countones(powered_q & ~powered);
    for (int t = 0; t < NT; t++) begin
      if (evict[t].valid) begin
        if (evict[t].migrate) n_migrate++;
        if (evict[t].addr == wa_addr) n_wraround++;
        else if (evict[t].dirty) n_writeback++;
        if (evict[t].dirty) begin
          checks++;
          if (!mem.exists(evict[t].addr) || evict[t].data != mem[evict[t].addr]) begin
            failures++;
            $display("FAIL: evicted line %h has wrong data", evict[t].addr);
          end
        end
      end
    end
  end

  function automatic logic [ADDR_W-1:0] A(int tg, int idx, int bank);
    return {9'(tg), $clog2(LINES)'(idx), 6'(bank), 6'd0};
  endfunction
  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < LINE_BITS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(input int tile, input cmd_e cmd, input logic [ADDR_W-1:0] a,
                        input logic [LINE_BITS-1:0] d);
    int c = 0;
    @(negedge clk);
    core_req[tile] = '0; core_req[tile].valid = 1; core_req[tile].cmd = cmd;
    core_req[tile].addr = a; core_req[tile].data = d;
    while (!core_req_ready[tile]) @(negedge clk);
    @(negedge clk);
    core_req[tile] = '0;
    if (cmd == CMD_RD) begin
      while (!core_rsp[tile].valid && c < 5000) begin @(negedge clk); c++; end
      chk(core_rsp[tile].valid, "read answered");
      if (core_rsp[tile].hit) begin
        chk(mem.exists(a) && core_rsp[tile].data == mem[a], $sformatf("read data %h", a));
        if (core_rsp[tile].cmp) begin
          n_cmp_hit++;
          if (!powered[bank_of(a)]) n_cmp_hit_off++;
        end else n_raw_hit++;
      end else n_miss++;
    end else begin
      if (cmd == CMD_WR) mem[a] = d;
      repeat (10) @(negedge clk);
    end
  endtask

  task automatic wait_interval();
    logic [15:0] n;
    n = n_intervals;
    while (n_intervals == n) @(negedge clk);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fv_load = '0; wa_addr = '1;
    for (int t = 0; t < NT; t++) core_req[t] = '0;
    for (int i = 0; i < 8; i++) fv[i] = (i == 0) ? '0 : rnd_line();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); fv_load.valid = 1; fv_load.idx = 5'(i); fv_load.value = fv[i];
    end
    @(negedge clk); fv_load = '0;

    // interval 0: every bank gets one raw dirty line (index 1) and one FV line (index 2)
    for (int b = 0; b < NUM_BANKS; b++) begin
      access(b % NT, CMD_WR, A(1, 1, b), rnd_line());
      access((b + 3) % NT, CMD_WR, A(1, 2, b), fv[b % 8]);
    end
    wait_interval();
    // intervals 1 and 2: uniform reads of the raw lines
    for (int k = 0; k < 2; k++) begin
      for (int b = 0; b < NUM_BANKS; b++) access((b + k) % NT, CMD_RD, A(1, 1, b), '0);
      wait_interval();
    end
    // interval 3: idle -> mean falls below half of two intervals before
    wait_interval();
    repeat (INTERVAL / 2) @(negedge clk);
    chk($countones(t_on) == 48, $sformatf("N_OFF banks off after consecutive drop (%0d on)", $countones(t_on)));
    chk(powered == t_on, "every bank follows its T field");
    // interval 4: skewed reads to four banks
    wait_interval();
    for (int r = 0; r < 30; r++) for (int b = 32; b < 36; b++) access(r % NT, CMD_RD, A(1, 1, b), '0);
    wait_interval();
    repeat (INTERVAL / 2) @(negedge clk);
    chk(t_on[35:32] == 4'hF && $countones(t_on) < 48, "cold banks off after skewed interval");
    chk(powered == t_on, "every bank follows its T field after the skewed interval");
    // interval 6: compressed lines of off banks, write-around, misses on off banks
    wait_interval();
    for (int b = 0; b < NUM_BANKS; b++) if (!powered[b]) begin
      access(b % NT, CMD_RD, A(1, 2, b), '0);
      break;
    end
    for (int b = 0; b < NUM_BANKS; b++) if (!t_on[b] && !powered[b]) begin
      wa_addr = A(1, 5, b);
      access(0, CMD_WR, wa_addr, rnd_line());
      break;
    end
    // an off bank with accesses that are neither compressed nor invalid: individual power-on
    for (int r = 0; r < 3; r++) access(1, CMD_RD, A(7, 2, 20), '0);
    // misses on other off banks: collective power-on
    for (int b = 40; b < 48; b++) access(b % NT, CMD_RD, A(1, 1, b), '0);
    wait_interval();
    repeat (INTERVAL / 2) @(negedge clk);
    chk(t_on[20], "bank 20 powered on again");

    $display("mechanisms: fv_writes=%0d narrow_payloads=%0d raw_writes=%0d raw_hits=%0d cmp_hits=%0d cmp_hits_on_off_bank=%0d misses=%0d",
             n_fv_pkts, n_narrow_ok, n_raw_wr_pkts, n_raw_hit, n_cmp_hit, n_cmp_hit_off, n_miss);
    $display("power: drains=%0d writebacks=%0d migrations=%0d write_arounds=%0d nonuniform=%0d consecutive=%0d on_individual=%0d on_collective=%0d",
             n_drain, n_writeback, n_migrate, n_wraround, n_nonuniform, n_consecutive, n_on_individual, n_on_collective);
    chk(n_fv_pkts > 0 && n_narrow_ok >= n_fv_pkts, "FV writes sent on 32 wires");
    chk(n_raw_wr_pkts > 0, "raw writes happened");
    chk(n_raw_hit > 0, "raw read hits happened");
    chk(n_cmp_hit_off > 0, "compressed line read from an off bank");
    chk(n_miss > 0, "misses happened");
    chk(n_drain > 0, "banks drained and switched off");
    chk(n_writeback > 0, "dirty lines written back on power-off");
    chk(n_migrate > 0, "lines migrated on power-off (M=0)");
    chk(n_wraround > 0, "write-around to an off bank");
    chk(n_nonuniform > 0, "non-uniform branch taken");
    chk(n_consecutive > 0, "consecutive-interval branch taken");
    chk(n_on_individual > 0, "individual power-on");
    chk(n_on_collective > 0, "collective power-on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
