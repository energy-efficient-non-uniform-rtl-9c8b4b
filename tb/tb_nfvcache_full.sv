// tb_nfvcache_full: the whole cache at its full size (64 banks of 2048 lines,
// 64M-cycle interval) through one complete round trip per kind of line: from
// tile 5, a frequent-value line and a raw line are written to banks of two
// different controllers and read back from tile 11; a line never written
// misses. The testbench routes packets between the TSV links and the
// controllers. Checks data, hit/compressed flags, the number of flits and
// that all banks stay powered (no interval ends in this short run).
module tb_nfvcache_full;
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

  nfvcache_top dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // packet-level network model
  flit_t q_cc [NT][$];
  flit_t q_ni [NT][$];
  int dst [NT], rdst [NT], n_tx_flits = 0;
  always_comb for (int t = 0; t < NT; t++) begin
    ni_tx_ready[t] = 1'b1; cc_out_ready[t] = 1'b1; evict_ready[t] = 1'b1;
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
        n_tx_flits++;
        if (ni_tx[t].head) begin
          hdr_t h;
          h = hdr_t'(ni_tx[t].data[$bits(hdr_t)-1:0]);
          dst[t] = int'(bank_of(h.addr)) / BANKS_PER_CC;
        end
        q_cc[dst[t]].push_back(ni_tx[t]);
      end
      if (cc_out[t].valid) begin
        if (cc_out[t].head) begin
          hdr_t h;
          h = hdr_t'(cc_out[t].data[$bits(hdr_t)-1:0]);
          rdst[t] = int'(h.src);
        end
        q_ni[rdst[t]].push_back(cc_out[t]);
      end
    end
  end

  task automatic access(input int tile, input cmd_e cmd, input logic [ADDR_W-1:0] a,
                        input logic [LINE_BITS-1:0] d);
    int c = 0;
    @(negedge clk);
    core_req[tile] = '0; core_req[tile].valid = 1; core_req[tile].cmd = cmd;
    core_req[tile].addr = a; core_req[tile].data = d;
    while (!core_req_ready[tile]) @(negedge clk);
    @(negedge clk);
    core_req[tile] = '0;
    if (cmd == CMD_RD) while (!core_rsp[tile].valid && c < 1000) begin @(negedge clk); c++; end
    else repeat (12) @(negedge clk);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LINE_BITS-1:0] fvv, raw;
    logic [ADDR_W-1:0] a_fv, a_raw, a_none;
    int f0;
    for (int w = 0; w < LINE_BITS / 32; w++) begin fvv[w*32 +: 32] = $urandom; raw[w*32 +: 32] = $urandom; end
    a_fv   = 32'h1234_5A40;   // bank 41 -> controller 10
    a_raw  = 32'h0ABC_D1C0;   // bank 7  -> controller 1
    a_none = 32'h7777_0FC0;
    fv_load = '0;
    for (int t = 0; t < NT; t++) core_req[t] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); fv_load.valid = 1; fv_load.idx = 5'd17; fv_load.value = fvv;
    @(negedge clk); fv_load = '0;

    f0 = n_tx_flits; access(5, CMD_WR, a_fv, fvv);
    chk(n_tx_flits - f0 == 2, "FV write: head + one 32-wire flit");
    f0 = n_tx_flits; access(5, CMD_WR, a_raw, raw);
    chk(n_tx_flits - f0 == 5, "raw write: head + four 128-wire flits");
    access(11, CMD_RD, a_fv, '0);
    chk(core_rsp[11].hit && core_rsp[11].cmp && core_rsp[11].data == fvv, "FV line read back");
    access(11, CMD_RD, a_raw, '0);
    chk(core_rsp[11].hit && !core_rsp[11].cmp && core_rsp[11].data == raw, "raw line read back");
    access(11, CMD_RD, a_none, '0);
    chk(core_rsp[11].valid && !core_rsp[11].hit, "unwritten line misses");
    chk(&powered && &t_on && n_intervals == 0, "all banks on, no interval ended");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
