// tb_network_interface: loads four frequent values into the NI's table, then
// checks on the TSV side that a frequent-value write leaves as a head flit
// plus one flit driving only wires [31:0] with the one-hot codeword, a raw
// write as a head flit plus four 128-bit flits, and a read as a head flit
// alone; checks the header fields and the encoder's cycle count. On the
// return side it drives response packets (codeword, raw, miss) and checks the
// decoded line handed to L1.
module tb_network_interface;
  import nfv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fv_load_t  fv_load;
  core_req_t core_req;
  core_rsp_t core_rsp;
  flit_t     tsv_tx, tsv_rx;
  logic      core_req_ready, tsv_tx_ready, tsv_rx_ready;
  logic [LINE_BITS-1:0] fv [4];

  network_interface #(.SCHEME(SCHEME_NFV), .TILE(4'd9)) dut (.*);

  flit_t txlog [$];
  always @(posedge clk) if (tsv_tx.valid && tsv_tx_ready) txlog.push_back(tsv_tx);

  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < LINE_BITS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // send one request, wait until its packet has left; return flits and head latency
  task automatic send(input cmd_e cmd, input logic [ADDR_W-1:0] a, input logic [LINE_BITS-1:0] d,
                      output int lat);
    int c = 0;
    txlog.delete();
    @(negedge clk);
    core_req = '0; core_req.valid = 1; core_req.cmd = cmd; core_req.addr = a; core_req.data = d;
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    core_req = '0;
    while (!(tsv_tx.valid && tsv_tx.head) && c < 20) begin @(negedge clk); c++; end
    lat = c + 1;     // cycles from acceptance to the head flit on the wires
    c = 0;
    while (!(txlog.size() > 0 && txlog[$].last) && c < 20) begin @(negedge clk); c++; end
  endtask

  task automatic respond(input hdr_t h, input logic [LINE_BITS-1:0] d, input int nflits);
    @(negedge clk);
    tsv_rx = '0; tsv_rx.valid = 1; tsv_rx.head = 1; tsv_rx.last = (nflits == 0);
    tsv_rx.data = FLIT_BITS'(h);
    for (int i = 0; i < nflits; i++) begin
      @(negedge clk);
      tsv_rx.head = 0; tsv_rx.last = (i == nflits - 1);
      tsv_rx.data = (nflits == 1) ? FLIT_BITS'(d[31:0]) : d[i*FLIT_BITS +: FLIT_BITS];
    end
    @(negedge clk);
    tsv_rx = '0;
    while (!core_rsp.valid) @(negedge clk);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hdr_t h;
    int lat;
    logic [LINE_BITS-1:0] raw;
    fv_load = '0; core_req = '0; tsv_rx = '0; tsv_tx_ready = 1;
    for (int i = 0; i < 4; i++) fv[i] = rnd_line();
    fv[0] = '0;                       // the zero line is a frequent value too
    raw = rnd_line();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      fv_load.valid = 1; fv_load.idx = 5'(i * 7); fv_load.value = fv[i];
    end
    @(negedge clk); fv_load = '0;

    // frequent value write: 32 wires
    send(CMD_WR, 32'h0001_2340, fv[2], lat);
    h = hdr_t'(txlog[0].data[$bits(hdr_t)-1:0]);
    chk(txlog.size() == 2, $sformatf("FV write takes 2 flits (got %0d)", txlog.size()));
    chk(h.cmd == CMD_WR && h.cmp && h.src == 4'd9 && h.addr == 32'h0001_2340, "FV write header");
    chk(txlog[1].data[31:0] == 32'(1) << 14 && txlog[1].data[127:32] == '0 && txlog[1].last,
        "FV payload: one-hot codeword on wires [31:0], others off");
    chk(lat == 2, $sformatf("head flit %0d cycles after acceptance (encoder + serialiser)", lat));

    // raw write: 128 wires x 4
    send(CMD_WR, 32'h0004_0000, raw, lat);
    h = hdr_t'(txlog[0].data[$bits(hdr_t)-1:0]);
    chk(txlog.size() == 5 && !h.cmp, "raw write takes head + 4 flits");
    chk({txlog[4].data, txlog[3].data, txlog[2].data, txlog[1].data} == raw, "raw payload");

    // read: head only
    send(CMD_RD, 32'h0000_0FC0, '0, lat);
    h = hdr_t'(txlog[0].data[$bits(hdr_t)-1:0]);
    chk(txlog.size() == 1 && txlog[0].last && h.cmd == CMD_RD, "read is a head flit only");

    // back-pressure on the link holds the packet
    tsv_tx_ready = 0;
    send(CMD_WR, 32'h0000_1000, fv[0], lat);
    chk(txlog.size() == 0, "no flit taken while link not ready");
    tsv_tx_ready = 1;
    repeat (4) @(negedge clk);
    chk(txlog.size() == 2 && txlog[1].data[31:0] == 32'(1), "zero line coded as entry 0 after stall");

    // responses
    h = '0; h.cmd = CMD_RSP; h.hit = 1; h.cmp = 1; h.src = 4'd9; h.addr = 32'h0000_2000;
    respond(h, LINE_BITS'(32'(1) << 21), 1);
    chk(core_rsp.hit && core_rsp.cmp && core_rsp.data == fv[3] && core_rsp.addr == 32'h0000_2000,
        "codeword response decoded to its frequent value");
    h.cmp = 0;
    respond(h, raw, 4);
    chk(core_rsp.hit && !core_rsp.cmp && core_rsp.data == raw, "raw response");
    h.hit = 0;
    respond(h, '0, 0);
    chk(!core_rsp.hit, "miss response");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
