// l2_bank: one 128 KB bank of the shared last-level cache.
//
// Per line the bank keeps a tag with valid and dirty bits, one compression
// bit (the FV bit in NFVCache, the zero bit in NIZCache), a 32-bit codeword
// column and the 64-byte data array. Only the data array sits behind the
// gated supply; tags, compression bits and the codeword column stay powered,
// so compressed lines can be written and read while the bank is off.
//
// Requests (one at a time, req_ready handshake):
//   CMD_RD   - one-cycle lookup; rsp pulses the next cycle. Hit when the line
//              is valid, the tag matches and it is compressed or the bank is on.
//   CMD_WR / CMD_FILL - a compressed line sets the compression bit and, for
//              NFV, the codeword; the data array is not touched. A raw line is
//              written to the data array when the bank is on; when it is off a
//              dirty line is passed on to memory through `evict` (write-around).
//              A dirty victim with another tag is written back through `evict`.
// Every request pulses ev.access; it pulses ev.invalid when the indexed line is
// invalid and ev.cmp_hit when it hits a compressed line (C_A, C_I, C_C).
//
// Power-off (power_on falls): the bank drains, one line per cycle, every valid
// uncompressed line: dirty ones are written back and, when migrate_n is 0 (M=0),
// every such line is also handed out for migration; all are invalidated; then the
// data array is switched off. Compressed lines stay. Power-on takes one cycle.
// Direct mapping, the write-around path and the drain timing are this design's
// choices; the paper leaves them open.
module l2_bank
  import nfv_pkg::*;
#(
  parameter int      LINES  = 2048,
  parameter scheme_e SCHEME = SCHEME_NFV
) (
  input  logic      clk,
  input  logic      rst_n,
  input  bank_req_t req,
  output logic      req_ready,
  output bank_rsp_t rsp,
  output bank_ev_t  ev,
  input  logic      power_on,    // T field: 1 = bank powered
  input  logic      m_discard,   // M field: 1 = discard uncompressed lines, 0 = migrate
  output logic      powered,     // data array currently powered
  output logic      draining,
  output evict_t    evict,
  input  logic      evict_ready
);
  localparam int IDX_W = $clog2(LINES);
  localparam int TAG_W = ADDR_W - OFFSET_W - BANK_W - IDX_W;

  logic [LINES-1:0]     vld, dirty, cmp;
  logic [TAG_W-1:0]     tag  [LINES];
  logic [CW_BITS-1:0]   cw   [LINES];
  logic [LINE_BITS-1:0] data [LINES];

  function automatic logic [IDX_W-1:0] idx_of(logic [ADDR_W-1:0] a);
    return a[OFFSET_W + BANK_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction
  function automatic logic [ADDR_W-1:0] addr_of(logic [TAG_W-1:0] t, logic [IDX_W-1:0] i,
                                                logic [BANK_W-1:0] b);
    return {t, i, b, OFFSET_W'(0)};
  endfunction

  // Compression bit of an incoming line: FV bit from the NI, or zero detection here.
  logic is_zero, in_cmp;
  zero_detector u_zd (.line(req.data), .is_zero);
  assign in_cmp = (SCHEME == SCHEME_NFV) ? req.cmp : is_zero;

  logic [IDX_W-1:0]  didx;         // drain pointer
  logic              drain_m;      // M latched at power-off
  logic [BANK_W-1:0] bank_id;      // taken from the addresses seen (line-interleaved)

  assign req_ready = !draining && !evict.valid;

  wire              acc  = req.valid && req_ready;
  wire [IDX_W-1:0]  ri   = idx_of(req.addr);
  wire [TAG_W-1:0]  rt   = tag_of(req.addr);
  wire              rv   = vld[ri];
  wire              rmat = rv && (tag[ri] == rt);

  always_comb begin
    ev         = '0;
    ev.access  = acc;
    ev.invalid = acc && !rv;
    ev.cmp_hit = acc && rmat && cmp[ri];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld      <= '0;
      dirty    <= '0;
      cmp      <= '0;
      powered  <= 1'b1;
      draining <= 1'b0;
      didx     <= '0;
      drain_m  <= 1'b1;
      bank_id  <= '0;
      rsp      <= '0;
      evict    <= '0;
    end else begin
      rsp.valid <= 1'b0;
      if (evict.valid && evict_ready) evict.valid <= 1'b0;

      // ---- power state ----------------------------------------------------
      if (!draining) begin
        if (powered && !power_on) begin
          draining <= 1'b1;
          didx     <= '0;
          drain_m  <= m_discard;
        end else if (!powered && power_on) begin
          powered <= 1'b1;
        end
      end else if (!evict.valid || evict_ready) begin
        // one line per cycle while the eviction register is free
        if (vld[didx] && !cmp[didx]) begin
          vld[didx] <= 1'b0;
          if (dirty[didx] || !drain_m) begin
            evict.valid   <= 1'b1;
            evict.dirty   <= dirty[didx];
            evict.migrate <= !drain_m;
            evict.cmp     <= 1'b0;
            evict.addr    <= addr_of(tag[didx], didx, bank_id);
            evict.data    <= data[didx];
          end
        end
        if (didx == IDX_W'(LINES - 1)) begin
          draining <= 1'b0;
          powered  <= 1'b0;
        end
        didx <= didx + 1'b1;
      end

      // ---- requests -------------------------------------------------------
      if (acc) begin
        bank_id <= bank_of(req.addr);
        if (req.cmd == CMD_RD) begin
          rsp.valid <= 1'b1;
          rsp.src   <= req.src;
          rsp.addr  <= req.addr;
          rsp.hit   <= rmat && (cmp[ri] || powered);
          rsp.cmp   <= rmat && cmp[ri];
          rsp.data  <= (rmat && cmp[ri]) ? ((SCHEME == SCHEME_NFV) ? LINE_BITS'(cw[ri]) : '0)
                                         : data[ri];
        end else begin
          // dirty victim with another tag goes back to memory
          if (rv && !rmat && dirty[ri] && (in_cmp || powered)) begin
            evict.valid   <= 1'b1;
            evict.dirty   <= 1'b1;
            evict.migrate <= 1'b0;
            evict.cmp     <= cmp[ri];
            evict.addr    <= addr_of(tag[ri], ri, bank_of(req.addr));
            evict.data    <= cmp[ri] ? LINE_BITS'(cw[ri]) : data[ri];
          end
          if (in_cmp || powered) begin
            vld[ri]   <= 1'b1;
            tag[ri]   <= rt;
            cmp[ri]   <= in_cmp;
            dirty[ri] <= (req.cmd == CMD_WR);
          end else begin
            // raw line, data array off: write around, drop a stale copy
            if (rmat) vld[ri] <= 1'b0;
            if (req.cmd == CMD_WR) begin
              evict.valid   <= 1'b1;
              evict.dirty   <= 1'b1;
              evict.migrate <= 1'b0;
              evict.cmp     <= 1'b0;
              evict.addr    <= req.addr;
              evict.data    <= req.data;
            end
          end
        end
      end
    end
  end

  // Codeword column and data array (no reset; guarded by the valid bits).
  always_ff @(posedge clk) begin
    if (acc && req.cmd != CMD_RD) begin
      if (in_cmp) begin
        if (SCHEME == SCHEME_NFV) cw[ri] <= req.data[CW_BITS-1:0];
      end else if (powered) begin
        data[ri] <= req.data;
      end
    end
  end

  // The bank only accepts requests for its own lines.
  a_one_bank: assert property (@(posedge clk) disable iff (!rst_n)
    acc |=> bank_id == bank_of($past(req.addr)));
endmodule
