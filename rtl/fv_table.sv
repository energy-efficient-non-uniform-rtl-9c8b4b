// fv_table: frequent-value table of a network interface (NFVCache).
//
// Holds the NUM_FV frequent 64-byte values found by static profiling. Entry i
// is coded by the 1-LWC codeword with only bit i set, so every codeword has
// weight one and no two frequent values share a 1 position. Two combinational
// ports: a CAM search (line -> hit, codeword) used by the encoder and a decode
// (codeword -> line) used on the way back. Entries are written one per cycle
// through the load port; a valid bit per entry is cleared by reset. Storing
// the codeword implicitly as the entry index is this design's choice.
module fv_table #(
  parameter int NUM_FV    = nfv_pkg::NUM_FV,
  parameter int LINE_BITS = nfv_pkg::LINE_BITS,
  parameter int CW_BITS   = nfv_pkg::CW_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load_valid,
  input  logic [$clog2(NUM_FV)-1:0] load_idx,
  input  logic [LINE_BITS-1:0]      load_value,
  input  logic [LINE_BITS-1:0]      search_value,
  output logic                      search_hit,
  output logic [CW_BITS-1:0]        search_cw,
  input  logic [CW_BITS-1:0]        decode_cw,
  output logic                      decode_hit,
  output logic [LINE_BITS-1:0]      decode_value
);
  logic [LINE_BITS-1:0] value [NUM_FV];
  logic [NUM_FV-1:0]    vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else if (load_valid) vld[load_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (load_valid) value[load_idx] <= load_value;
  end

  // CAM match lines; the codeword is the match vector itself (one-hot).
  logic [NUM_FV-1:0] match;
  always_comb begin
    match = '0;
    for (int i = 0; i < NUM_FV; i++) match[i] = vld[i] && (value[i] == search_value);
    // Only the lowest matching entry drives the codeword, so it stays one-hot
    // even if the same value was loaded twice.
    search_cw = '0;
    for (int i = NUM_FV - 1; i >= 0; i--) if (match[i]) search_cw = CW_BITS'(1) << i;
    search_hit = |match;
  end

  // Decode: a valid codeword has exactly one bit set, naming a loaded entry.
  always_comb begin
    decode_value = '0;
    decode_hit   = 1'b0;
    if ($countones(decode_cw) == 1) begin
      for (int i = 0; i < NUM_FV; i++) begin
        if (decode_cw[i] && vld[i]) begin
          decode_value = value[i];
          decode_hit   = 1'b1;
        end
      end
    end
  end
endmodule
