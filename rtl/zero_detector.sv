// zero_detector: flags an all-zero cache line (NIZCache).
//
// On a write, the line is checked before it reaches the data array; a zero
// line only sets the extra zero bit beside its tag and is never written to or
// read from the data array. The check is a wide NOR, purely combinational.
// The polarity (zero line -> 1) is the one printed in the bank diagram.
module zero_detector #(
  parameter int LINE_BITS = nfv_pkg::LINE_BITS
) (
  input  logic [LINE_BITS-1:0] line,
  output logic                 is_zero
);
  always_comb is_zero = ~|line;
endmodule
