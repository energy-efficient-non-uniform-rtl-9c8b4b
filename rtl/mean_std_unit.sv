// mean_std_unit: mean and standard deviation of N counter values.
//
// Follows the block diagram of the statistics hardware: one value x per cycle
// enters two accumulators, one adding x and one adding x*x. After N values both
// sums are divided by N (N = 64 is a power of two, so the divider is a right
// shift applied to both sums in the same cycle), the mean is squared and
// subtracted from the mean of the squares to give the variance, and an
// iterative square root (shift registers and one add/subtract, one result bit
// per cycle) gives the standard deviation. Results are floor values; a
// negative variance from truncation is clamped to 0.
// Timing: start, then N cycles with x_valid (gaps allowed), then 2 + W cycles;
// `done` pulses once and mean/stddev hold until the next start.
module mean_std_unit #(
  parameter int N = 64,
  parameter int W = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         x_valid,
  input  logic [W-1:0] x,
  output logic [W-1:0] mean,
  output logic [W-1:0] stddev,
  output logic         done,
  output logic         busy
);
  localparam int LOGN = $clog2(N);
  localparam int S1_W = W + LOGN;
  localparam int S2_W = 2 * W + LOGN;

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_DIV, S_VAR, S_SQRT} state_e;
  state_e state;

  logic [S1_W-1:0]   s1;
  logic [S2_W-1:0]   s2;
  logic [LOGN:0]     cnt;
  logic [2*W-1:0]    ex2;          // mean of squares
  logic [2*W-1:0]    op, res, one; // square-root shift registers
  logic [$clog2(W+1)-1:0] it;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      s1 <= '0; s2 <= '0; cnt <= '0; ex2 <= '0;
      op <= '0; res <= '0; one <= '0; it <= '0;
      mean <= '0; stddev <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          s1 <= '0; s2 <= '0; cnt <= '0;
          state <= S_ACC;
        end
        S_ACC: if (x_valid) begin
          s1  <= s1 + S1_W'(x);
          s2  <= s2 + S2_W'(x) * S2_W'(x);
          cnt <= cnt + 1'b1;
          if (cnt == (LOGN+1)'(N - 1)) state <= S_DIV;
        end
        S_DIV: begin
          mean  <= W'(s1 >> LOGN);
          ex2   <= (2*W)'(s2 >> LOGN);
          state <= S_VAR;
        end
        S_VAR: begin
          op    <= (ex2 > (2*W)'(mean) * (2*W)'(mean)) ? ex2 - (2*W)'(mean) * (2*W)'(mean) : '0;
          res   <= '0;
          one   <= (2*W)'(1) << (2*W - 2);
          it    <= '0;
          state <= S_SQRT;
        end
        S_SQRT: begin
          if (op >= res + one) begin
            op  <= op - (res + one);
            res <= (res >> 1) + one;
          end else begin
            res <= res >> 1;
          end
          one <= one >> 2;
          it  <= it + 1'b1;
          if (it == ($clog2(W+1))'(W - 1)) begin
            stddev <= (op >= res + one) ? W'((res >> 1) + one) : W'(res >> 1);
            done   <= 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
