// Configurable cusp-like pulse shaper.
//
// Turns a digitised exponential pulse v(n) into a cusp-like symmetric pulse
// s(n) with the recursion
//   d^k(n) = v(n) - v(n-k)                     (DELAY1[k], Sigma1)
//   d^1(n) = v(n) - v(n-1)                     (REG1, Sigma2)
//   p(n)   = p(n-1) + d^k(n) - k * d^1(n-l)    (DELAY2[l], X3, Sigma3, ACC1)
//   q(n)   = q(n-1) + m2 * p(n)                (X2, ACC2)
//   s(n)   = s(n-1) + q(n) + m1 * p(n)         (X1, Sigma4, ACC3)
// with every signal zero before the first sample. The four parameters
// (k, l, m1, m2) come in as a shaper_params_t and may change at any time.
//
// Widths follow the prototype: 14-bit v, d^k and d^1 (the differences are
// taken modulo 2^14, which is exact while |v(n)-v(n-k)| < 2^13, e.g. for
// samples in 0..8191); d^k is sign-extended to 21 bits; k is widened from
// 6-bit unsigned to 7-bit two's complement for X3 (7x14 -> 21 bits); p is
// 21 bits; m1, m2 are 14-bit two's complement, X1/X2 give 35 bits; q and s
// are 35-bit accumulators. All sums wrap at their width.
//
// Timing (this design's choice, the paper draws no pipeline registers): one
// sample per `en`; the accumulators ACC1..ACC3 are the only state besides the
// delay lines and REG1, and the whole recursion for a sample is evaluated in
// the cycle it is presented, so s(n) is on `s_out` one clock after v(n) was
// accepted, with `s_valid` high for that clock. `clear` zeroes all state
// (start of an evaluation or of a new operating configuration).
module cusp_shaper
  import cusp_pkg::*;
#(
  parameter int unsigned MAXD = MAX_DELAY  // longest delay of DELAY1/DELAY2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  shaper_params_t          params,
  input  logic signed [DATA_W-1:0] v_in,
  output logic signed [S_W-1:0]   s_out,
  output logic                    s_valid
);

  logic signed [DATA_W-1:0] v_k;      // v(n-k)
  logic signed [DATA_W-1:0] v_1;      // REG1: v(n-1)
  logic signed [DATA_W-1:0] dk, d1;   // d^k(n), d^1(n)
  logic signed [DATA_W-1:0] d1_l;     // d^1(n-l)
  logic signed [KL_W:0]     k_tc;     // k as 7-bit two's complement
  logic signed [P_W-1:0]    dk_ext, x3, sum3, p_next;
  logic signed [S_W-1:0]    x1, x2, q_next, s_next;
  logic signed [P_W-1:0]    p_q;      // ACC1
  logic signed [S_W-1:0]    q_q;      // ACC2
  logic signed [S_W-1:0]    s_q;      // ACC3

  delay_line #(.W(DATA_W), .DEPTH(MAXD), .SEL_W(KL_W)) u_delay1 (
    .clk, .rst_n, .clear, .en, .din(v_in), .sel(params.k), .dout(v_k)
  );

  delay_line #(.W(DATA_W), .DEPTH(MAXD), .SEL_W(KL_W)) u_delay2 (
    .clk, .rst_n, .clear, .en, .din(d1), .sel(params.l), .dout(d1_l)
  );

  always_comb begin
    dk     = v_in - v_k;                               // Sigma1
    d1     = v_in - v_1;                               // Sigma2
    dk_ext = P_W'(dk);                                 // sign extension 14 -> 21
    k_tc   = signed'({1'b0, params.k});
    x3     = P_W'(d1_l * k_tc);                        // X3, 14 x 7 -> 21
    sum3   = dk_ext - x3;                              // Sigma3
    p_next = p_q + sum3;                               // ACC1
    x2     = S_W'(p_next * params.m2);                 // X2, 21 x 14 -> 35
    q_next = q_q + x2;                                 // ACC2
    x1     = S_W'(p_next * params.m1);                 // X1, 21 x 14 -> 35
    s_next = s_q + q_next + x1;                        // Sigma4, ACC3
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      v_1     <= '0;
      p_q     <= '0;
      q_q     <= '0;
      s_q     <= '0;
      s_valid <= 1'b0;
    end else begin
      s_valid <= en;
      if (en) begin
        v_1 <= v_in;
        p_q <= p_next;
        q_q <= q_next;
        s_q <= s_next;
      end
    end
  end

  assign s_out = s_q;

endmodule
