// Fitness evaluation: reference vectors and the F2 error accumulator.
//
// Two circular shift registers of N_SAMPLES entries hold the reference input
// test vector v_ref(n) (14 bits) and the precomputed golden output s_ref(n)
// (35 bits) of the reference shaper. During an evaluation the head of the
// v_ref register feeds the shaper and rotates on `v_shift`; each shaper
// output s(n) arriving with `s_valid` is compared with the head of the s_ref
// register, which then rotates, and the fitness
//   F2 = sum_{n=0}^{N-1} |s(n) - s_ref(n)|
// is accumulated in REG3. Both registers rotate exactly N times per
// evaluation, so they are back at n = 0 for the next one.
//
// Loading (this design's choice, the paper does not say how the vectors get
// in): with `load` high, one pair (v_ref, s_ref) is shifted in per clock at
// the tail; after N_SAMPLES loads, the first pair loaded is n = 0.
//
// Arithmetic: the difference is formed on 36 bits, so |s - s_ref| fits the
// 35-bit path unchanged. The 35-bit accumulator saturates instead of wrapping,
// and the 32-bit `fitness` output is clipped to 2^32-1 (`saturated` flags
// it); the prototype truncates the fitness to 32 bits at this port and a
// clipped value keeps a bad individual from looking good. `acc_clear` zeroes
// the accumulator at the start of an evaluation.
module fitness_eval
  import cusp_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 72
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // reference vector loading
  input  logic                     load,
  input  logic signed [DATA_W-1:0] load_v,
  input  logic signed [S_W-1:0]    load_s,
  // evaluation
  input  logic                     v_shift,
  output logic signed [DATA_W-1:0] v_ref,
  input  logic                     acc_clear,
  input  logic                     s_valid,
  input  logic signed [S_W-1:0]    s_in,
  output logic [FIT_W-1:0]         fitness,
  output logic                     saturated
);

  localparam logic [S_W-1:0] ACC_MAX = '1;

  logic signed [DATA_W-1:0] vref_sr [N_SAMPLES];
  logic signed [S_W-1:0]    sref_sr [N_SAMPLES];
  logic signed [S_W:0]      diff;
  logic        [S_W-1:0]    absdiff;
  logic        [S_W:0]      acc_sum;
  logic        [S_W-1:0]    acc_q;  // REG3

  always_ff @(posedge clk) begin
    if (load) begin
      for (int i = 0; i < N_SAMPLES - 1; i++) begin
        vref_sr[i] <= vref_sr[i+1];
        sref_sr[i] <= sref_sr[i+1];
      end
      vref_sr[N_SAMPLES-1] <= load_v;
      sref_sr[N_SAMPLES-1] <= load_s;
    end else begin
      if (v_shift) begin
        for (int i = 0; i < N_SAMPLES - 1; i++) vref_sr[i] <= vref_sr[i+1];
        vref_sr[N_SAMPLES-1] <= vref_sr[0];
      end
      if (s_valid) begin
        for (int i = 0; i < N_SAMPLES - 1; i++) sref_sr[i] <= sref_sr[i+1];
        sref_sr[N_SAMPLES-1] <= sref_sr[0];
      end
    end
  end

  assign v_ref = vref_sr[0];

  always_comb begin
    diff    = (S_W+1)'(s_in) - (S_W+1)'(sref_sr[0]);
    absdiff = diff[S_W] ? S_W'(-diff) : S_W'(diff);
    acc_sum = {1'b0, acc_q} + {1'b0, absdiff};
  end

  always_ff @(posedge clk) begin
    if (!rst_n || acc_clear) begin
      acc_q <= '0;
    end else if (s_valid) begin
      acc_q <= acc_sum[S_W] ? ACC_MAX : acc_sum[S_W-1:0];
    end
  end

  assign saturated = |acc_q[S_W-1:FIT_W];
  assign fitness   = saturated ? '1 : acc_q[FIT_W-1:0];

endmodule
