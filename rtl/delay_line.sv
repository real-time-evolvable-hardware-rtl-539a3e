// Programmable delay line: DELAY1[k] and DELAY2[l] of the cusp-like shaper.
//
// A DEPTH-stage shift register (63 stages) holds the last DEPTH input
// samples. A (DEPTH+1):1 multiplexer picks the tap given by `sel`: tap 0 is
// the current input itself (no delay), tap i is the sample accepted i
// enables earlier. So with sel = l the output is x(n-l) while x(n) is on
// `din`, for any l in 0..63. This is the structure the prototype draws for
// DELAY2; DELAY1 is drawn only as a box with the same 6-bit control and is
// built the same way here.
//
// Interface: `en` accepts one sample (the register shifts on the clock edge),
// `clear` empties the line to zero synchronously, so that samples before the
// start of a run read as zero. `dout` is combinational from `din` and `sel`.
// The active-low reset is synchronous, like `clear`.
module delay_line #(
  parameter int unsigned W     = 14,
  parameter int unsigned DEPTH = 63,
  parameter int unsigned SEL_W = $clog2(DEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic signed [W-1:0]     din,
  input  logic        [SEL_W-1:0] sel,
  output logic signed [W-1:0]     dout
);

  logic signed [W-1:0] sr [DEPTH];  // sr[i] = sample accepted i+1 enables ago

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else if (en) begin
      sr[0] <= din;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  always_comb begin
    dout = din;
    if (sel != '0) begin
      dout = '0;  // a tap past DEPTH (only when DEPTH+1 is not a power of two)
      for (int i = 1; i <= DEPTH; i++)
        if (sel == SEL_W'(i)) dout = sr[i-1];
    end
  end

endmodule
