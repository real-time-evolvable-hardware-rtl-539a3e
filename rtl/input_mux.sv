// Shaper input multiplexer.
//
// The shaper is fed either from the sampled sensor input v(n) (normal
// operation) or from the stored reference test vector v_ref(n) while an
// individual is being evaluated. The sample strobe is switched together with
// the data, so that in normal operation the shaper advances once per sensor
// sample and during an evaluation once per clock of the reference run.
// Purely combinational; `sel_ref` comes from the evaluation controller.
module input_mux
  import cusp_pkg::*;
(
  input  logic                     sel_ref,
  input  logic signed [DATA_W-1:0] sensor_v,
  input  logic                     sensor_valid,
  input  logic signed [DATA_W-1:0] ref_v,
  input  logic                     ref_valid,
  output logic signed [DATA_W-1:0] v_out,
  output logic                     v_valid
);

  always_comb begin
    if (sel_ref) begin
      v_out   = ref_v;
      v_valid = ref_valid;
    end else begin
      v_out   = sensor_v;
      v_valid = sensor_valid;
    end
  end

endmodule
