// Testbench of input_mux: random sensor and reference samples and strobes,
// both settings of the select; the output must follow the selected source.
module tb_input_mux;
  import cusp_pkg::*;
  logic sel_ref, sensor_valid, ref_valid, v_valid;
  logic signed [DATA_W-1:0] sensor_v, ref_v, v_out;
  int checks = 0, failures = 0;

  input_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      sel_ref      = i[0] ^ i[3];
      sensor_v     = DATA_W'($urandom);
      ref_v        = DATA_W'($urandom);
      sensor_valid = 1'($urandom);
      ref_valid    = 1'($urandom);
      #1;
      checks++;
      if (v_out != (sel_ref ? ref_v : sensor_v) ||
          v_valid != (sel_ref ? ref_valid : sensor_valid)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
