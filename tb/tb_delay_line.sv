// Testbench of delay_line: random samples with random enable gaps and a
// random delay select that changes every clock; the output must equal the
// sample accepted `sel` enables earlier (zero before the line was cleared).
// Checks the synchronous clear too.
module tb_delay_line;
  localparam int W = 14, DEPTH = 63;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic signed [W-1:0] din = '0, dout;
  logic [5:0] sel = '0;
  int checks = 0, failures = 0;
  longint hist[$];  // hist[0] = most recent accepted sample

  delay_line #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out();
    longint exp_v = (sel == 0) ? longint'(din) :
                    ((sel <= hist.size()) ? hist[sel-1] : 0);
    checks++;
    if (longint'(dout) != exp_v) begin
      failures++;
      if (failures < 10) $display("mismatch sel=%0d dout=%0d exp=%0d", sel, dout, exp_v);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int pass = 0; pass < 3; pass++) begin
      hist.delete();
      for (int i = 0; i < 600; i++) begin
        @(negedge clk);
        din = W'($urandom);
        en  = ($urandom_range(0, 3) != 0);
        sel = (i % 97 == 0) ? 6'd63 : 6'($urandom_range(0, 63));
        #1 check_out();
        @(posedge clk);
        if (en) hist.push_front(longint'(din));
      end
      // clear: everything reads zero afterwards
      @(negedge clk);
      en = 0; clear = 1;
      @(posedge clk);
      @(negedge clk);
      clear = 0;
      hist.delete();
      for (int s = 1; s <= DEPTH; s++) begin
        sel = 6'(s);
        #1 check_out();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
