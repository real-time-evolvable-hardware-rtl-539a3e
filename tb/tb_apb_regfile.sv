// Testbench of apb_regfile: APB writes and reads of the chromosome
// registers, the 40-bit chromosome output, the one-clock command pulses from
// the control word, fitness loading from the controller side, the status
// word, and PSLVERR for unmapped addresses and for writes to fitness. Each
// transfer must finish in two clocks (no wait states).
module tb_apb_regfile;
  import cusp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [7:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  logic [CHROM_W-1:0] chrom;
  logic cmd_eval, cmd_apply, cmd_start, cmd_check;
  logic [FIT_W-1:0] threshold;
  logic fit_we = 0, fit_sat = 0;
  logic [FIT_W-1:0] fit_value = '0;
  logic stat_req = 0, stat_gen_done = 0, stat_busy = 0, stat_evolve = 0;
  logic [7:0] stat_count = '0;
  int checks = 0, failures = 0;
  int n_eval = 0, n_apply = 0, n_start = 0, n_check = 0;

  apb_regfile dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    n_eval  += int'(cmd_eval);
    n_apply += int'(cmd_apply);
    n_start += int'(cmd_start);
    n_check += int'(cmd_check);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic apb_write(logic [7:0] a, logic [31:0] d, output logic err);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk);
    penable = 1;
    #1 check(pready, "pready on write");
    err = pslverr;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic apb_read(logic [7:0] a, output logic [31:0] d, output logic err);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk);
    penable = 1;
    #1 check(pready, "pready on read");
    d = prdata; err = pslverr;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  initial begin
    logic [31:0] d;
    logic err;
    logic [39:0] c;
    shaper_params_t pr;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // chromosome of the paper's encoding example (31,15,1234,4321)
    c = {6'd31, 6'd15, 14'd1234, 14'd4321};
    apb_write(ADDR_CHROM_MSB, {24'hABCDEF, c[39:32]}, err);
    check(!err, "no error chrom_msb");
    apb_write(ADDR_CHROM_LSB, c[31:0], err);
    check(chrom == c, $sformatf("chrom %h", chrom));
    pr = shaper_params_t'(chrom);
    check(pr.k == 6'd31 && pr.l == 6'd15 && pr.m1 == 14'sd1234 && pr.m2 == 14'sd4321,
          "chromosome fields");
    apb_read(ADDR_CHROM_MSB, d, err);
    check(d == {24'b0, c[39:32]}, "read chrom_msb");
    apb_read(ADDR_CHROM_LSB, d, err);
    check(d == c[31:0], "read chrom_lsb");
    for (int i = 0; i < 20; i++) begin
      c = 40'({$urandom, $urandom});
      apb_write(ADDR_CHROM_MSB, 32'(c[39:32]), err);
      apb_write(ADDR_CHROM_LSB, c[31:0], err);
      check(chrom == c, "random chromosome");
    end
    // commands: one pulse each
    apb_write(ADDR_CTRL, 32'h1, err);
    apb_write(ADDR_CTRL, 32'h2, err);
    apb_write(ADDR_CTRL, 32'h4, err);
    apb_write(ADDR_CTRL, 32'h1, err);
    apb_write(ADDR_CTRL, 32'h8, err);
    repeat (2) @(negedge clk);
    check(n_eval == 2 && n_apply == 1 && n_start == 1 && n_check == 1,
          $sformatf("command pulses %0d %0d %0d %0d", n_eval, n_apply, n_start, n_check));
    // threshold: never trigger after reset, then programmable
    check(threshold == 32'hFFFF_FFFF, "threshold reset value");
    apb_write(ADDR_THRESHOLD, 32'd123456, err);
    check(!err && threshold == 32'd123456, "threshold write");
    apb_read(ADDR_THRESHOLD, d, err);
    check(d == 32'd123456, "threshold read");
    // fitness from the controller
    @(negedge clk);
    fit_value = 32'hDEAD_BEEF; fit_sat = 1; fit_we = 1;
    @(negedge clk);
    fit_we = 0; fit_value = '0;
    apb_read(ADDR_FITNESS, d, err);
    check(d == 32'hDEAD_BEEF && !err, "read fitness");
    stat_req = 1; stat_gen_done = 1; stat_busy = 0; stat_count = 8'd124;
    apb_read(ADDR_CTRL, d, err);
    check(d == {16'b0, 8'd124, 4'b0, 4'b1011}, $sformatf("status %h", d));
    stat_req = 0; stat_gen_done = 0; stat_busy = 1; stat_evolve = 1; stat_count = 8'd3;
    apb_read(ADDR_CTRL, d, err);
    check(d == {16'b0, 8'd3, 3'b0, 5'b11100}, $sformatf("status %h", d));
    // errors
    apb_write(ADDR_FITNESS, 32'h1234, err);
    check(err, "write to fitness is an error");
    apb_read(ADDR_FITNESS, d, err);
    check(d == 32'hDEAD_BEEF, "fitness unchanged by write");
    apb_read(8'h14, d, err);
    check(err && d == 0, "unmapped read");
    apb_write(8'h20, 32'hFFFF_FFFF, err);
    check(err, "unmapped write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
