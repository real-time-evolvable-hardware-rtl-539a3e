// APB register file between the processor and the evolvable shaper.
//
// 32-bit registers on an AMBA APB (v3) slave port:
//   0x00 chrom_msb  R/W  bits 7..0 = chromosome bits 39..32 (k and l[5:4])
//   0x04 chrom_lsb  R/W  chromosome bits 31..0
//   0x08 fitness    R    fitness of the last evaluated individual
//   0x0C ctrl       W    bit0 EVAL, bit1 APPLY, bit2 START, bit3 CHECK
//                        (one-cycle pulses)
//        status     R    bit0 REQ, bit1 GEN_DONE, bit2 BUSY, bit3 SAT,
//                        bit4 EVOLVE, bits 15..8 individuals evaluated in
//                        this generation
//   0x10 threshold  R/W  F2 above which a CHECK raises EVOLVE (reset: all
//                        ones, i.e. never)
// chrom_msb, chrom_lsb and fitness are the prototype's; the control/status
// word and the threshold are this design's own handshake with the
// evaluation controller.
//
// Timing: no wait states (PREADY is always high); a write takes effect on the
// clock edge ending the ACCESS phase and a command bit is seen by the
// controller as a pulse in the following clock. PRDATA is combinational
// during the access phase. An access to an unmapped address, or a write to
// the fitness register, answers PSLVERR. `fit_we` from the controller loads
// the fitness register (with its saturation flag).
module apb_regfile
  import cusp_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // APB slave
  input  logic               psel,
  input  logic               penable,
  input  logic               pwrite,
  input  logic [7:0]         paddr,
  input  logic [31:0]        pwdata,
  output logic [31:0]        prdata,
  output logic               pready,
  output logic               pslverr,
  // to the evaluation controller
  output logic [CHROM_W-1:0] chrom,
  output logic               cmd_eval,
  output logic               cmd_apply,
  output logic               cmd_start,
  output logic               cmd_check,
  output logic [FIT_W-1:0]   threshold,
  // from the evaluation controller / fitness evaluation
  input  logic               fit_we,
  input  logic [FIT_W-1:0]   fit_value,
  input  logic               fit_sat,
  input  logic               stat_req,
  input  logic               stat_gen_done,
  input  logic               stat_busy,
  input  logic               stat_evolve,
  input  logic [7:0]         stat_count
);

  logic [7:0]       chrom_msb_q;
  logic [31:0]      chrom_lsb_q;
  logic [FIT_W-1:0] fitness_q;
  logic             sat_q;
  logic             access, wr, mapped;

  assign access = psel && penable;
  assign wr     = access && pwrite;
  assign mapped = (paddr == ADDR_CHROM_MSB) || (paddr == ADDR_CHROM_LSB) ||
                  (paddr == ADDR_FITNESS)   || (paddr == ADDR_CTRL) ||
                  (paddr == ADDR_THRESHOLD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      chrom_msb_q <= '0;
      chrom_lsb_q <= '0;
      fitness_q   <= '0;
      sat_q       <= 1'b0;
      cmd_eval    <= 1'b0;
      cmd_apply   <= 1'b0;
      cmd_start   <= 1'b0;
      cmd_check   <= 1'b0;
      threshold   <= '1;
    end else begin
      cmd_eval  <= 1'b0;
      cmd_apply <= 1'b0;
      cmd_start <= 1'b0;
      cmd_check <= 1'b0;
      if (wr) begin
        unique case (paddr)
          ADDR_CHROM_MSB: chrom_msb_q <= pwdata[7:0];
          ADDR_CHROM_LSB: chrom_lsb_q <= pwdata;
          ADDR_CTRL: begin
            cmd_eval  <= pwdata[CTRL_EVAL];
            cmd_apply <= pwdata[CTRL_APPLY];
            cmd_start <= pwdata[CTRL_START];
            cmd_check <= pwdata[CTRL_CHECK];
          end
          ADDR_THRESHOLD: threshold <= pwdata;
          default: ;
        endcase
      end
      if (fit_we) begin
        fitness_q <= fit_value;
        sat_q     <= fit_sat;
      end
    end
  end

  always_comb begin
    prdata = '0;
    if (access && !pwrite) begin
      unique case (paddr)
        ADDR_CHROM_MSB: prdata = {24'b0, chrom_msb_q};
        ADDR_CHROM_LSB: prdata = chrom_lsb_q;
        ADDR_FITNESS:   prdata = fitness_q;
        ADDR_CTRL: begin
          prdata[STAT_REQ]      = stat_req;
          prdata[STAT_GEN_DONE] = stat_gen_done;
          prdata[STAT_BUSY]     = stat_busy;
          prdata[STAT_SAT]      = sat_q;
          prdata[STAT_EVOLVE]   = stat_evolve;
          prdata[15:8]          = stat_count;
        end
        ADDR_THRESHOLD: prdata = threshold;
        default: ;
      endcase
    end
  end

  assign pready  = 1'b1;
  assign pslverr = access && (!mapped || (pwrite && paddr == ADDR_FITNESS));
  assign chrom   = {chrom_msb_q, chrom_lsb_q};

  // APB protocol rules the master must keep.
  a_enable_needs_sel: assert property (@(posedge clk) disable iff (!rst_n)
    penable |-> psel);
  a_setup_then_access: assert property (@(posedge clk) disable iff (!rst_n)
    (psel && !penable) |=> (psel && penable));
  a_stable_in_access: assert property (@(posedge clk) disable iff (!rst_n)
    (psel && !penable) |=> ($stable(paddr) && $stable(pwrite) && $stable(pwdata)));

endmodule
