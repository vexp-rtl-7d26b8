// vexp_fpu_ss: FP subsystem slice of a Snitch-style core with the EXP
// extension, the top of this design. The integer core offloads FP
// instructions to it; it decodes FEXP and VFEXP, fetches their operand from
// the 32 x 64-bit FP register file, runs them on the EXP operation group of
// the extended FPU and writes the result back to rd.
//
// How it works:
//  * Issue. acc_instr_i is decoded by fexp_decoder. FEXP/VFEXP read rs1 and
//    are sent to the EXP group; any other instruction reads rs1, rs2 and rs3
//    at their standard positions and is sent with the raw word through the
//    ext_* port to the unmodified FPU groups (not part of this design).
//  * Scoreboard. One pending bit per FP register is set when an instruction
//    writing it issues and cleared when its result is written back. An
//    instruction stalls (acc_ready_o = 0) while any register it reads or
//    writes is pending (read-after-write and write-after-write hazards), or
//    while the addressed FPU group cannot accept it.
//  * Write-back. One register-file write per cycle. A load (ld_valid_i, from
//    the LSU or an SSR read stream) always wins; an FPU result offered in the
//    same cycle waits, which back-pressures the FPU.
//  * Store path. st_addr_i/st_data_o read a register asynchronously for
//    stores or an SSR write stream.
//
// Timing: an EXP instruction accepted in cycle t has its result written at
// the end of cycle t+1, so a dependent instruction can issue in cycle t+2: a
// latency of two cycles. Independent EXP instructions issue back-to-back, one
// per cycle, i.e. four BF16 exponentials per cycle with VFEXP.
//
// Follows the paper: the FEXP/VFEXP encodings, the 32 x 64-bit register file,
// the three-operand 64-bit FPU with the EXP group of four one-stage lanes,
// the two-cycle latency and the one-per-cycle throughput. The scoreboard,
// the write-back priority, the external port for the other FPU groups and the
// load/store ports are this design's own simplification of the Snitch FP
// subsystem. Loads are assumed to be ordered against FPU results by the
// issuing core (a load is not checked against the scoreboard).
module vexp_fpu_ss
  import vexp_pkg::*;
#(
  parameter int unsigned NUM_PIPE_REGS = 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // instruction offload from the integer core
  input  logic            acc_valid_i,
  output logic            acc_ready_o,
  input  logic [31:0]     acc_instr_i,
  // register write from loads / SSR read streams
  input  logic            ld_valid_i,
  input  fp_reg_t         ld_addr_i,
  input  fp_word_t        ld_data_i,
  // register read for stores / SSR write streams
  input  fp_reg_t         st_addr_i,
  output fp_word_t        st_data_o,
  // other operation groups of the FPU (FMA, DIVSQRT, COMP, CAST, SDOTP)
  output logic            ext_in_valid_o,
  input  logic            ext_in_ready_i,
  output fp_word_t        ext_operands_o [3],
  output logic [31:0]     ext_instr_o,
  output fp_reg_t         ext_tag_o,
  input  logic            ext_out_valid_i,
  output logic            ext_out_ready_o,
  input  fp_word_t        ext_result_i,
  input  fp_reg_t         ext_tag_i,
  // status
  output logic            busy_o
);

  // ---------------- decode ----------------
  logic    is_exp, vectorial;
  fp_reg_t rd, rs1, rs2, rs3;

  fexp_decoder u_dec (
    .instr_i     (acc_instr_i),
    .is_exp_o    (is_exp),
    .vectorial_o (vectorial),
    .rd_o        (rd),
    .rs1_o       (rs1),
    .rs2_o       (rs2),
    .rs3_o       (rs3)
  );

  // ---------------- register file ----------------
  fp_reg_t  raddr [4];
  fp_word_t rdata [4];
  logic     rf_we;
  fp_reg_t  rf_waddr;
  fp_word_t rf_wdata;

  assign raddr[0] = rs1;
  assign raddr[1] = rs2;
  assign raddr[2] = rs3;
  assign raddr[3] = st_addr_i;
  assign st_data_o = rdata[3];

  fp_regfile #(
    .NUM_REGS   (NUM_FP_REGS),
    .DATA_WIDTH (FLEN),
    .NUM_RD     (4)
  ) u_rf (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .raddr_i (raddr),
    .rdata_o (rdata),
    .we_i    (rf_we),
    .waddr_i (rf_waddr),
    .wdata_i (rf_wdata)
  );

  // ---------------- scoreboard ----------------
  logic [NUM_FP_REGS-1:0] pending_q;
  logic                   hazard;
  logic                   fpu_in_ready, issue;

  always_comb begin
    hazard = pending_q[rs1] | pending_q[rd];
    if (!is_exp) hazard |= pending_q[rs2] | pending_q[rs3];
  end

  assign acc_ready_o = !hazard && fpu_in_ready;
  assign issue       = acc_valid_i && acc_ready_o;

  // ---------------- extended FPU ----------------
  logic     fpu_out_valid, fpu_out_ready;
  fp_word_t fpu_result;
  fp_reg_t  fpu_tag;
  fp_word_t operands [3];
  logic     fpu_busy;

  assign operands[0] = rdata[0];
  assign operands[1] = rdata[1];
  assign operands[2] = rdata[2];

  fpu_vexp #(
    .WIDTH         (FLEN),
    .NUM_PIPE_REGS (NUM_PIPE_REGS),
    .TAG_WIDTH     (REG_AW)
  ) u_fpu (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .in_valid_i      (acc_valid_i && !hazard),
    .in_ready_o      (fpu_in_ready),
    .operands_i      (operands),
    .op_group_i      (is_exp ? OPGRP_EXP : OPGRP_EXT),
    .vectorial_i     (vectorial),
    .instr_i         (acc_instr_i),
    .tag_i           (rd),
    .out_valid_o     (fpu_out_valid),
    .out_ready_i     (fpu_out_ready),
    .result_o        (fpu_result),
    .tag_o           (fpu_tag),
    .busy_o          (fpu_busy),
    .ext_in_valid_o  (ext_in_valid_o),
    .ext_in_ready_i  (ext_in_ready_i),
    .ext_operands_o  (ext_operands_o),
    .ext_instr_o     (ext_instr_o),
    .ext_tag_o       (ext_tag_o),
    .ext_out_valid_i (ext_out_valid_i),
    .ext_out_ready_o (ext_out_ready_o),
    .ext_result_i    (ext_result_i),
    .ext_tag_i       (ext_tag_i)
  );

  // ---------------- write-back ----------------
  logic wb_fpu;
  assign fpu_out_ready = !ld_valid_i;
  assign wb_fpu        = fpu_out_valid && fpu_out_ready;
  assign rf_we         = ld_valid_i || wb_fpu;
  assign rf_waddr      = ld_valid_i ? ld_addr_i : fpu_tag;
  assign rf_wdata      = ld_valid_i ? ld_data_i : fpu_result;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= '0;
    end else begin
      if (wb_fpu) pending_q[fpu_tag] <= 1'b0;
      if (issue)  pending_q[rd]      <= 1'b1;
    end
  end

  assign busy_o = fpu_busy || (|pending_q);

  // A result may only retire a register that is pending
  a_wb_pending: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 wb_fpu |-> pending_q[fpu_tag]);

endmodule
