// fpu_vexp: the extended FPU. One request of three WIDTH-bit operands goes to
// one operation group; the results of all groups are merged onto one
// WIDTH-bit result.
//
// How it works: operands distribution sends a request to the group named by
// op_group_i. OPGRP_EXP goes to the EXP operation group (exp_opgroup), which
// reads operand 0 only. OPGRP_EXT goes out through the ext_* port, behind
// which sit the existing operation groups of the multi-format FPU (FMA,
// DIVSQRT, COMP, CAST, SDOTP); they receive all three operands, the raw
// instruction word and the tag. in_ready_o is the ready of the addressed
// group. Output arbitration is a two-way round-robin: when both groups offer
// a result in the same cycle, the one that was not served last wins, and the
// loser is held by its out_ready until the next cycle.
//
// Interface and timing: valid/ready handshakes; a request accepted for the
// EXP group appears at the output NUM_PIPE_REGS cycles later unless the
// output stalls or loses arbitration. The tag (destination register) comes
// back with the result. busy_o is high while the EXP group holds operations.
//
// Follows the paper: the operands distribution / output arbitration structure
// and the EXP group as an added group of a 64-bit FPU with three operands.
// This design's own choices: a single external port standing for the
// unmodified groups, the round-robin arbiter and the handshake.
module fpu_vexp
  import vexp_pkg::*;
#(
  parameter int unsigned WIDTH         = 64,
  parameter int unsigned NUM_PIPE_REGS = 1,
  parameter int unsigned TAG_WIDTH     = 5
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // request
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  input  logic [WIDTH-1:0]     operands_i [3],
  input  opgroup_e             op_group_i,
  input  logic                 vectorial_i,
  input  logic [31:0]          instr_i,
  input  logic [TAG_WIDTH-1:0] tag_i,
  // result
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output logic [WIDTH-1:0]     result_o,
  output logic [TAG_WIDTH-1:0] tag_o,
  output logic                 busy_o,
  // other operation groups of the FPU
  output logic                 ext_in_valid_o,
  input  logic                 ext_in_ready_i,
  output logic [WIDTH-1:0]     ext_operands_o [3],
  output logic [31:0]          ext_instr_o,
  output logic [TAG_WIDTH-1:0] ext_tag_o,
  input  logic                 ext_out_valid_i,
  output logic                 ext_out_ready_o,
  input  logic [WIDTH-1:0]     ext_result_i,
  input  logic [TAG_WIDTH-1:0] ext_tag_i
);

  // ---------------- operands distribution ----------------
  logic exp_in_valid, exp_in_ready;

  assign exp_in_valid   = in_valid_i && (op_group_i == OPGRP_EXP);
  assign ext_in_valid_o = in_valid_i && (op_group_i == OPGRP_EXT);
  assign ext_operands_o = operands_i;
  assign ext_instr_o    = instr_i;
  assign ext_tag_o      = tag_i;
  assign in_ready_o     = (op_group_i == OPGRP_EXP) ? exp_in_ready : ext_in_ready_i;

  logic                 exp_out_valid, exp_out_ready;
  logic [WIDTH-1:0]     exp_result;
  logic [TAG_WIDTH-1:0] exp_tag;
  logic                 exp_vec_unused;

  exp_opgroup #(
    .WIDTH         (WIDTH),
    .NUM_PIPE_REGS (NUM_PIPE_REGS),
    .TAG_WIDTH     (TAG_WIDTH)
  ) u_exp_group (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (exp_in_valid),
    .in_ready_o  (exp_in_ready),
    .operand_i   (operands_i[0]),
    .vectorial_i (vectorial_i),
    .tag_i       (tag_i),
    .out_valid_o (exp_out_valid),
    .out_ready_i (exp_out_ready),
    .result_o    (exp_result),
    .tag_o       (exp_tag),
    .vectorial_o (exp_vec_unused),
    .busy_o      (busy_o)
  );

  // ---------------- output arbitration ----------------
  // last_ext_q: the external group won the last contested or single grant
  logic last_ext_q;
  logic grant_exp, grant_ext;

  always_comb begin
    grant_exp = 1'b0;
    grant_ext = 1'b0;
    if (exp_out_valid && ext_out_valid_i) begin
      if (last_ext_q) grant_exp = 1'b1;
      else            grant_ext = 1'b1;
    end else begin
      grant_exp = exp_out_valid;
      grant_ext = ext_out_valid_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_ext_q <= 1'b0;
    end else if (out_ready_i && (grant_exp || grant_ext)) begin
      last_ext_q <= grant_ext;
    end
  end

  assign exp_out_ready   = out_ready_i && grant_exp;
  assign ext_out_ready_o = out_ready_i && grant_ext;
  assign out_valid_o     = grant_exp || grant_ext;
  assign result_o        = grant_ext ? ext_result_i : exp_result;
  assign tag_o           = grant_ext ? ext_tag_i    : exp_tag;

  a_onehot_grant: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   !(grant_exp && grant_ext));

endmodule
