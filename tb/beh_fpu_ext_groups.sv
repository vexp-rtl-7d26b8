// beh_fpu_ext_groups: behavioural stand-in, for simulation only, for the
// unmodified operation groups of the FPU (FMA, DIVSQRT, COMP, CAST, SDOTP)
// that sit behind the ext_* port of the extended FPU. It is not a model of
// their micro-architecture.
//
// It accepts a request when fewer than DEPTH are in flight and returns each
// result, in order, LATENCY cycles after it was accepted, or later if the
// result port is stalled. The operation is taken from funct7 of the
// instruction word (placeholder encodings of this test model, all OP-FP):
//   F7_ADD 0000010: lane-wise packed BF16 a + b     (vfadd.h)
//   F7_SUB 0000110: lane-wise packed BF16 a - b     (vfsub.h)
//   F7_MUL 0001010: lane-wise packed BF16 a * b     (vfmul.h)
//   F7_MAX 0010110: lane-wise packed BF16 max(a, b) (vfmax.h)
//   F7_SGNJ 0010010: copy of a                      (vfsgnj.h rd, rs1, rs1)
// with a = operand 0 (rs1) and b = operand 1 (rs2); anything else returns
// a ^ b. Arithmetic is done in real numbers and rounded to nearest even.
// STALL_PCT makes in_ready low at random in that percentage of cycles.
module beh_fpu_ext_groups #(
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned DEPTH     = 4,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  logic [63:0] operands_i [3],
  input  logic [31:0] instr_i,
  input  logic [4:0]  tag_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [63:0] result_o,
  output logic [4:0]  tag_o
);
  import tb_vexp_ref_pkg::*;

  localparam logic [6:0] F7_ADD = 7'b0000010;
  localparam logic [6:0] F7_SUB = 7'b0000110;
  localparam logic [6:0] F7_MUL = 7'b0001010;
  localparam logic [6:0] F7_MAX = 7'b0010110;
  localparam logic [6:0] F7_SGNJ = 7'b0010010;

  logic [63:0] res_q[$];
  logic [4:0]  tag_q[$];
  longint      due_q[$];
  longint      cyc = 0;

  function automatic logic [63:0] compute(logic [31:0] ins, logic [63:0] a, logic [63:0] b);
    logic [63:0] r;
    for (int l = 0; l < 4; l++) begin
      real x, y, z;
      x = bf16_to_real(a[16*l +: 16]);
      y = bf16_to_real(b[16*l +: 16]);
      case (ins[31:25])
        F7_ADD:  z = x + y;
        F7_SUB:  z = x - y;
        F7_MUL:  z = x * y;
        F7_MAX:  z = (x > y) ? x : y;
        default: z = 0.0;
      endcase
      r[16*l +: 16] = real_to_bf16(z);
    end
    if (ins[31:25] == F7_SGNJ) r = a;
    else if (!(ins[31:25] inside {F7_ADD, F7_SUB, F7_MUL, F7_MAX})) r = a ^ b;
    return r;
  endfunction

  // Outputs are registered copies of the queue head, updated with
  // non-blocking assignments so that other processes sampling them at the
  // clock edge see the values from before the edge.
  logic        ready_q, valid_q;
  logic [63:0] res_head_q;
  logic [4:0]  tag_head_q;

  assign in_ready_o  = ready_q;
  assign out_valid_o = valid_q;
  assign result_o    = res_head_q;
  assign tag_o       = tag_head_q;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      res_q.delete(); tag_q.delete(); due_q.delete();
      cyc        <= 0;
      ready_q    <= 1'b1;
      valid_q    <= 1'b0;
      res_head_q <= '0;
      tag_head_q <= '0;
    end else begin
      if (valid_q && out_ready_i) begin
        void'(res_q.pop_front()); void'(tag_q.pop_front()); void'(due_q.pop_front());
      end
      if (in_valid_i && ready_q) begin
        res_q.push_back(compute(instr_i, operands_i[0], operands_i[1]));
        tag_q.push_back(tag_i);
        due_q.push_back(cyc + LATENCY);
      end
      cyc        <= cyc + 1;
      ready_q    <= (res_q.size() < DEPTH) && ($urandom_range(0, 99) >= STALL_PCT);
      valid_q    <= (due_q.size() > 0) && (due_q[0] <= cyc + 1);
      res_head_q <= (res_q.size() > 0) ? res_q[0] : '0;
      tag_head_q <= (tag_q.size() > 0) ? tag_q[0] : '0;
    end
  end
endmodule
