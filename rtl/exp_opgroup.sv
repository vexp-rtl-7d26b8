// exp_opgroup: the EXP operation group of the extended FPU (ExpOpGroup).
// It takes one WIDTH-bit SIMD operand of packed BF16 values and returns one
// WIDTH-bit SIMD result holding exp() of every element.
//
// How it works: operand distribution cuts the operand into LANES = WIDTH/16
// elements, element i (bits 16i+15:16i) going to ExpUnit lane i; output
// arbitration puts lane i's result back at the same position. In scalar mode
// (vectorial_i = 0, the FEXP instruction) only lane 0 is enabled: the other
// lanes' registers are not clocked, and the result's upper WIDTH-16 bits are
// set to all ones (NaN-boxing of a narrow value in a wide FP register, as
// RISC-V does for formats narrower than the register).
// A shift-register of valid bits, with the tag and the mode travelling
// alongside, controls the NUM_PIPE_REGS stages of the lanes. A stage accepts
// new data when it is empty or when the stage after it moves on, so
// back-to-back operations flow without bubbles and out_ready_i = 0 stalls the
// pipe from the output backwards.
//
// Interface and timing: valid/ready handshakes on both sides; data, mode and
// tag are taken when in_valid_i && in_ready_o, and appear with out_valid_o
// NUM_PIPE_REGS cycles later if the output is not stalled. One operation per
// cycle is accepted, i.e. LANES BF16 exponentials per cycle in vector mode.
// busy_o is high while any stage holds an operation.
//
// Follows the paper: the lane count k = WIDTH/16, four lanes and one pipeline
// level for a 64-bit FPU, the scalar mode that activates one lane and the
// back-to-back, stall-free throughput. This design's own choices: the
// valid/ready protocol, the tag, NaN-boxing of scalar results and an
// active-low asynchronous reset of the valid bits.
module exp_opgroup #(
  parameter int unsigned WIDTH         = 64,
  parameter int unsigned NUM_PIPE_REGS = 1,
  parameter int unsigned TAG_WIDTH     = 5,
  parameter int unsigned LOG2E_FRAC    = 14
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 in_valid_i,
  output logic                 in_ready_o,
  input  logic [WIDTH-1:0]     operand_i,
  input  logic                 vectorial_i,
  input  logic [TAG_WIDTH-1:0] tag_i,
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output logic [WIDTH-1:0]     result_o,
  output logic [TAG_WIDTH-1:0] tag_o,
  output logic                 vectorial_o,
  output logic                 busy_o
);

  localparam int unsigned LANES = WIDTH / 16;
  localparam int unsigned NP    = NUM_PIPE_REGS;
  localparam int unsigned ENW   = (NP > 0) ? NP : 1;

  // Stage s input side: index 0 is the op group input, index NP the output.
  logic                 valid [NP+1];
  logic                 ready [NP+1];
  logic                 vec   [NP+1];
  logic [TAG_WIDTH-1:0] tag   [NP+1];

  assign valid[0] = in_valid_i;
  assign vec[0]   = vectorial_i;
  assign tag[0]   = tag_i;
  assign ready[NP] = out_ready_i;

  for (genvar s = 0; s < NP; s++) begin : g_stage
    logic                 valid_q, vec_q;
    logic [TAG_WIDTH-1:0] tag_q;

    assign ready[s] = ready[s+1] | ~valid_q;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        valid_q <= 1'b0;
      end else if (ready[s]) begin
        valid_q <= valid[s];
      end
    end

    always_ff @(posedge clk_i) begin
      if (valid[s] && ready[s]) begin
        vec_q <= vec[s];
        tag_q <= tag[s];
      end
    end

    assign valid[s+1] = valid_q;
    assign vec[s+1]   = vec_q;
    assign tag[s+1]   = tag_q;
  end

  always_comb begin
    busy_o = 1'b0;
    for (int s = 1; s <= NP; s++) busy_o |= valid[s];
  end

  // Lanes: operand distribution, enables and output collection
  logic [WIDTH-1:0] lane_res;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [ENW-1:0] en;
    always_comb begin
      en = '0;
      for (int s = 0; s < NP; s++)
        en[s] = valid[s] & ready[s] & (vec[s] | (l == 0));
    end

    exp_unit #(
      .NUM_PIPE_REGS (NP),
      .LOG2E_FRAC    (LOG2E_FRAC)
    ) u_lane (
      .clk_i (clk_i),
      .en_i  (en),
      .x_i   (operand_i[16*l +: 16]),
      .exp_o (lane_res[16*l +: 16])
    );
  end

  assign out_valid_o = valid[NP];
  assign tag_o       = tag[NP];
  assign vectorial_o = vec[NP];
  assign in_ready_o  = ready[0];
  assign result_o    = vec[NP] ? lane_res
                               : {{(WIDTH-16){1'b1}}, lane_res[15:0]};

  // Handshake rules: a presented output holds until taken
  property p_out_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      out_valid_o && !out_ready_i |=> out_valid_o && $stable(tag_o);
  endproperty
  a_out_stable: assert property (p_out_stable);

  initial begin
    assert (WIDTH % 16 == 0 && WIDTH >= 16) else $error("WIDTH must be a multiple of 16");
  end

endmodule
