// exp_unit: one BF16 exponential lane (ExpUnit). exp(x) is approximated as
// 2^int(x') * (1 + P(frac(x'))), x' = x * log2(e).
//
// How it works: exps_stage produces the Schraudolph bit pattern; its sign and
// exponent bits [15:7] are kept and its 7-bit fraction [6:0] is replaced by
// the corrected fraction from poly_stage (concatenation). The result then
// passes through NUM_PIPE_REGS register stages placed at the output, where a
// synthesis tool may retime them into the datapath.
//
// Interface and timing: x_i is sampled by the first stage when en_i[0] is
// high, and stage s advances when en_i[s] is high; the result appears on
// exp_o NUM_PIPE_REGS cycles after x_i was presented (combinational when
// NUM_PIPE_REGS = 0). The valid/ready control that drives en_i lives in the
// operation group, which lets it leave idle lanes unclocked.
//
// Follows the paper: the two cascaded stages, the concatenation, and a
// configurable number of pipeline registers (one in the main configuration).
// The placement of the registers at the output and the enable-based stage
// control are this design's own choices. Data registers are not reset: the
// valid bits in the operation group say when they hold a result.
module exp_unit #(
  parameter int unsigned NUM_PIPE_REGS = 1,
  parameter int unsigned LOG2E_FRAC    = 14
) (
  input  logic                                       clk_i,
  input  logic [(NUM_PIPE_REGS>0?NUM_PIPE_REGS:1)-1:0] en_i,
  input  logic [15:0]                                x_i,
  output logic [15:0]                                exp_o
);

  logic [15:0] exps;
  logic [6:0]  p_frac;
  logic [15:0] exp_comb;

  exps_stage #(.LOG2E_FRAC(LOG2E_FRAC)) u_exps (
    .x_i    (x_i),
    .exps_o (exps)
  );

  poly_stage u_poly (
    .frac_i (exps[6:0]),
    .p_o    (p_frac)
  );

  assign exp_comb = {exps[15:7], p_frac};

  if (NUM_PIPE_REGS == 0) begin : g_comb
    assign exp_o = exp_comb;
    logic unused;
    assign unused = ^{clk_i, en_i};
  end else begin : g_pipe
    logic [15:0] stage_q [NUM_PIPE_REGS];
    always_ff @(posedge clk_i) begin
      for (int s = 0; s < NUM_PIPE_REGS; s++) begin
        if (en_i[s]) stage_q[s] <= (s == 0) ? exp_comb : stage_q[(s == 0) ? 0 : s-1];
      end
    end
    assign exp_o = stage_q[NUM_PIPE_REGS-1];
  end

endmodule
