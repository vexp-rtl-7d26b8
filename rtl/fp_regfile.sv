// fp_regfile: the floating-point register file of the FP subsystem,
// NUM_REGS x DATA_WIDTH bits (32 x 64 in the main configuration).
//
// How it works: a flip-flop array with NUM_RD asynchronous read ports and
// one synchronous write port. Three read ports serve the FPU's three
// operands; the fourth serves the store / outgoing data path. A read of the
// register being written in the same cycle returns the old value; the new one
// is visible from the next cycle. All registers reset to zero.
//
// The 32 x 64-bit size and the three 64-bit FPU operands follow the paper;
// the port count for stores, the write timing and the reset are this
// design's own choices.
module fp_regfile #(
  parameter int unsigned NUM_REGS   = 32,
  parameter int unsigned DATA_WIDTH = 64,
  parameter int unsigned NUM_RD     = 4,
  localparam int unsigned AW        = $clog2(NUM_REGS)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [AW-1:0]         raddr_i [NUM_RD],
  output logic [DATA_WIDTH-1:0] rdata_o [NUM_RD],
  input  logic                  we_i,
  input  logic [AW-1:0]         waddr_i,
  input  logic [DATA_WIDTH-1:0] wdata_i
);

  logic [DATA_WIDTH-1:0] mem_q [NUM_REGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < NUM_REGS; r++) mem_q[r] <= '0;
    end else if (we_i) begin
      mem_q[waddr_i] <= wdata_i;
    end
  end

  for (genvar p = 0; p < NUM_RD; p++) begin : g_rd
    assign rdata_o[p] = mem_q[raddr_i[p]];
  end

endmodule
