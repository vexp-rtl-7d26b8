// tb_fpu_vexp: the extended FPU with the behavioural model of the other
// operation groups on its ext_* port. Random requests go to either group;
// results are checked per tag against expected values (exp_ref for EXP, the
// model's own arithmetic for the others), since the two groups may complete
// out of order. Checks: every request returns exactly once with the right
// value and tag; an uncontended EXP result with the output ready arrives one
// cycle after its request; when both groups offer a result, the one not
// served last is granted (round-robin); contention, output stalls, EXP and
// other results all occur.
module tb_fpu_vexp;
  import vexp_pkg::*;
  import tb_vexp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, vec, out_valid, out_ready, busy;
  logic [63:0] ops [3];
  opgroup_e    grp;
  logic [31:0] instr;
  logic [4:0]  tag, tag_o;
  logic [63:0] res;
  logic        x_in_valid, x_in_ready, x_out_valid, x_out_ready;
  logic [63:0] x_ops [3];
  logic [31:0] x_instr;
  logic [4:0]  x_tag, x_tag_o;
  logic [63:0] x_res;

  fpu_vexp dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .operands_i(ops), .op_group_i(grp), .vectorial_i(vec), .instr_i(instr),
    .tag_i(tag), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .result_o(res), .tag_o(tag_o), .busy_o(busy),
    .ext_in_valid_o(x_in_valid), .ext_in_ready_i(x_in_ready),
    .ext_operands_o(x_ops), .ext_instr_o(x_instr), .ext_tag_o(x_tag),
    .ext_out_valid_i(x_out_valid), .ext_out_ready_o(x_out_ready),
    .ext_result_i(x_res), .ext_tag_i(x_tag_o));

  beh_fpu_ext_groups #(.LATENCY(2), .STALL_PCT(20)) u_ext (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(x_in_valid), .in_ready_o(x_in_ready),
    .operands_i(x_ops), .instr_i(x_instr), .tag_i(x_tag),
    .out_valid_o(x_out_valid), .out_ready_i(x_out_ready),
    .result_o(x_res), .tag_o(x_tag_o));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] expected [32];
  bit          inflight [32];
  longint      t_issue  [32];
  bit          is_exp_t [32];
  longint      cyc = 0;
  int n_contend = 0, n_exp = 0, n_ext = 0, n_stall = 0, n_onecycle = 0;
  bit last_ext = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (dut.exp_out_valid && x_out_valid && out_ready) begin
      n_contend++;
      checks++;
      if (x_out_ready == last_ext) begin
        failures++; $display("FAIL round robin at %0d", cyc);
      end
    end
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      checks++;
      if (!inflight[tag_o] || res !== expected[tag_o]) begin
        failures++;
        if (failures < 10) $display("FAIL tag %0d res=%h exp=%h", tag_o, res, expected[tag_o]);
      end
      if (is_exp_t[tag_o]) begin
        n_exp++;
        if (cyc - t_issue[tag_o] == 1) n_onecycle++;
      end else n_ext++;
      inflight[tag_o] = 0;
      last_ext = x_out_ready;
    end
    if (in_valid && in_ready) begin
      inflight[tag] = 1;
      t_issue[tag]  = cyc;
      is_exp_t[tag] = (grp == OPGRP_EXP);
      if (grp == OPGRP_EXP) begin
        for (int l = 0; l < 4; l++) expected[tag][16*l +: 16] = exp_ref(ops[0][16*l +: 16]);
        if (!vec) expected[tag][63:16] = '1;
      end else begin
        expected[tag] = u_ext.compute(instr, ops[0], ops[1]);
      end
    end
  end

  function automatic logic [15:0] rnd();
    return {1'($urandom), 8'($urandom_range(115, 131)), 7'($urandom)};
  endfunction

  initial begin
    int t;
    in_valid = 0; out_ready = 1; vec = 1; grp = OPGRP_EXP; instr = '0; tag = '0;
    for (int i = 0; i < 3; i++) ops[i] = '0;
    for (int i = 0; i < 32; i++) inflight[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // single uncontended EXP: one-cycle check
    @(negedge clk);
    in_valid = 1; grp = OPGRP_EXP; tag = 5'd1; ops[0] = {rnd(), rnd(), rnd(), rnd()};
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(out_valid && tag_o == 5'd1)) begin failures++; $display("FAIL exp latency"); end
    @(negedge clk);
    // forced contention: other-group request, then EXP request
    for (int r = 0; r < 4; r++) begin
      in_valid = 1; grp = OPGRP_EXT; tag = 5'(2 + 2*r); instr = {7'b0000010, 18'd0, 7'b1010011};
      #1; while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 1; grp = OPGRP_EXP; tag = 5'(3 + 2*r); vec = 1;
      #1; while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0;
      repeat (4) @(negedge clk);
    end
    for (int i = 0; i < 4000; i++) begin
      // pick a free tag
      t = -1;
      for (int k = 0; k < 32; k++) begin
        automatic int c = (k + i) % 32;
        if (!inflight[c] && t < 0) t = c;
      end
      in_valid  = (t >= 0) && ($urandom_range(0, 3) != 0);
      tag       = 5'(t < 0 ? 0 : t);
      grp       = $urandom_range(0, 1) ? OPGRP_EXP : OPGRP_EXT;
      vec       = $urandom_range(0, 1);
      instr     = {7'(($urandom_range(0, 3) * 4) + 2), 18'($urandom), 7'b1010011};
      for (int k = 0; k < 3; k++) ops[k] = {rnd(), rnd(), rnd(), rnd()};
      out_ready = ($urandom_range(0, 4) != 0);
      #1;
      while (in_valid && !in_ready) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 4) != 0);
        #1;
      end
      @(negedge clk);
      in_valid = 0;
    end
    in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    for (int k = 0; k < 32; k++) begin
      checks++;
      if (inflight[k]) begin failures++; $display("FAIL tag %0d never returned", k); end
    end
    $display("exp=%0d ext=%0d contended=%0d stalls=%0d exp_1cycle=%0d",
             n_exp, n_ext, n_contend, n_stall, n_onecycle);
    checks++; if (n_contend == 0 || n_exp == 0 || n_ext == 0 || n_stall == 0 || n_onecycle == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
