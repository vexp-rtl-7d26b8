// tb_vexp_fpu_ss: end-to-end test of the FP subsystem at its default
// parameters. The other FPU groups are the behavioural model
// beh_fpu_ext_groups (latency 3, random input stalls).
//
// Sequence: registers are loaded through the load port; then
//  1. latency: VFEXP f1 <- f0 followed by a dependent VFEXP f2 <- f1 must
//     issue exactly two cycles apart;
//  2. throughput: 27 independent VFEXPs must issue in 27 consecutive cycles
//     (4 BF16 exponentials per cycle);
//  3. a random program of FEXP, VFEXP and packed add/sub/mul/max on
//     f0..f27, with loads into f28..f31 at random times.
// Each accepted instruction updates an architectural model of the register
// file in program order (exp_ref for EXP); at the end every register is read
// back through the store port and compared, and every FPU write-back is
// compared with the value predicted when its instruction issued.
// Mechanisms counted, each must occur at least once: scalar FEXP, vector
// VFEXP, back-to-back EXP issue, scoreboard stall, write-back conflict with a
// load, output arbitration between EXP and other groups, back-pressure from
// the other groups, overflow (+inf / 0) inputs, flush-to-zero inputs.
module tb_vexp_fpu_ss;
  import vexp_pkg::*;
  import tb_vexp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        acc_valid, acc_ready;
  logic [31:0] acc_instr;
  logic        ld_valid;
  fp_reg_t     ld_addr, st_addr;
  fp_word_t    ld_data, st_data;
  logic        x_in_valid, x_in_ready, x_out_valid, x_out_ready;
  fp_word_t    x_ops [3];
  logic [31:0] x_instr;
  fp_reg_t     x_tag, x_tag_o;
  fp_word_t    x_res;
  logic        busy;

  vexp_fpu_ss dut (
    .clk_i(clk), .rst_ni(rst_n),
    .acc_valid_i(acc_valid), .acc_ready_o(acc_ready), .acc_instr_i(acc_instr),
    .ld_valid_i(ld_valid), .ld_addr_i(ld_addr), .ld_data_i(ld_data),
    .st_addr_i(st_addr), .st_data_o(st_data),
    .ext_in_valid_o(x_in_valid), .ext_in_ready_i(x_in_ready),
    .ext_operands_o(x_ops), .ext_instr_o(x_instr), .ext_tag_o(x_tag),
    .ext_out_valid_i(x_out_valid), .ext_out_ready_o(x_out_ready),
    .ext_result_i(x_res), .ext_tag_i(x_tag_o), .busy_o(busy));

  beh_fpu_ext_groups #(.LATENCY(3), .STALL_PCT(15)) u_ext (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(x_in_valid), .in_ready_o(x_in_ready),
    .operands_i(x_ops), .instr_i(x_instr), .tag_i(x_tag),
    .out_valid_o(x_out_valid), .out_ready_i(x_out_ready),
    .result_o(x_res), .tag_o(x_tag_o));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  fp_word_t arch [32];
  fp_word_t wb_expect [32];
  longint   cyc = 0;
  longint   last_issue = -10;
  bit       last_was_exp = 0;
  int n_fexp = 0, n_vfexp = 0, n_b2b = 0, n_sb_stall = 0, n_wb_conf = 0,
      n_arb = 0, n_ext_bp = 0, n_ovf = 0, n_ftz = 0, n_ext = 0;

  always @(posedge clk) cyc++;

  function automatic logic [31:0] enc_exp(bit v, int rd, int rs1);
    return {v, 11'b01111100000, 5'(rs1), 3'b000, 5'(rd), 7'b1010011};
  endfunction
  function automatic logic [31:0] enc_ext(logic [6:0] f7, int rd, int rs1, int rs2);
    return {f7, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1010011};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (acc_valid && !acc_ready && dut.hazard) n_sb_stall++;
    if (ld_valid && dut.fpu_out_valid) n_wb_conf++;
    if (dut.u_fpu.exp_out_valid && x_out_valid) n_arb++;
    if (x_in_valid && !x_in_ready) n_ext_bp++;
    // every FPU write-back must carry the value predicted at its issue
    if (dut.wb_fpu) begin
      checks++;
      if (dut.fpu_result !== wb_expect[dut.fpu_tag]) begin
        failures++;
        if (failures < 10) $display("FAIL write-back at %0d: f%0d = %h, expected %h", cyc,
                                    dut.fpu_tag, dut.fpu_result, wb_expect[dut.fpu_tag]);
      end
    end
    if (acc_valid && acc_ready) begin
      logic     ise;
      int       rd, rs1, rs2, nl;
      fp_word_t a, r;
      ise = (acc_instr[30:20] == 11'b01111100000) &&
            (acc_instr[14:12] == 3'b000) && (acc_instr[6:0] == 7'b1010011);
      rd  = int'(acc_instr[11:7]);
      rs1 = int'(acc_instr[19:15]);
      rs2 = int'(acc_instr[24:20]);
      a   = arch[rs1];
      if (ise) begin
        nl = acc_instr[31] ? 4 : 1;
        for (int l = 0; l < 4; l++) r[16*l +: 16] = exp_ref(a[16*l +: 16]);
        if (!acc_instr[31]) r[63:16] = '1;
        for (int l = 0; l < nl; l++) begin
          if (a[16*l+7 +: 8] >= 8'd133) n_ovf++;
          if (a[16*l+7 +: 8] == 8'd0)   n_ftz++;
        end
        if (acc_instr[31]) n_vfexp++; else n_fexp++;
        if (last_was_exp && last_issue == cyc - 1) n_b2b++;
      end else begin
        r = u_ext.compute(acc_instr, a, arch[rs2]);
        n_ext++;
      end
      arch[rd] = r;
      wb_expect[rd] = r;
      last_issue   = cyc;
      last_was_exp = ise;
    end
    // a load written at this edge is seen by instructions from the next cycle
    if (ld_valid) arch[ld_addr] = ld_data;
  end

  function automatic logic [15:0] rnd_bf16();
    int k = $urandom_range(0, 39);
    if (k == 0) return {1'($urandom), 8'($urandom_range(133, 255)), 7'($urandom)};
    if (k == 1) return {1'($urandom), 8'd0, 7'($urandom)};
    return {1'($urandom), 8'($urandom_range(118, 130)), 7'($urandom)};
  endfunction

  task automatic send(logic [31:0] ins, output longint t);
    acc_valid = 1; acc_instr = ins;
    #1;
    while (!acc_ready) begin @(negedge clk); #1; end
    t = cyc;
    @(negedge clk);
    acc_valid = 0;
  endtask

  task automatic load(int r, fp_word_t d);
    ld_valid = 1; ld_addr = 5'(r); ld_data = d;
    @(negedge clk);
    ld_valid = 0;
  endtask

  initial begin
    longint t0, t1;
    acc_valid = 0; acc_instr = '0; ld_valid = 0; ld_addr = '0; ld_data = '0; st_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 32; r++)
      load(r, {rnd_bf16(), rnd_bf16(), rnd_bf16(), rnd_bf16()});

    // 1. latency of a dependent pair
    send(enc_exp(1, 1, 0), t0);
    send(enc_exp(1, 2, 1), t1);
    checks++;
    if (t1 - t0 != 2) begin failures++; $display("FAIL dependent issue distance %0d", t1 - t0); end
    repeat (4) @(negedge clk);

    // 2. throughput: 27 independent VFEXPs
    begin
      longint ts, te;
      send(enc_exp(1, 1, 28), ts);
      acc_valid = 1;
      for (int i = 2; i <= 27; i++) begin
        acc_instr = enc_exp(1, i, 28 + (i % 4));
        #1;
        checks++;
        if (!acc_ready) begin failures++; $display("FAIL stall in VFEXP burst at %0d", i); end
        @(negedge clk);
      end
      acc_valid = 0;
      te = cyc - 1;
      checks++;
      if (te - ts != 26) begin failures++; $display("FAIL burst of 27 took %0d cycles", te - ts + 1); end
    end
    repeat (4) @(negedge clk);

    // 3. random program with concurrent loads into f28..f31
    fork
      begin
        longint t;
        for (int i = 0; i < 3000; i++) begin
          automatic int k = $urandom_range(0, 9);
          automatic int rd = $urandom_range(0, 27), rs1 = $urandom_range(0, 31), rs2 = $urandom_range(0, 31);
          if (k < 4)      send(enc_exp(1, rd, rs1), t);
          else if (k < 6) send(enc_exp(0, rd, rs1), t);
          else            send(enc_ext(7'(($urandom_range(0, 3) * 4) + 2), rd, rs1, rs2), t);
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
      end
      begin
        for (int i = 0; i < 2000; i++) begin
          if ($urandom_range(0, 2) == 0)
            load($urandom_range(28, 31), {rnd_bf16(), rnd_bf16(), rnd_bf16(), rnd_bf16()});
          else
            @(negedge clk);
        end
      end
    join
    repeat (20) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end

    for (int r = 0; r < 32; r++) begin
      st_addr = 5'(r);
      #1;
      checks++;
      if (st_data !== arch[r]) begin
        failures++;
        $display("FAIL f%0d = %h, expected %h", r, st_data, arch[r]);
      end
    end

    $display("fexp=%0d vfexp=%0d ext=%0d b2b=%0d sb_stall=%0d wb_conflict=%0d arb=%0d ext_bp=%0d ovf=%0d ftz=%0d",
             n_fexp, n_vfexp, n_ext, n_b2b, n_sb_stall, n_wb_conf, n_arb, n_ext_bp, n_ovf, n_ftz);
    checks++; if (n_fexp == 0)     begin failures++; $display("FAIL no FEXP"); end
    checks++; if (n_vfexp == 0)    begin failures++; $display("FAIL no VFEXP"); end
    checks++; if (n_b2b == 0)      begin failures++; $display("FAIL no back-to-back"); end
    checks++; if (n_sb_stall == 0) begin failures++; $display("FAIL no scoreboard stall"); end
    checks++; if (n_wb_conf == 0)  begin failures++; $display("FAIL no write-back conflict"); end
    checks++; if (n_arb == 0)      begin failures++; $display("FAIL no arbitration"); end
    checks++; if (n_ext_bp == 0)   begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (n_ovf == 0)      begin failures++; $display("FAIL no overflow input"); end
    checks++; if (n_ftz == 0)      begin failures++; $display("FAIL no flush-to-zero input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
