// tb_softmax_workload: runs the optimised Softmax kernel on one row per
// sequence length N = 32, 64, ..., 2048 through the FP subsystem at its
// default parameters, with the behavioural model of the other FPU groups.
//
// The kernel follows the three loops of the optimised code:
//   MAX  : vfmax.h into four accumulators f3..f6 over the row, 16 elements
//          per iteration;
//   EXP  : per 8 elements, vfsub.h f3/f4 = x - max, vfexp.h f3/f4,
//          vfsgnj.h to the output stream register f2, vfadd.h into the sum
//          accumulators f5/f6;
//   NORM : vfmul.h f9 = (1/sum) * x per 4 elements.
// The testbench plays the parts outside this design: it pushes the input
// stream into f0/f1 through the load port just before each instruction that
// reads them (as a stream register would), collects the output stream from
// the register-file writes to f2 and f9, and does the short scalar steps
// between loops (horizontal max and sum of the four lanes, 1/sum).
// Checks per row: N/4 VFEXP instructions issued; every output within
// 3 % + 1e-4 of the exact softmax; outputs sum to 1 within 3 %.
// Reported: cycles of the EXP loop and of the whole row per output.
module tb_softmax_workload;
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

  beh_fpu_ext_groups #(.LATENCY(2), .DEPTH(4)) u_ext (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(x_in_valid), .in_ready_o(x_in_ready),
    .operands_i(x_ops), .instr_i(x_instr), .tag_i(x_tag),
    .out_valid_o(x_out_valid), .out_ready_i(x_out_ready),
    .result_o(x_res), .tag_o(x_tag_o));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [6:0] ADD = 7'b0000010, SUB = 7'b0000110, MUL = 7'b0001010,
                         MAX = 7'b0010110, SGNJ = 7'b0010010;

  function automatic logic [31:0] op(logic [6:0] f7, int rd, int rs1, int rs2);
    return {f7, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1010011};
  endfunction
  function automatic logic [31:0] vfexp(int rd, int rs1);
    return {1'b1, 11'b01111100000, 5'(rs1), 3'b000, 5'(rd), 7'b1010011};
  endfunction

  // output streams
  fp_word_t out_q [$];
  fp_word_t f9_q  [$];
  int       n_vfexp = 0;
  longint   cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.rf_we && !ld_valid) begin
      if (dut.rf_waddr == 5'd2) out_q.push_back(dut.rf_wdata);
      if (dut.rf_waddr == 5'd9) f9_q.push_back(dut.rf_wdata);
    end
    if (rst_n && acc_valid && acc_ready && acc_instr == vfexp(3, 3)) n_vfexp++;
    if (rst_n && acc_valid && acc_ready && acc_instr == vfexp(4, 4)) n_vfexp++;
  end

  task automatic issue(logic [31:0] ins);
    acc_valid = 1; acc_instr = ins;
    #1;
    while (!acc_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    acc_valid = 0;
  endtask

  // stream a word into register r (the load port write takes one cycle)
  task automatic push(int r, fp_word_t d);
    ld_valid = 1; ld_addr = 5'(r); ld_data = d;
    @(negedge clk);
    ld_valid = 0;
  endtask

  task automatic wait_idle();
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic fp_word_t bcast(logic [15:0] v);
    return {v, v, v, v};
  endfunction

  task automatic run_row(int n);
    logic [15:0] x [];
    fp_word_t    w [];
    real         xr [], mx, sum, ref_v, got, tot;
    logic [15:0] hmax, hsum, inv;
    longint      c0, c1, c2;
    int          nw, bad;
    x = new[n]; xr = new[n];
    nw = n / 4;
    w = new[nw];
    for (int i = 0; i < n; i++) begin
      // attention scores in [-8, 8)
      x[i]  = real_to_bf16(($urandom_range(0, 16383) / 1024.0) - 8.0);
      xr[i] = bf16_to_real(x[i]);
    end
    for (int i = 0; i < nw; i++) w[i] = {x[4*i+3], x[4*i+2], x[4*i+1], x[4*i]};
    out_q.delete(); f9_q.delete(); n_vfexp = 0;
    c0 = cyc;
    // ---- MAX loop: accumulators f3..f6 start from the first word
    for (int a = 3; a <= 6; a++) push(a, w[0]);
    for (int i = 0; i < nw; i++) begin
      push(0, w[i]);
      issue(op(MAX, 3 + (i % 4), 3 + (i % 4), 0));
    end
    wait_idle();
    hmax = 16'hFF80;
    for (int a = 3; a <= 6; a++) begin
      st_addr = 5'(a); #1;
      for (int l = 0; l < 4; l++)
        if (bf16_to_real(st_data[16*l +: 16]) > bf16_to_real(hmax)) hmax = st_data[16*l +: 16];
    end
    push(7, bcast(hmax));
    push(5, '0); push(6, '0);
    // ---- EXP loop
    c1 = cyc;
    for (int i = 0; i < nw; i += 2) begin
      push(1, w[i]);   issue(op(SUB, 3, 1, 7));
      push(1, w[i+1]); issue(op(SUB, 4, 1, 7));
      issue(vfexp(3, 3));
      issue(vfexp(4, 4));
      issue(op(SGNJ, 2, 3, 3));
      issue(op(SGNJ, 2, 4, 4));
      issue(op(ADD, 5, 5, 3));
      issue(op(ADD, 6, 6, 4));
    end
    wait_idle();
    c2 = cyc;
    // horizontal sum and reciprocal (scalar code)
    sum = 0.0;
    for (int a = 5; a <= 6; a++) begin
      st_addr = 5'(a); #1;
      for (int l = 0; l < 4; l++) sum += bf16_to_real(st_data[16*l +: 16]);
    end
    hsum = real_to_bf16(sum);
    inv  = real_to_bf16(1.0 / bf16_to_real(hsum));
    push(8, bcast(inv));
    // ---- NORM loop over the exponentials
    checks++;
    if (out_q.size() != nw) begin failures++; $display("FAIL N=%0d: %0d exp words", n, out_q.size()); end
    for (int i = 0; i < nw && i < out_q.size(); i++) begin
      push(0, out_q[i]);
      issue(op(MUL, 9, 8, 0));
    end
    wait_idle();
    // ---- check
    mx = xr[0];
    for (int i = 1; i < n; i++) if (xr[i] > mx) mx = xr[i];
    sum = 0.0;
    for (int i = 0; i < n; i++) sum += $exp(xr[i] - mx);
    bad = 0; tot = 0.0;
    checks++;
    if (f9_q.size() != nw) begin failures++; $display("FAIL N=%0d: %0d outputs", n, f9_q.size()); end
    for (int i = 0; i < n && i / 4 < f9_q.size(); i++) begin
      ref_v = $exp(xr[i] - mx) / sum;
      got   = bf16_to_real(f9_q[i / 4][16*(i % 4) +: 16]);
      tot  += got;
      checks++;
      if (got - ref_v > 0.03 * ref_v + 1e-4 || ref_v - got > 0.03 * ref_v + 1e-4) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL N=%0d y[%0d]=%g ref=%g", n, i, got, ref_v);
      end
    end
    checks++;
    if (tot > 1.03 || tot < 0.97) begin failures++; $display("FAIL N=%0d sum %g", n, tot); end
    checks++;
    if (n_vfexp != nw) begin failures++; $display("FAIL N=%0d: %0d VFEXP", n, n_vfexp); end
    $display("N=%0d: %0d VFEXP, EXP loop %0d cycles (%.3f cycles/output), row %0d cycles (%.3f cycles/output), sum of outputs %f",
             n, n_vfexp, c2 - c1, real'(c2 - c1) / n, cyc - c0, real'(cyc - c0) / n, tot);
  endtask

  initial begin
    acc_valid = 0; acc_instr = '0; ld_valid = 0; ld_addr = '0; ld_data = '0; st_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 32; n <= 2048; n *= 2) run_row(n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
