// tb_exp_opgroup: the EXP operation group at its defaults (64 bits, four
// lanes, one pipeline level). Random packed-BF16 operands are sent in vector
// and scalar mode with random input gaps and random output stalls; every
// result is compared in order with the reference (four exp_ref values, or
// lane 0 plus all-ones upper bits in scalar mode) and its tag.
// Timing checks: with the output always ready, a burst of 64 back-to-back
// operations is accepted in 64 consecutive cycles and each result appears
// exactly one cycle after its operand (latency 1 cycle in the group,
// 4 exponentials per cycle).
module tb_exp_opgroup;
  import tb_vexp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, vec_i, out_valid, out_ready, vec_o, busy;
  logic [63:0] op, res;
  logic [4:0]  tag_i, tag_o;

  exp_opgroup dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .operand_i(op), .vectorial_i(vec_i), .tag_i(tag_i), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .result_o(res), .tag_o(tag_o), .vectorial_o(vec_o),
    .busy_o(busy));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected-result queue
  logic [63:0] exp_q[$];
  logic [4:0]  tag_q[$];
  longint      t_acc[$];
  longint      cyc = 0;
  bit          timing_mode = 0;
  int          n_out = 0;

  always @(posedge clk) cyc++;

  function automatic logic [15:0] rand_bf16();
    // mostly |x| < 16 (softmax range after max subtraction), some specials
    logic [15:0] v;
    int r = $urandom_range(0, 19);
    v = 16'($urandom);
    if (r < 16) v[14:7] = 8'($urandom_range(110, 130));
    return v;
  endfunction

  function automatic logic [63:0] expect_of(logic [63:0] o, logic v);
    logic [63:0] e;
    for (int l = 0; l < 4; l++) e[16*l +: 16] = exp_ref(o[16*l +: 16]);
    if (!v) e[63:16] = '1;
    return e;
  endfunction

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      exp_q.push_back(expect_of(op, vec_i));
      tag_q.push_back(tag_i);
      t_acc.push_back(cyc);
    end
    if (out_valid && out_ready) begin
      logic [63:0] e; logic [4:0] t; longint ta;
      e = exp_q.pop_front(); t = tag_q.pop_front(); ta = t_acc.pop_front();
      checks++;
      if (res !== e || tag_o !== t) begin
        failures++;
        if (failures < 10) $display("FAIL res=%h exp=%h tag=%0d/%0d", res, e, tag_o, t);
      end
      if (timing_mode) begin
        checks++;
        if (cyc - ta != 1) begin
          failures++;
          $display("FAIL latency %0d", cyc - ta);
        end
      end
      n_out++;
    end
  end

  initial begin
    longint c0;
    in_valid = 0; out_ready = 1; op = '0; vec_i = 1; tag_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: back-to-back burst, output always ready
    timing_mode = 1;
    @(negedge clk);
    c0 = cyc;
    for (int i = 0; i < 64; i++) begin
      in_valid = 1; vec_i = (i % 5 != 0);
      op = {rand_bf16(), rand_bf16(), rand_bf16(), rand_bf16()};
      tag_i = 5'(i);
      checks++;
      if (!in_ready) begin failures++; $display("FAIL stall in burst"); end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (cyc - c0 != 64) begin failures++; $display("FAIL burst took %0d cycles", cyc - c0); end
    @(negedge clk);
    timing_mode = 0;
    // phase 2: random traffic with output stalls
    for (int i = 0; i < 3000; i++) begin
      in_valid  = ($urandom_range(0, 3) != 0);
      vec_i     = $urandom_range(0, 1);
      op        = {rand_bf16(), rand_bf16(), rand_bf16(), rand_bf16()};
      tag_i     = 5'($urandom);
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      while (in_valid && !in_ready) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || busy) begin failures++; $display("FAIL leftover %0d", exp_q.size()); end
    $display("results %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
