// tb_exp_unit: one ExpUnit lane at its default of one pipeline register.
// All 65536 BF16 inputs are fed back to back, one per cycle; each result is
// expected one cycle later. Checks: bit-exact agreement with the reference
// function; for ordinary inputs with a normal result, relative error against
// the real exp(x) at most 1.4 % and mean relative error at most 0.25 %;
// exact specials (exp(0)=1, overflow -> +inf, large negative -> +0); and that
// a low enable holds the register.
module tb_exp_unit;
  import tb_vexp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  logic [0:0] en;
  logic [15:0] x, y;

  always #5 clk = ~clk;

  exp_unit dut (.clk_i(clk), .en_i(en), .x_i(x), .exp_o(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [15:0] got, logic [15:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp_v);
    end
  endtask

  initial begin
    real sum_err = 0.0, max_err = 0.0, e;
    int n = 0;
    logic [15:0] prev;
    en = 1'b1;
    x  = 16'h0;
    @(negedge clk);
    for (int i = 0; i < 65536; i++) begin
      prev = x;
      x = 16'(i);
      #1;
      // before the clock edge the register still holds the previous result
      if (i > 0) check("latency", y, exp_ref(prev));
      @(negedge clk);
      check("bitexact", y, exp_ref(x));
      prev = x;
      if (prev[14:7] != 0 && prev[14:7] < 133 && bf16_to_real(y) > 1.2e-38
          && y != 16'h7F80) begin
        e = rel_err(prev, y);
        sum_err += e; n++;
        if (e > max_err) max_err = e;
      end
    end
    $display("mean rel err %f %%, max %f %% over %0d inputs",
             100.0 * sum_err / n, 100.0 * max_err, n);
    checks++; if (max_err > 0.014) failures++;
    checks++; if (sum_err / n > 0.0025) failures++;
    // specials
    x = 16'h0000; @(negedge clk); check("exp(0)",   y, 16'h3F80);
    x = 16'h8000; @(negedge clk); check("exp(-0)",  y, 16'h3F80);
    x = 16'h4280; @(negedge clk); check("exp(64)",  y, 16'h7F80);
    x = 16'hC280; @(negedge clk); check("exp(-64)", y, 16'h0000);
    x = 16'h7F80; @(negedge clk); check("exp(inf)", y, 16'h7F80);
    x = 16'hFF80; @(negedge clk); check("exp(-inf)",y, 16'h0000);
    x = 16'h3F80; @(negedge clk); check("exp(1)",   y, real_to_bf16_close(16'h3F80, y));
    // hold
    en = 1'b0; prev = y; x = 16'h4000;
    @(negedge clk); check("hold", y, prev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exp(1) = 2.71828: accept the result if within 1.4 % (returns y itself)
  function automatic logic [15:0] real_to_bf16_close(logic [15:0] xin, logic [15:0] yv);
    return (rel_err(xin, yv) < 0.014) ? yv : ~yv;
  endfunction
endmodule
