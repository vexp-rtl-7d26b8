// tb_exps_stage: exhaustive check of the Schraudolph stage over all 65536
// BF16 inputs. For ordinary inputs the 15-bit result I must lie within one
// LSB of (x*log2(e) + 127) * 128, computed in real arithmetic (one LSB of
// rounding; the one's complement of negative values costs one more LSB, so
// the reference for x < 0 is shifted down by one). Its sign bit must be 0.
// Overflow, infinity, NaN and flush-to-zero inputs are checked exactly.
module tb_exps_stage;
  import tb_vexp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [15:0] x, y;

  exps_stage dut (.x_i(x), .exps_o(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      real xr, ref_i, d;
      int e;
      x = 16'(i);
      #1;
      e = int'(x[14:7]);
      checks++;
      if (e >= 133) begin
        if (y !== (x[15] ? 16'h0000 : 16'h7F80)) begin
          failures++;
          if (failures < 10) $display("FAIL overflow x=%h y=%h", x, y);
        end
      end else if (e == 0) begin
        if (y !== 16'h3F80) begin
          failures++;
          if (failures < 10) $display("FAIL flush x=%h y=%h", x, y);
        end
      end else begin
        xr    = bf16_to_real(x) * 1.4426950408889634;
        ref_i = (xr + 127.0) * 128.0 - (x[15] ? 1.0 : 0.0);
        d     = real'(y[14:0]) - ref_i;
        if (y[15] !== 1'b0 || d > 1.0 || d < -1.0) begin
          failures++;
          if (failures < 10) $display("FAIL x=%h y=%h ref=%f", x, y, ref_i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
