// tb_fexp_decoder: checks the FEXP/VFEXP encodings of the extension,
//   FEXP  = 001111100000{rs1}000{rd}1010011
//   VFEXP = 101111100000{rs1}000{rd}1010011
// for random rd/rs1 (fields, vector bit), and that flipping any single fixed
// bit other than bit 31 makes the word no longer an EXP instruction.
module tb_fexp_decoder;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  logic        is_exp, vec;
  logic [4:0]  rd, rs1, rs2, rs3;

  fexp_decoder dut (.instr_i(instr), .is_exp_o(is_exp), .vectorial_o(vec),
                    .rd_o(rd), .rs1_o(rs1), .rs2_o(rs2), .rs3_o(rs3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      automatic logic [4:0] a = 5'($urandom), b = 5'($urandom);
      automatic logic v = 1'($urandom);
      instr = {v, 11'b01111100000, b, 3'b000, a, 7'b1010011};
      #1;
      checks++;
      if (!is_exp || vec !== v || rd !== a || rs1 !== b) begin
        failures++;
        $display("FAIL decode %h", instr);
      end
      // fixed bits: 30:20, 14:12, 6:0
      for (int bit_i = 0; bit_i < 31; bit_i++) begin
        if ((bit_i >= 20) || (bit_i >= 12 && bit_i <= 14) || bit_i <= 6) begin
          automatic logic [31:0] w = instr;
          w[bit_i] = ~w[bit_i];
          instr = w;
          #1;
          checks++;
          if (is_exp) begin failures++; $display("FAIL accepts %h", w); end
          w[bit_i] = ~w[bit_i];
          instr = w;
        end
      end
    end
    // a plain fadd.s is not EXP, fields still extracted
    instr = 32'h00b57553; #1;
    checks++;
    if (is_exp || rs1 !== 5'd10 || rs2 !== 5'd11 || rd !== 5'd10) begin
      failures++; $display("FAIL fadd");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
