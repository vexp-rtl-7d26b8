// tb_fp_regfile: 32 x 64-bit register file. Checks reset to zero, random
// writes against a shadow array on all four read ports, that a write is seen
// from the next cycle (same-cycle read returns the old value), and that a
// cycle without write enable changes nothing.
module tb_fp_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]  raddr [4];
  logic [63:0] rdata [4];
  logic        we;
  logic [4:0]  waddr;
  logic [63:0] wdata;
  logic [63:0] shadow [32];

  fp_regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata),
                  .we_i(we), .waddr_i(waddr), .wdata_i(wdata));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int p = 0; p < 4; p++) raddr[p] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      shadow[r] = '0;
      raddr[0] = 5'(r); #1;
      checks++; if (rdata[0] !== 64'd0) failures++;
    end
    for (int i = 0; i < 2000; i++) begin
      we    = $urandom_range(0, 1);
      waddr = 5'($urandom);
      wdata = {$urandom, $urandom};
      for (int p = 0; p < 4; p++) raddr[p] = (p == 0) ? waddr : 5'($urandom);
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rdata[p] !== shadow[raddr[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d reg %0d", p, raddr[p]);
        end
      end
      @(negedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
