// tb_inst_mem: writes random instructions into every entry of the
// instruction memory and reads them back in random order, checking the data
// and the one-cycle read latency (rdata holds between reads).
module tb_inst_mem;
  import bitwave_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we = 0, rd_en = 0;
  logic [7:0] waddr = '0, raddr = '0;
  instr_t wdata = '0, rdata;
  instr_t ref_mem [256];
  int checks = 0, failures = 0;

  inst_mem dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .rd_en(rd_en), .raddr(raddr), .rdata(rdata));

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a);
      for (int i = 0; i < $bits(instr_t); i += 32) wdata[i +: 32] = $urandom;
      ref_mem[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 600; n++) begin
      int a;
      a = $urandom % 256;
      rd_en = 1; raddr = 8'(a);
      @(negedge clk);
      rd_en = 0;
      raddr = 8'($urandom);
      checks++;
      if (rdata != ref_mem[a]) failures++;
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[a]) failures++;   // holds without rd_en
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
