// tb_banked_sram: random reads and writes on all banks of the banked SRAM
// (depth reduced to 64 rows), compared with a reference array; checks the
// one-cycle read latency and that read data holds while a bank is idle.
module tb_banked_sram;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [15:0] en = '0, we = '0;
  logic [15:0][5:0] addr = '0;
  logic [15:0][63:0] wdata = '0, rdata;
  logic [63:0] ref_mem [16][64];
  logic [63:0] exp_rd [16];
  int checks = 0, failures = 0;

  banked_sram #(.DEPTH(64)) dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  initial begin
    // fill
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      en = '1; we = '1;
      for (int b = 0; b < 16; b++) begin
        addr[b] = 6'(r); wdata[b] = {32'($urandom), 32'($urandom)}; ref_mem[b][r] = wdata[b];
      end
    end
    for (int b = 0; b < 16; b++) exp_rd[b] = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        en[b] = $urandom % 2; we[b] = $urandom % 3 == 0;
        addr[b] = 6'($urandom); wdata[b] = {32'($urandom), 32'($urandom)};
      end
      @(posedge clk);
      for (int b = 0; b < 16; b++)
        if (en[b]) begin
          if (we[b]) ref_mem[b][addr[b]] = wdata[b];
          else exp_rd[b] = ref_mem[b][addr[b]];
        end
      #1;
      if (n > 0)
        for (int b = 0; b < 16; b++)
          if (!(en[b] && we[b]) && (exp_rd[b] != '0)) begin
            checks++;
            if (rdata[b] != exp_rd[b]) begin
              failures++;
              if (failures < 10) $display("FAIL bank %0d", b);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
