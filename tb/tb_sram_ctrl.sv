// tb_sram_ctrl: checks the SRAM controller's port sharing. With the core
// idle, host reads and writes must reach exactly one bank of the selected
// buffer (bank = addr[3:0], row = addr[14:4]) and host_rdata must return
// the selected bank's word one cycle later. With the core busy, the core's
// read and write requests must pass to the banks and the host be ignored.
module tb_sram_ctrl;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic core_busy = 0, host_en = 0, host_we = 0, host_sel = 0;
  logic [14:0] host_addr = '0;
  logic [63:0] host_wdata = '0, host_rdata;
  logic [15:0] a_rd_en = '0, a_wr_en = '0, w_rd_en = '0;
  logic [15:0][10:0] a_rd_addr = '0, a_wr_addr = '0, w_rd_addr = '0;
  logic [15:0][63:0] a_wr_data = '0;
  logic [15:0] a_en, a_we, w_en, w_we;
  logic [15:0][10:0] a_addr, w_addr;
  logic [15:0][63:0] a_wdata, w_wdata, a_rdata, w_rdata;
  int checks = 0, failures = 0;

  sram_ctrl dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int b = 0; b < 16; b++) begin
      a_rdata[b] = {32'hAAAA0000, 32'(b)};
      w_rdata[b] = {32'hBBBB0000, 32'(b)};
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int bank;
      bit rd_host;
      @(negedge clk);
      core_busy = ($urandom % 3) == 0;
      host_en = 1; host_we = $urandom % 2; host_sel = $urandom % 2;
      host_addr = 15'($urandom); host_wdata = {32'($urandom), 32'($urandom)};
      for (int b = 0; b < 16; b++) begin
        a_rd_en[b] = $urandom % 2; a_wr_en[b] = !a_rd_en[b] && ($urandom % 2);
        w_rd_en[b] = $urandom % 2;
        a_rd_addr[b] = 11'($urandom); a_wr_addr[b] = 11'($urandom); w_rd_addr[b] = 11'($urandom);
        a_wr_data[b] = {32'($urandom), 32'($urandom)};
      end
      #1;
      bank = host_addr % 16;
      rd_host = !core_busy && !host_we;
      for (int b = 0; b < 16; b++) begin
        if (core_busy) begin
          chk(a_en[b] == (a_rd_en[b] | a_wr_en[b]) && a_we[b] == a_wr_en[b], "core act en");
          if (a_wr_en[b]) chk(a_addr[b] == a_wr_addr[b] && a_wdata[b] == a_wr_data[b], "core act write");
          else if (a_rd_en[b]) chk(a_addr[b] == a_rd_addr[b], "core act read addr");
          chk(w_en[b] == w_rd_en[b] && !w_we[b], "core w en");
          if (w_rd_en[b]) chk(w_addr[b] == w_rd_addr[b], "core w addr");
        end else begin
          chk(a_en[b] == (!host_sel && b == bank), "host act en");
          chk(w_en[b] == (host_sel && b == bank), "host w en");
          if (b == bank) begin
            chk((host_sel ? w_we[b] : a_we[b]) == host_we, "host we");
            chk((host_sel ? w_addr[b] : a_addr[b]) == host_addr[14:4], "host row");
            chk((host_sel ? w_wdata[b] : a_wdata[b]) == host_wdata, "host wdata");
          end
        end
      end
      @(negedge clk);
      host_en = 0;
      if (rd_host) chk(host_rdata == (host_sel ? w_rdata[bank] : a_rdata[bank]), "host rdata");
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
