// tb_data_fetcher: checks the address generation and line assembly of the
// fetcher against a model of the two 16-bank SRAMs kept in the testbench
// (bank word = {tag, bank, row}, read with one cycle of latency).
//  - activation lines for SU1-SU6 with random base and conflict-free
//    channel strides: segment i must be the word at base + cg*stride_c +
//    ox*stride_x (cg = i mod Cu/8, ox = i div Cu/8);
//  - index lines: the 16 banks of one row in bank order;
//  - weight lines: line L of an SU with nb banks per line comes from banks
//    (L mod 16/nb)*nb .. +nb-1 of row L div (16/nb), upper bits zero.
module tb_data_fetcher;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  su_e su = SU1;
  logic act_req = 0, idx_req = 0, w_req = 0;
  logic [14:0] act_addr = '0, stride_c = '0;
  logic [3:0] stride_x = 4'd1;
  logic [10:0] idx_row = '0;
  logic [14:0] w_line_addr = '0;
  logic [15:0] a_rd_en, w_rd_en;
  logic [15:0][10:0] a_rd_addr, w_rd_addr;
  logic [15:0][63:0] a_rdata, w_rdata;
  logic [1023:0] act_line, idx_line, w_line;
  logic act_valid, idx_valid, w_valid;
  int checks = 0, failures = 0;
  int cu_t [6] = '{8, 16, 32, 8, 16, 32};
  int ox_t [6] = '{16, 8, 4, 1, 1, 1};
  int ku_t [6] = '{32, 32, 32, 128, 64, 32};

  data_fetcher dut (.clk(clk), .rst_n(rst_n), .su(su), .act_req(act_req), .act_addr(act_addr),
                    .stride_c(stride_c), .stride_x(stride_x), .idx_req(idx_req), .idx_row(idx_row),
                    .w_req(w_req), .w_line_addr(w_line_addr), .a_rd_en(a_rd_en),
                    .a_rd_addr(a_rd_addr), .w_rd_en(w_rd_en), .w_rd_addr(w_rd_addr),
                    .a_rdata(a_rdata), .w_rdata(w_rdata), .act_line(act_line),
                    .act_valid(act_valid), .idx_line(idx_line), .idx_valid(idx_valid),
                    .w_line(w_line), .w_valid(w_valid));

  function automatic logic [63:0] aword(int bank, int row);
    return {16'hA0A0, 16'(bank), 32'(row)};
  endfunction
  function automatic logic [63:0] wword(int bank, int row);
    return {16'hB0B0, 16'(bank), 32'(row)};
  endfunction

  // SRAM model: registered read data
  always_ff @(posedge clk)
    for (int b = 0; b < 16; b++) begin
      if (a_rd_en[b]) a_rdata[b] <= aword(b, int'(a_rd_addr[b]));
      if (w_rd_en[b]) w_rdata[b] <= wword(b, int'(w_rd_addr[b]));
    end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++)
      for (int rep = 0; rep < 20; rep++) begin
        int cug, oxu, nseg, nb, lpr, base, L;
        cug = cu_t[s] / 8; oxu = ox_t[s]; nseg = oxu * cug; nb = cu_t[s] * ku_t[s] / 64; lpr = 16 / nb;
        su = su_e'(s);
        // activation line
        @(negedge clk);
        base = $urandom % 20000;
        act_addr = 15'(base);
        stride_c = 15'(16 * ($urandom % 30) + ((cug == 1) ? ($urandom % 16) : (16 / cug)));
        if (oxu == 1) stride_c = 15'(16 * ($urandom % 30) + 4 / cug * 2 + 1);
        stride_x = 4'd1;
        act_req = 1;
        @(negedge clk);
        act_req = 0;
        chk(act_valid, "act_valid");
        for (int i = 0; i < 16; i++) begin
          int a;
          a = base + (i % cug) * int'(stride_c) + (i / cug);
          if (i < nseg) chk(act_line[i*64 +: 64] == aword(a % 16, (a / 16) % 2048),
                            $sformatf("su%0d act seg %0d", s + 1, i));
          else          chk(act_line[i*64 +: 64] == '0, "unused act segment zero");
        end
        // index line
        idx_row = 11'($urandom);
        idx_req = 1;
        @(negedge clk);
        idx_req = 0;
        chk(idx_valid && !act_valid, "idx_valid");
        for (int i = 0; i < 16; i++) chk(idx_line[i*64 +: 64] == aword(i, int'(idx_row)), "idx seg");
        // weight line
        L = $urandom % (2048 * lpr);
        w_line_addr = 15'(L);
        w_req = 1;
        @(negedge clk);
        w_req = 0;
        chk(w_valid, "w_valid");
        for (int i = 0; i < 16; i++)
          if (i < nb) chk(w_line[i*64 +: 64] == wword((L % lpr) * nb + i, L / lpr),
                          $sformatf("su%0d w seg %0d", s + 1, i));
          else        chk(w_line[i*64 +: 64] == '0, "unused w segment zero");
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
