// tb_zcip_array: test of the zero-column index parser array (128 parsers).
// Random index lines are loaded for each column size (8/16/32) and in dense
// mode. The testbench checks, from the index bytes alone: the sign request
// (any active index with MSB set), the sync count (largest number of set
// bits in bits 6..0 over the active parsers), the sign registers after a
// sign load (sign column or zero), and, column by column, each parser's
// shift (positions of the set bits, lowest first) and valid flag.
module tb_zcip_array;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load = 0, sign_load = 0, advance = 0, dense = 0;
  logic [127:0][7:0] idx_line = '0, sign_line = '0;
  colsize_e col = COL8;
  logic [3:0] prec = 4'd8;
  logic [7:0] n_active = 8'd128;
  logic [127:0][7:0] signs;
  logic [127:0][2:0] shift;
  logic [127:0] col_valid;
  logic [3:0] sync_cnt;
  logic any_sign_rqst;
  int checks = 0, failures = 0;

  zcip_array dut (.clk(clk), .rst_n(rst_n), .load(load), .idx_line(idx_line), .col(col),
                  .dense(dense), .prec(prec), .n_active(n_active), .sign_load(sign_load),
                  .sign_line(sign_line), .advance(advance), .signs(signs), .shift(shift),
                  .col_valid(col_valid), .sync_cnt(sync_cnt), .any_sign_rqst(any_sign_rqst));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic one_case(input colsize_e c, input bit dn, input int pr, input int na);
    int exp_sync, cols [128][7], ncol [128];
    bit exp_rqst, rq [128];
    @(negedge clk);
    for (int q = 0; q < 128; q++) begin
      int r;
      r = $urandom % 4;
      idx_line[q] = (r == 0) ? 8'($urandom) : (r == 1) ? 8'h00 : 8'($urandom & 8'h85);
      sign_line[q] = 8'($urandom);
    end
    col = c; dense = dn; prec = 4'(pr); n_active = 8'(na);
    load = 1;
    @(negedge clk);
    load = 0;
    exp_sync = 0; exp_rqst = 0;
    for (int p = 0; p < 128; p++) begin
      logic [7:0] ix;
      ix = idx_line[p >> int'(c)];
      if (dn) ix = 8'h80 | 8'((1 << (pr - 1)) - 1);
      rq[p] = ix[7];
      ncol[p] = 0;
      for (int b = 0; b < 7; b++) if (ix[b]) begin cols[p][ncol[p]] = b; ncol[p]++; end
      if (p < na) begin
        if (ncol[p] > exp_sync) exp_sync = ncol[p];
        exp_rqst |= ix[7];
      end
    end
    chk(sync_cnt == 4'(exp_sync), $sformatf("sync %0d exp %0d", sync_cnt, exp_sync));
    chk(any_sign_rqst == exp_rqst, "sign request");
    for (int p = 0; p < 128; p++) chk(signs[p] == 8'h00, "signs cleared on load");
    sign_load = 1;
    @(negedge clk);
    sign_load = 0;
    for (int p = 0; p < 128; p++)
      chk(signs[p] == (rq[p] ? sign_line[p] : 8'h00), $sformatf("signs p%0d", p));
    for (int n = 0; n < exp_sync; n++) begin
      for (int p = 0; p < 128; p++) begin
        chk(col_valid[p] == (n < ncol[p]), $sformatf("valid p%0d n%0d", p, n));
        if (n < ncol[p]) chk(shift[p] == 3'(cols[p][n]), $sformatf("shift p%0d n%0d", p, n));
      end
      advance = 1;
      @(negedge clk);
      advance = 0;
    end
    for (int p = 0; p < na; p++) chk(!col_valid[p], "all columns of active parsers consumed");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      one_case(COL8, 0, 8, 128);
      one_case(COL16, 0, 8, 64);
      one_case(COL32, 0, 8, 32);
      one_case(COL8, 1, 2 + ($urandom % 7), 128);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
