// tb_top_controller: checks the sequencing of the top controller with a
// model of the instruction memory and of the parser array (which returns a
// random column count and sign request for each loaded step).
// For a program of three instructions (different SUs, loop counts, dense
// mode) it checks: the activation address of every step follows the loops
// (act_base + ct*Cu/8*stride_c + fy*stride_y + fx, channel step outermost),
// index rows count up from idx_base, weight lines are consecutive from
// w_base with one sign line only when requested, col_en follows every column
// read by one cycle and its total matches, the BCEs are cleared once per
// instruction, the write-back covers the tile's lines, and done comes after
// the last instruction with the expected cycle count.
module tb_top_controller;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, im_rd_en;
  logic [7:0] im_raddr;
  instr_t im_rdata, cfg;
  logic act_req, idx_req, w_req, zc_load, zc_sign_load, zc_advance, act_load, col_en, bce_clr, wb_req;
  logic [14:0] act_addr;
  logic [10:0] idx_row;
  logic [14:0] w_line_addr;
  logic [7:0] n_active;
  logic [3:0] sync_cnt = 0;
  logic any_sign_rqst = 0;
  logic [1:0] wb_line;
  logic [31:0] stat_steps, stat_cols, stat_sign_rows;
  instr_t prog [3];
  int checks = 0, failures = 0;

  top_controller dut (.*);

  // instruction memory model
  always_ff @(posedge clk) if (im_rd_en) im_rdata <= prog[im_raddr];

  // parser model: a new (count, sign) per load
  always_ff @(posedge clk)
    if (zc_load) begin
      sync_cnt      <= 4'($urandom % 8);
      any_sign_rqst <= $urandom % 2;
    end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // monitor
  int wbi = 0, step = 0, wexp = 0, ncol_issue = 0, ncol_en = 0, nclr = 0, nwb = 0, cyc = 0;
  int exp_cycles = 0, nsteps_tot = 0;
  int ct = 0, fy = 0, fx = 0;
  bit prev_comp = 0, in_comp;
  logic [3:0] cur_cnt;
  logic cur_sign;
  int comp_left = 0;
  bit sign_pending = 0;

  always @(negedge clk) if (rst_n && busy) begin
    instr_t c;
    c = cfg;
    cyc++;
    if (bce_clr) begin
      nclr++;
      wbi = 0;
      step = 0; ct = 0; fy = 0; fx = 0;
      wexp = int'(im_rdata.w_base);
    end
    if (zc_load && !c.dense) chk(step >= 0, "load");
    if (idx_req) chk(idx_row == c.idx_base + 11'(step), $sformatf("idx row %0d step %0d", idx_row, step));
    if (act_req) begin
      int a;
      a = int'(c.act_base) + ct * (int'(c.stride_c) << su_lcug(c.su)) + fy * int'(c.stride_y) + fx;
      chk(int'(act_addr) == a % 32768, $sformatf("act addr %0d exp %0d", act_addr, a));
      cur_cnt = sync_cnt; cur_sign = any_sign_rqst;
      comp_left = cur_cnt; sign_pending = cur_sign;
      exp_cycles += (c.dense ? 4 : 5) + 2 * int'(cur_sign) + int'(cur_cnt);
      nsteps_tot++;
      // advance the loop model
      step++;
      if (fx + 1 < c.n_fx) fx++;
      else begin
        fx = 0;
        if (fy + 1 < c.n_fy) fy++;
        else begin fy = 0; ct++; end
      end
    end
    if (w_req) begin
      chk(int'(w_line_addr) == wexp, $sformatf("w line %0d exp %0d", w_line_addr, wexp));
      wexp++;
      if (sign_pending) sign_pending = 0;
      else begin ncol_issue++; comp_left--; chk(comp_left >= 0, "too many column reads"); end
    end
    if (col_en) ncol_en++;
    if (wb_req) begin
      chk(wb_line == 2'(wbi), "wb line order");
      wbi++;
      nwb++;
    end
  end

  initial begin
    int nl_tot, cnt;
    prog[0] = '0;
    prog[0].su = SU1; prog[0].col = COL8; prog[0].n_ct = 2; prog[0].n_fy = 2; prog[0].n_fx = 3;
    prog[0].act_base = 100; prog[0].stride_c = 84; prog[0].stride_y = 19; prog[0].stride_x = 1;
    prog[0].idx_base = 300; prog[0].w_base = 7;
    prog[1] = prog[0];
    prog[1].su = SU5; prog[1].dense = 1; prog[1].prec = 5; prog[1].n_ct = 3; prog[1].n_fy = 1;
    prog[1].n_fx = 1; prog[1].w_base = 500; prog[1].act_base = 2000; prog[1].stride_c = 25;
    prog[2] = prog[0];
    prog[2].su = SU2; prog[2].n_ct = 1; prog[2].n_fy = 3; prog[2].n_fx = 2; prog[2].last = 1;
    prog[2].w_base = 1000; prog[2].idx_base = 900;
    nl_tot = 4 + 1 + 2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cnt = 0;  // cycles counted from the first busy cycle
    while (!done && cnt < 5000) begin @(negedge clk); cnt++; end
    chk(done, "done");
    chk(nclr == 3, $sformatf("clears %0d", nclr));
    chk(nsteps_tot == 12 + 3 + 6, $sformatf("steps %0d", nsteps_tot));
    chk(ncol_en == ncol_issue && 32'(ncol_en) == stat_cols, $sformatf("cols %0d/%0d/%0d", ncol_en, ncol_issue, stat_cols));
    chk(nwb == nl_tot, $sformatf("write-back lines %0d", nwb));
    chk(cnt == exp_cycles + 3 * 2 + nl_tot, $sformatf("cycles %0d exp %0d", cnt, exp_cycles + 6 + nl_tot));
    @(negedge clk);
    chk(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
