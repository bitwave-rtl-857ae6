// tb_bitwave_top: end-to-end test of the BitWave accelerator at its full
// size (512 BCEs, 128 parsers, 2 x 256 KB SRAM; no parameter overrides).
//
// For each program the testbench draws random convolution tiles (weights in
// sign-magnitude form with several sparsity patterns, 8-bit activations),
// compresses the weights itself into zero-column indices and bit-column
// lines, loads index, activation and weight data and the instructions
// through the host port, runs the accelerator and compares every output
// byte with a direct convolution of the same numbers (sum over channels and
// kernel taps, arithmetic shift, saturation). It also checks the number of
// column cycles, sign rows and total cycles against what the compressed data
// implies, and counts how often each mechanism occurred: each spatial
// unrolling SU1-SU6, column sizes 8/16/32, dense mode, sign column fetched
// and skipped, an all-zero weight step, groups finishing early, inter-BCE
// accumulation, saturation, multi-instruction programs. A mechanism that
// never occurs counts as a failure.
module tb_bitwave_top;
  import bitwave_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 host_en = 0, host_we = 0, host_sel = 0;
  logic [SEG_AW-1:0]    host_addr = '0;
  logic [BANK_W-1:0]    host_wdata = '0, host_rdata;
  logic                 im_we = 0;
  logic [7:0]           im_waddr = '0;
  instr_t               im_wdata = '0;
  logic                 start = 0, busy, done;
  logic [31:0]          stat_steps, stat_cols, stat_sign_rows;

  bitwave_top dut (
    .clk(clk), .rst_n(rst_n),
    .host_en(host_en), .host_we(host_we), .host_sel(host_sel), .host_addr(host_addr),
    .host_wdata(host_wdata), .host_rdata(host_rdata),
    .im_we(im_we), .im_waddr(im_waddr), .im_wdata(im_wdata),
    .start(start), .busy(busy), .done(done),
    .stat_steps(stat_steps), .stat_cols(stat_cols), .stat_sign_rows(stat_sign_rows)
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_su [7];
  int n_col [3];
  int n_dense = 0, n_sign_row = 0, n_sign_skip = 0, n_zero_step = 0, n_uneven = 0;
  int n_interacc = 0, n_sat = 0, n_multi = 0, n_prog = 0;

  // ---------------------------------------------------------------- tile data
  localparam int MAXT = 2;
  int   wt   [MAXT][128][128][3][3];    // weights [k][c][fy][fx], -127..127
  int   av   [MAXT][16][3][24][8];      // activations [cg][y][x][e]
  int   expv [MAXT][512];              // expected int8 outputs
  int   t_out_base [MAXT], t_out_sc [MAXT], t_nout [MAXT], t_ku [MAXT];
  int   exp_cols, exp_sign_rows, exp_cycles;
  instr_t prog [MAXT];
  int   act_ptr, w_ptr;                // allocators (segments / weight lines)

  task automatic host_write(input logic sel, input int addr, input logic [63:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_sel = sel; host_addr = SEG_AW'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(input logic sel, input int addr, output logic [63:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_sel = sel; host_addr = SEG_AW'(addr);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  function automatic int rnd_w(int mode);
    int m;
    case (mode)
      0: m = ($urandom % 3 == 0) ? 0 : ($urandom % 8);          // small values
      1: m = $urandom % 128;                                  // full range
      2: m = 0;                                               // all zero
      default: m = ($urandom % 2) ? 4 : 16;                   // few columns
    endcase
    if (mode != 3 && ($urandom % 2)) return -m;
    return m;   // mode 3: positive only (no sign column)
  endfunction

  // Build one tile: write its data, compute its expected result.
  task automatic make_tile(input int t, input su_e su, input colsize_e col, input bit dense,
                           input int prec, input int n_ct, input int n_fy, input int n_fx,
                           input int out_shift, input bit last);
    int lcug, cug, oxu, ku, ng, nb, lpr, cgn, xn, plane, stride_c, stride_y;
    int act_base, idx_base, w_base, w_first, out_base, out_sc, step, nsteps, nlines;
    int idxb [128];
    logic [1023:0] line;
    lcug = su_lcug(su); cug = 1 << lcug; oxu = 1 << su_loxu(su); ku = 1 << su_lku(su);
    ng = ku * cug; nb = ng / 8; lpr = 16 / nb;
    cgn = n_ct * cug; xn = oxu + n_fx; stride_y = xn; plane = xn * n_fy;
    stride_c = ((plane + 15) / 16) * 16 + ((cug == 2) ? 8 : (cug == 4) ? 4 : 0);
    act_base = ((act_ptr + 15) / 16) * 16;
    act_ptr  = act_base + cgn * stride_c + 16;
    idx_base = (act_ptr + 15) / 16;                     // rows
    nsteps   = n_ct * n_fy * n_fx;
    act_ptr  = (idx_base + nsteps) * 16;
    out_base = act_ptr;
    out_sc   = (oxu == 1) ? 17 : 36;
    act_ptr  = out_base + (ku / 8) * out_sc + 32;
    w_base   = w_ptr * lpr + ($urandom % 3);   // w_ptr counts SRAM rows
    w_first  = w_base;

    n_su[int'(su)]++;
    n_col[int'(col)]++;
    if (dense) n_dense++;
    if (cug > 1) n_interacc++;

    // activations
    for (int cg = 0; cg < cgn; cg++)
      for (int y = 0; y < n_fy; y++)
        for (int x = 0; x < xn; x++) begin
          logic [63:0] d;
          for (int e = 0; e < 8; e++) begin
            av[t][cg][y][x][e] = int'($signed(8'($urandom)));
            d[e*8 +: 8] = 8'(av[t][cg][y][x][e]);
          end
          host_write(0, act_base + cg * stride_c + y * stride_y + x, d);
        end

    // weights, step by step (loop order: channel step, kernel row, kernel column)
    step = 0;
    for (int ct = 0; ct < n_ct; ct++)
      for (int fy = 0; fy < n_fy; fy++)
        for (int fx = 0; fx < n_fx; fx++) begin
          int mode, nz, sgn, ncols [128];
          bit uneven;
          mode = dense ? 0 : ($urandom % 4);
          for (int k = 0; k < ku; k++)
            for (int c = 0; c < cug * 8; c++) begin
              int w;
              w = rnd_w(mode);
              if (dense) w = w % (1 << (prec - 1));
              wt[t][k][ct * cug * 8 + c][fy][fx] = w;
            end
          // compression: index per parser group q (covers 1 << col groups of 8)
          for (int q = 0; q < 128; q++) idxb[q] = 0;
          for (int g = 0; g < ng; g++) begin
            int k, j;
            k = g >> lcug; j = g & (cug - 1);
            for (int e = 0; e < 8; e++) begin
              int w;
              w = wt[t][k][(ct * cug + j) * 8 + e][fy][fx];
              idxb[g >> int'(col)] |= (w < 0) ? (128 | -w) : w;
            end
          end
          nz = 0; sgn = 0; uneven = 0;
          for (int g = 0; g < ng; g++) begin
            ncols[g] = dense ? prec - 1 : $countones(idxb[g >> int'(col)] & 127);
            if (ncols[g] > nz) nz = ncols[g];
            if (dense || idxb[g >> int'(col)] >= 128) sgn = 1;
          end
          for (int g = 0; g < ng; g++) if (ncols[g] != nz) uneven = 1;
          if (uneven) n_uneven++;
          if (!dense && nz == 0) n_zero_step++;
          if (sgn) n_sign_row++; else n_sign_skip++;
          exp_cols += nz;
          exp_sign_rows += sgn;
          exp_cycles += (dense ? 4 : 5) + 2 * sgn + nz;
          // index line
          if (!dense)
            for (int s = 0; s < 16; s++) begin
              logic [63:0] d;
              for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(idxb[s * 8 + e]);
              host_write(0, (idx_base + step) * 16 + s, d);
            end
          // sign line then data column lines
          for (int n = -1; n < nz; n++) begin
            if (n == -1 && !sgn) continue;
            line = '0;
            for (int g = 0; g < ng; g++) begin
              int k, j, b, cnt;
              k = g >> lcug; j = g & (cug - 1);
              b = -1;
              if (n >= 0) begin
                if (dense) b = n;
                else begin
                  cnt = 0;
                  for (int bb = 0; bb < 7; bb++)
                    if ((idxb[g >> int'(col)] >> bb) & 1) begin
                      if (cnt == n) b = bb;
                      cnt++;
                    end
                end
              end
              for (int e = 0; e < 8; e++) begin
                int w, m;
                w = wt[t][k][(ct * cug + j) * 8 + e][fy][fx];
                m = (w < 0) ? -w : w;
                if (n == -1) line[g * 8 + e] = (w < 0) && (dense || idxb[g >> int'(col)] >= 128);
                else if (b >= 0) line[g * 8 + e] = (m >> b) & 1;
              end
            end
            for (int i = 0; i < nb; i++) begin
              int bank, row;
              bank = ((w_base % lpr) * nb) + i;
              row  = w_base / lpr;
              host_write(1, row * 16 + bank, line[i * 64 +: 64]);
            end
            w_base++;
          end
          step++;
        end
    w_ptr = (w_base + lpr - 1) / lpr + 1;

    // expected outputs
    for (int ox = 0; ox < oxu; ox++)
      for (int k = 0; k < ku; k++) begin
        longint s;
        int v;
        s = 0;
        for (int c = 0; c < cgn * 8; c++)
          for (int fy = 0; fy < n_fy; fy++)
            for (int fx = 0; fx < n_fx; fx++)
              s += longint'(wt[t][k][c][fy][fx]) * longint'(av[t][c / 8][fy][ox + fx][c % 8]);
        v = int'(s >>> out_shift);
        if (v > 127) begin v = 127; n_sat++; end
        if (v < -128) begin v = -128; n_sat++; end
        expv[t][ox * ku + k] = v;
      end
    nlines = (oxu * ku) / 128;
    if (nlines == 0) nlines = 1;
    exp_cycles += 2 + nlines;            // instruction read and latch, write-back

    t_out_base[t] = out_base; t_out_sc[t] = out_sc; t_nout[t] = oxu * ku; t_ku[t] = ku;
    prog[t] = '0;
    prog[t].last = last; prog[t].su = su; prog[t].col = col; prog[t].dense = dense;
    prog[t].prec = 4'(prec); prog[t].n_ct = 12'(n_ct); prog[t].n_fy = 4'(n_fy);
    prog[t].n_fx = 4'(n_fx); prog[t].act_base = SEG_AW'(act_base);
    prog[t].stride_c = SEG_AW'(stride_c); prog[t].stride_y = SEG_AW'(stride_y);
    prog[t].stride_x = 4'd1; prog[t].idx_base = ROW_AW'(idx_base);
    prog[t].w_base = WLINE_AW'(w_first);
    prog[t].out_base = SEG_AW'(out_base); prog[t].out_stride_c = SEG_AW'(out_sc);
    prog[t].out_shift = 5'(out_shift);
  endtask


  // Run a program of nt tiles and check all outputs.
  task automatic run_program(input int nt);
    int cyc;
    logic [63:0] d;
    for (int t = 0; t < nt; t++) begin
      @(negedge clk);
      im_we = 1; im_waddr = 8'(t); im_wdata = prog[t];
    end
    @(negedge clk);
    im_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;                             // cycles from start to the done pulse
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    if (nt > 1) n_multi++;
    n_prog++;
    checks++;
    if (cyc != exp_cycles) begin
      failures++;
      $display("FAIL cycles: got %0d expected %0d", cyc, exp_cycles);
    end
    checks++;
    if (stat_cols != 32'(exp_cols) || stat_sign_rows != 32'(exp_sign_rows)) begin
      failures++;
      $display("FAIL stats: cols %0d/%0d sign rows %0d/%0d", stat_cols, exp_cols,
               stat_sign_rows, exp_sign_rows);
    end
    @(negedge clk);
    for (int t = 0; t < nt; t++)
      for (int o = 0; o < t_nout[t]; o++) begin
        int ox, k, got;
        ox = o / t_ku[t]; k = o % t_ku[t];
        if (k % 8 == 0) host_read(0, t_out_base[t] + (k / 8) * t_out_sc[t] + ox, d);
        got = int'($signed(d[(k % 8) * 8 +: 8]));
        checks++;
        if (got != expv[t][o]) begin
          failures++;
          if (failures < 20)
            $display("FAIL prog %0d tile %0d su %0d out ox=%0d k=%0d: got %0d expected %0d", n_prog,
                     t, prog[t].su, ox, k, got, expv[t][o]);
        end
      end
  endtask

  task automatic new_program();
    exp_cols = 0; exp_sign_rows = 0; exp_cycles = 0;
    act_ptr = 0; w_ptr = $urandom % 5;
  endtask

  initial begin
    for (int i = 0; i < 7; i++) n_su[i] = 0;
    for (int i = 0; i < 3; i++) n_col[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // one tile per spatial unrolling, then mixed programs
    new_program(); make_tile(0, SU1, COL8,  0, 8, 1, 1, 3, 9, 1); run_program(1);
    new_program(); make_tile(0, SU2, COL16, 0, 8, 2, 1, 1, 10, 1); run_program(1);
    new_program(); make_tile(0, SU3, COL32, 0, 8, 1, 3, 3, 11, 1); run_program(1);
    new_program(); make_tile(0, SU4, COL8,  0, 8, 3, 1, 1, 5, 1); run_program(1);
    new_program(); make_tile(0, SU5, COL8,  1, 5, 2, 1, 1, 7, 1); run_program(1);
    new_program(); make_tile(0, SU6, COL16, 0, 8, 2, 1, 1, 11, 1); run_program(1);
    new_program();
    make_tile(0, SU1, COL16, 1, 4, 1, 1, 2, 5, 0);
    make_tile(1, SU3, COL8,  0, 8, 2, 1, 2, 11, 1);
    run_program(2);
    new_program();
    make_tile(0, SU6, COL32, 0, 8, 4, 1, 1, 11, 0);
    make_tile(1, SU2, COL8,  0, 8, 1, 2, 2, 10, 1);
    run_program(2);

    $display("mechanisms: su1..6=%0d %0d %0d %0d %0d %0d col8/16/32=%0d %0d %0d dense=%0d",
             n_su[0], n_su[1], n_su[2], n_su[3], n_su[4], n_su[5], n_col[0], n_col[1], n_col[2], n_dense);
    $display("mechanisms: sign_row=%0d sign_skip=%0d zero_step=%0d uneven=%0d interacc=%0d sat=%0d multi=%0d",
             n_sign_row, n_sign_skip, n_zero_step, n_uneven, n_interacc, n_sat, n_multi);
    for (int i = 0; i < 6; i++) begin checks++; if (n_su[i] == 0) failures++; end
    for (int i = 0; i < 3; i++) begin checks++; if (n_col[i] == 0) failures++; end
    checks += 8;
    if (n_dense == 0) failures++;
    if (n_sign_row == 0) failures++;
    if (n_sign_skip == 0) failures++;
    if (n_zero_step == 0) failures++;
    if (n_uneven == 0) failures++;
    if (n_interacc == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_multi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
