// tb_inter_bce_acc: checks the inter-BCE accumulation, requantisation and
// output packing for SU1-SU6. With random BCE accumulators the testbench
// computes each output (ox, k) as the sum of the Cu/8 accumulators of BCEs
// (ox*Ku + k)*Cu/8 + cg, shifts and saturates it, and checks that every
// write-back line writes exactly the expected segments, at the expected
// bank and row (out_base + (k/8)*out_stride_c + ox), with the expected bytes.
module tb_inter_bce_acc;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  su_e su = SU1;
  logic [511:0][31:0] acc;
  logic [4:0] out_shift;
  logic wb_req = 0;
  logic [1:0] wb_line = 0;
  logic [14:0] out_base, out_stride_c;
  logic [15:0] wr_en;
  logic [15:0][10:0] wr_addr;
  logic [15:0][63:0] wr_data;
  logic signed [31:0] sum_dbg [128];
  int checks = 0, failures = 0;
  int cu_t [6] = '{8, 16, 32, 8, 16, 32};
  int ox_t [6] = '{16, 8, 4, 1, 1, 1};
  int ku_t [6] = '{32, 32, 32, 128, 64, 32};

  inter_bce_acc dut (.clk(clk), .rst_n(rst_n), .su(su), .acc(acc), .out_shift(out_shift),
                     .wb_req(wb_req), .wb_line(wb_line), .out_base(out_base),
                     .out_stride_c(out_stride_c), .wr_en(wr_en), .wr_addr(wr_addr),
                     .wr_data(wr_data), .sum_dbg(sum_dbg));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++)
      for (int rep = 0; rep < 4; rep++) begin
        int cug, oxu, ku, nout, nlines;
        int q8 [512];
        logic [15:0] exp_en;
        cug = cu_t[s] / 8; oxu = ox_t[s]; ku = ku_t[s]; nout = oxu * ku;
        nlines = (nout + 127) / 128;
        su = su_e'(s);
        for (int b = 0; b < 512; b++)
          acc[b] = (rep == 0) ? 32'($urandom) : 32'(int'($urandom % 200001) - 100000);
        out_shift = 5'($urandom % 12);
        out_base = 15'($urandom % 4096);
        out_stride_c = (oxu == 1) ? 15'(16 * ($urandom % 8) + 1) : 15'(16 * ($urandom % 8) + 4);
        for (int o = 0; o < nout; o++) begin
          int ox, k;
          longint sm, v;
          ox = o / ku; k = o % ku;
          sm = 0;
          for (int cg = 0; cg < cug; cg++) sm += longint'($signed(acc[(ox * ku + k) * cug + cg]));
          sm = longint'($signed(32'(sm)));
          v = sm >>> out_shift;
          q8[o] = (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
        end
        for (int j = 0; j < 4; j++) begin
          logic [63:0] exp_d [16];
          logic [10:0] exp_a [16];
          @(negedge clk);
          wb_req = 1; wb_line = 2'(j);
          #1;
          exp_en = '0;
          for (int o = j * 128; o < (j + 1) * 128 && o < nout; o += 8) begin
            int ox, k, addr;
            ox = o / ku; k = o % ku;
            addr = out_base + (k / 8) * out_stride_c + ox;
            exp_en[addr % 16] = 1;
            exp_a[addr % 16] = 11'((addr / 16) % 2048);
            for (int e = 0; e < 8; e++) exp_d[addr % 16][e*8 +: 8] = 8'(q8[o + e]);
          end
          checks++;
          if (wr_en != exp_en) begin
            failures++;
            $display("FAIL su%0d line %0d en %h exp %h", s + 1, j, wr_en, exp_en);
          end
          for (int b = 0; b < 16; b++)
            if (exp_en[b]) begin
              checks++;
              if (wr_addr[b] != exp_a[b] || wr_data[b] != exp_d[b]) begin
                failures++;
                if (failures < 20) $display("FAIL su%0d line %0d bank %0d", s + 1, j, b);
              end
            end
        end
        @(negedge clk);
        wb_req = 0;
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
