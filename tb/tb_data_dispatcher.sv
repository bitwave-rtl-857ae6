// tb_data_dispatcher: checks the routing of the data dispatcher for SU1-SU7.
// The testbench has its own copy of the unrolling table (Cu, OXu, Ku) and
// computes for every BCE b = ((ox*Ku + k)*Cu/8 + cg) which activation
// segment (ox*Cu/8 + cg), which weight group (k*Cu/8 + cg) and which parser
// it must see, and whether it is enabled. Activations must stay in the
// registers while the activation line input changes. SU7 must enable no BCE.
module tb_data_dispatcher;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  su_e su = SU1;
  logic act_load = 0, col_en = 0;
  logic [1023:0] act_line = '0, w_line = '0;
  logic [127:0][7:0] p_signs = '0;
  logic [127:0][2:0] p_shift = '0;
  logic [127:0] p_valid = '0;
  logic [511:0][7:0][7:0] bce_act;
  logic [511:0][7:0] bce_w, bce_sign;
  logic [511:0][2:0] bce_shift;
  logic [511:0] bce_en;
  int checks = 0, failures = 0;
  int cu_t [7] = '{8, 16, 32, 8, 16, 32, 64};
  int ox_t [7] = '{16, 8, 4, 1, 1, 1, 2};
  int ku_t [7] = '{32, 32, 32, 128, 64, 32, 1};

  data_dispatcher dut (.clk(clk), .rst_n(rst_n), .su(su), .act_load(act_load),
                       .act_line(act_line), .w_line(w_line), .col_en(col_en), .p_signs(p_signs),
                       .p_shift(p_shift), .p_valid(p_valid), .bce_act(bce_act), .bce_w(bce_w),
                       .bce_sign(bce_sign), .bce_shift(bce_shift), .bce_en(bce_en));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    logic [1023:0] loaded;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 7; s++) begin
      for (int rep = 0; rep < 3; rep++) begin
        int cug, oxu, ku;
        cug = cu_t[s] / 8; oxu = ox_t[s]; ku = ku_t[s];
        @(negedge clk);
        su = su_e'(s);
        for (int i = 0; i < 32; i++) act_line[i*32 +: 32] = $urandom;
        loaded = act_line;
        act_load = 1;
        @(negedge clk);
        act_load = 0;
        for (int i = 0; i < 32; i++) begin
          act_line[i*32 +: 32] = $urandom;
          w_line[i*32 +: 32] = $urandom;
        end
        for (int p = 0; p < 128; p++) begin
          p_signs[p] = 8'($urandom); p_shift[p] = 3'($urandom); p_valid[p] = ($urandom % 4) != 0;
        end
        col_en = rep != 2;
        #1;
        for (int b = 0; b < 512; b++) begin
          int cg, k, ox, seg, g;
          bit act_ok;
          cg = b % cug; k = (b / cug) % ku; ox = b / (cug * ku);
          seg = ox * cug + cg; g = k * cug + cg;
          act_ok = (s != 6) && (ox < oxu);
          if (s != 6) begin
            chk(bce_act[b] == loaded[seg*64 +: 64], $sformatf("su%0d act b%0d", s + 1, b));
            chk(bce_w[b] == w_line[g*8 +: 8], $sformatf("su%0d w b%0d", s + 1, b));
            chk(bce_sign[b] == p_signs[g] && bce_shift[b] == p_shift[g],
                $sformatf("su%0d sign/shift b%0d", s + 1, b));
          end
          chk(bce_en[b] == (act_ok && col_en && p_valid[g % 128]), $sformatf("su%0d en b%0d", s + 1, b));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
