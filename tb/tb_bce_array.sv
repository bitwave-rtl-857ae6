// tb_bce_array: random test of the full 512-BCE array.
// Every BCE gets independent random activations, weight columns, signs,
// shifts and enables for a number of cycles; a reference accumulator per
// BCE (same arithmetic as tb_bce) is compared with every BCE's output after
// each cycle, so a miswired engine is found.
module tb_bce_array;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr = 0;
  logic [N_BCE-1:0] en = '0;
  logic [N_BCE-1:0][7:0][7:0] act = '0;
  logic [N_BCE-1:0][7:0] w_bits = '0, w_signs = '0;
  logic [N_BCE-1:0][2:0] shift = '0;
  logic [N_BCE-1:0][31:0] acc;
  int ref_acc [N_BCE];
  int checks = 0, failures = 0;

  bce_array dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .act(act), .w_bits(w_bits),
                 .w_signs(w_signs), .shift(shift), .acc(acc));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < N_BCE; b++) ref_acc[b] = 0;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      for (int b = 0; b < N_BCE; b++) begin
        for (int i = 0; i < 8; i++) act[b][i] = 8'($urandom);
        w_bits[b] = 8'($urandom); w_signs[b] = 8'($urandom);
        shift[b] = 3'($urandom % 7); en[b] = $urandom % 2;
      end
      for (int b = 0; b < N_BCE; b++)
        if (en[b]) begin
          int col;
          col = 0;
          for (int i = 0; i < 8; i++)
            if (w_bits[b][i]) col += w_signs[b][i] ? -int'($signed(act[b][i])) : int'($signed(act[b][i]));
          ref_acc[b] += col <<< shift[b];
        end
      @(negedge clk);
      en = '0;
      for (int b = 0; b < N_BCE; b++) begin
        checks++;
        if (int'($signed(acc[b])) != ref_acc[b]) begin
          failures++;
          if (failures < 10) $display("FAIL bce %0d got %0d exp %0d", b, $signed(acc[b]), ref_acc[b]);
        end
      end
    end
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    checks++;
    if (acc != '0) failures++;
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
