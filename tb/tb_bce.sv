// tb_bce: random test of one BitWave compute engine.
// Each cycle random activations, a weight bit column, signs, a shift and an
// enable are applied; a reference accumulator adds
// (sum_i w_i * (-1)^s_i * a_i) << shift when enabled and is cleared with clr.
// The DUT accumulator is compared after every clock edge; a column of
// eight -128 activations at shift 6 checks the extreme value.
module tb_bce;
  import bitwave_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr = 0, en = 0;
  logic [7:0][7:0] act = '0;
  logic [7:0] w_bits = '0, w_signs = '0;
  logic [2:0] shift = '0;
  logic signed [31:0] acc;
  longint ref_acc = 0;
  int checks = 0, failures = 0;

  bce dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .act(act), .w_bits(w_bits),
           .w_signs(w_signs), .shift(shift), .acc(acc));

  task automatic step_check();
    longint col;
    col = 0;
    for (int i = 0; i < 8; i++)
      if (w_bits[i]) col += w_signs[i] ? -longint'($signed(act[i])) : longint'($signed(act[i]));
    @(posedge clk);
    if (clr) ref_acc = 0;
    else if (en) ref_acc = 32'(ref_acc + (col <<< shift));
    ref_acc = longint'($signed(32'(ref_acc)));
    #1;
    checks++;
    if (longint'(acc) != ref_acc) begin
      failures++;
      if (failures < 10) $display("FAIL got %0d exp %0d", acc, ref_acc);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    clr = 1; step_check(); clr = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) act[i] = 8'($urandom);
      w_bits = 8'($urandom); w_signs = 8'($urandom); shift = 3'($urandom % 7);
      en = ($urandom % 4) != 0;
      clr = ($urandom % 200) == 0;
      step_check();
    end
    // extreme column: eight -128, all bits set, negative weights, shift 6
    @(negedge clk);
    clr = 1; step_check(); clr = 0;
    @(negedge clk);
    for (int i = 0; i < 8; i++) act[i] = 8'h80;
    w_bits = '1; w_signs = '1; shift = 3'd6; en = 1;
    step_check();
    checks++;
    if (acc != 32'sd65536) begin failures++; $display("FAIL extreme %0d", acc); end
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
