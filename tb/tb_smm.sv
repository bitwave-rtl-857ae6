// tb_smm: exhaustive test of the sign-magnitude 1b x 8b multiplier.
// All 256 activations x weight bit x weight sign are applied; the product
// must be 0 for a zero weight bit, +act for a positive and -act for a
// negative weight (computed here with plain integer arithmetic).
module tb_smm;
  logic signed [7:0] act;
  logic w_bit, w_sign;
  logic signed [8:0] prod;
  int checks = 0, failures = 0;

  smm dut (.act(act), .w_bit(w_bit), .w_sign(w_sign), .prod(prod));

  initial begin
    for (int a = -128; a < 128; a++)
      for (int wb = 0; wb < 2; wb++)
        for (int ws = 0; ws < 2; ws++) begin
          int expv;
          act = 8'(a); w_bit = wb[0]; w_sign = ws[0];
          #1;
          expv = (wb == 0) ? 0 : (ws == 1 ? -a : a);
          checks++;
          if (int'(prod) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d wb=%0d ws=%0d got %0d exp %0d", a, wb, ws, prod, expv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
