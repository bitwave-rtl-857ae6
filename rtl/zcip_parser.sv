// zcip_parser: one zero-column index parser (helper of zcip_array).
//
// The 8-bit zero-column index of a weight column group has one bit per bit
// position: 1 = the column holds a non-zero bit and is stored, 0 = the column
// is all zero and was dropped. The MSB belongs to the sign column: when set,
// the parser raises sign_rqst and captures the sign column when it is
// fetched (sign_load); otherwise its sign register is cleared to zero, as the
// paper describes. Bits [6:0] go to the data-column register. The parser then
// walks through the set bits, lowest first: shift is the position of the
// lowest remaining set bit, and each advance clears it. nz_num is the number
// of stored data columns, used by the sync counter. The paper does not say in
// which order the set bits are walked; lowest-first is this design's choice.
//
// Dense mode (paper: shift control generated locally from the precision):
// the data-column register is loaded with the prec-1 low bits set and a sign
// column is always requested.
//
// Timing: load, sign_load and advance act on the clock edge; the outputs are
// register outputs (shift and col_valid are decoded from the register).
module zcip_parser
  import bitwave_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,        // latch a new index
  input  logic [IDX_W-1:0] idx,         // zero-column index, MSB = sign column
  input  logic             dense,       // dense mode
  input  logic [3:0]       prec,        // dense-mode precision including sign
  input  logic             sign_load,   // the sign column is on sign_col
  input  logic [N_SMM-1:0] sign_col,
  input  logic             advance,     // the current data column was consumed
  output logic             sign_rqst,
  output logic [N_SMM-1:0] signs,
  output logic [2:0]       shift,
  output logic             col_valid,   // a data column remains
  output logic [3:0]       nz_num       // number of data columns of this index
);
  logic [IDX_W-2:0] col_reg;
  logic [IDX_W-2:0] dense_mask;

  always_comb begin
    dense_mask = '0;
    for (int b = 0; b < IDX_W-1; b++) dense_mask[b] = (b < int'(prec) - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_reg   <= '0;
      sign_rqst <= 1'b0;
      signs     <= '0;
      nz_num    <= '0;
    end else if (load) begin
      col_reg   <= dense ? dense_mask : idx[IDX_W-2:0];
      sign_rqst <= dense ? 1'b1 : idx[IDX_W-1];
      signs     <= '0;
      nz_num    <= 4'($countones(dense ? dense_mask : idx[IDX_W-2:0]));
    end else begin
      if (sign_load) signs <= sign_rqst ? sign_col : '0;
      if (advance)   col_reg <= col_reg & (col_reg - 1'b1);  // drop lowest set bit
    end
  end

  // priority encoder: position of the lowest set bit
  always_comb begin
    shift = '0;
    for (int b = IDX_W-2; b >= 0; b--) if (col_reg[b]) shift = 3'(b);
    col_valid = |col_reg;
  end
endmodule
