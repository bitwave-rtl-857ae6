// data_dispatcher: routes activations, weight bit columns, signs and shift
// controls to the 512 BCEs according to the layer's spatial unrolling (SU).
//
// BCE b is split as b = {ox, k, cg}: cg (log2(Cu/8) bits) selects the
// 8-channel slice of the Cu unrolled input channels, k the kernel (Ku) and ox
// the output column (OXu). A BCE is active when ox < OXu; SU1-SU3 use all 512
// BCEs, SU4-SU6 (OXu=1) use 128, since there the weight bandwidth
// (1024 bits/cycle) is the limit, as in the paper's table.
//  - Activations: the fetched 1024-bit activation line holds OXu*Cu/8
//    segments of eight 8-bit activations, segment s = ox*Cu/8 + cg. It is
//    copied into per-BCE activation registers on act_load and held for all
//    bit columns of the weight step (the paper's "numerous registers"). All
//    BCEs with the same (ox, cg) receive the same segment (broadcast along K).
//  - Weights: the weight line holds Cu*Ku/8 groups of 8 bits, group
//    g = k*Cu/8 + cg, each one bit column of 8 input channels of kernel k.
//    Group g goes to every BCE with that (k, cg) (broadcast along OX).
//  - Parser g supplies the signs and the shift of group g; the BCE is enabled
//    when col_en is high, it is active and parser g still has a column.
// The group/segment orders are this design's choice of the memory layout;
// the paper shows the SU1 case only. SU7 (depthwise, Gu=64, OXu=2) is not
// supported: the paper does not say how a BCE, whose adder sums its eight
// products, keeps 64 independent channels apart. With SU7 no BCE is enabled.
//
// Timing: activation registers load on the clock edge with act_load; all
// other outputs are combinational.
module data_dispatcher
  import bitwave_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  su_e                              su,
  input  logic                             act_load,
  input  logic [LINE_W-1:0]                act_line,
  input  logic [LINE_W-1:0]                w_line,
  input  logic                             col_en,
  input  logic [N_PARSER-1:0][N_SMM-1:0]   p_signs,
  input  logic [N_PARSER-1:0][2:0]         p_shift,
  input  logic [N_PARSER-1:0]              p_valid,
  output logic [N_BCE-1:0][N_SMM-1:0][ACT_W-1:0] bce_act,
  output logic [N_BCE-1:0][N_SMM-1:0]      bce_w,
  output logic [N_BCE-1:0][N_SMM-1:0]      bce_sign,
  output logic [N_BCE-1:0][2:0]            bce_shift,
  output logic [N_BCE-1:0]                 bce_en
);
  // segment of activation line / group of weight line feeding BCE b
  function automatic int unsigned act_seg(su_e s, int unsigned b);
    int unsigned cg, ox;
    cg = b & ((1 << su_lcug(s)) - 1);
    ox = b >> (su_lcug(s) + su_lku(s));
    return (ox << su_lcug(s)) | cg;
  endfunction

  function automatic int unsigned w_grp(su_e s, int unsigned b);
    return b & ((1 << (su_lcug(s) + su_lku(s))) - 1);
  endfunction

  function automatic logic bce_active(su_e s, int unsigned b);
    return (s != SU7) && ((b >> (su_lcug(s) + su_lku(s))) < (1 << su_loxu(s)));
  endfunction

  logic [N_BCE-1:0][BANK_W-1:0] act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < N_BCE; b++) act_q[b] <= '0;
    end
    else if (act_load) begin
      for (int unsigned b = 0; b < N_BCE; b++)
        act_q[b] <= act_line[act_seg(su, b)*BANK_W +: BANK_W];
    end
  end

  always_comb begin
    for (int unsigned b = 0; b < N_BCE; b++) begin
      automatic int unsigned g = w_grp(su, b) % N_PARSER;
      bce_act[b]   = act_q[b];
      bce_w[b]     = w_line[g*N_SMM +: N_SMM];
      bce_sign[b]  = p_signs[g];
      bce_shift[b] = p_shift[g];
      bce_en[b]    = col_en && p_valid[g] && bce_active(su, b);
    end
  end
endmodule
