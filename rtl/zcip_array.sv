// zcip_array: the zero-column index parser (ZCIP) of BitWave.
//
// N_PARSER parsers, one per 8-weight column group streamed in a cycle (128
// parsers of 8 bits: 1024 index bits in parallel, as in the paper). The index
// line holds one byte per index. With column size 16 or 32 one index covers
// 2 or 4 neighbouring 8-weight groups, so parser p reads index byte
// p >> log2(size/8) (this sharing of adjacent groups is this design's
// choice). Only the first n_active parsers (the groups the current spatial
// unrolling streams) count for the sync counter: sync_cnt is the largest
// number of stored data columns among them, i.e. the number of cycles all
// groups need to finish the current weight step in lock step, and
// any_sign_rqst says whether a sign column must be fetched. Groups with fewer
// columns than sync_cnt see col_valid=0 for their remaining cycles.
//
// Timing: outputs are valid the cycle after load; sync_cnt and
// any_sign_rqst are combinational from the parser registers.
module zcip_array
  import bitwave_pkg::*;
#(
  parameter int unsigned NP = N_PARSER
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [NP-1:0][IDX_W-1:0]  idx_line,   // index bytes
  input  colsize_e                  col,
  input  logic                      dense,
  input  logic [3:0]                prec,
  input  logic [$clog2(NP):0]       n_active,   // parsers in use
  input  logic                      sign_load,
  input  logic [NP-1:0][N_SMM-1:0]  sign_line,  // sign columns
  input  logic                      advance,
  output logic [NP-1:0][N_SMM-1:0]  signs,
  output logic [NP-1:0][2:0]        shift,
  output logic [NP-1:0]             col_valid,
  output logic [3:0]                sync_cnt,
  output logic                      any_sign_rqst
);
  logic [NP-1:0]      rqst;
  logic [NP-1:0][3:0] nz;
  logic [NP-1:0][IDX_W-1:0] idx_sel;

  always_comb begin
    for (int p = 0; p < NP; p++) idx_sel[p] = idx_line[p >> col];
  end

  for (genvar p = 0; p < NP; p++) begin : g_parser
    zcip_parser u_parser (
      .clk      (clk),
      .rst_n    (rst_n),
      .load     (load),
      .idx      (idx_sel[p]),
      .dense    (dense),
      .prec     (prec),
      .sign_load(sign_load),
      .sign_col (sign_line[p]),
      .advance  (advance),
      .sign_rqst(rqst[p]),
      .signs    (signs[p]),
      .shift    (shift[p]),
      .col_valid(col_valid[p]),
      .nz_num   (nz[p])
    );
  end

  // sync counter: maximum column count over the active parsers
  always_comb begin
    sync_cnt      = '0;
    any_sign_rqst = 1'b0;
    for (int p = 0; p < NP; p++) begin
      if (p < int'(n_active)) begin
        if (nz[p] > sync_cnt) sync_cnt = nz[p];
        any_sign_rqst |= rqst[p];
      end
    end
  end
endmodule
