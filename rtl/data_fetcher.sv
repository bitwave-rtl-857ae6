// data_fetcher: the W./IDX/Act. fetcher of BitWave.
//
// Turns the controller's requests into per-bank SRAM reads and assembles the
// returned 64-bit bank words into 1024-bit lines for the dispatcher and the
// index parser, following the layer's spatial unrolling (SU).
//  - Activation line (act_req): OXu*Cu/8 segments, segment i = ox*Cu/8 + cg
//    read from segment address act_addr + cg*stride_c + ox*stride_x. Each
//    bank has its own row address, so the segments need not be aligned to a
//    line; they must fall into different banks (checked by an assertion),
//    which the layout guarantees by its choice of stride_c (an offset of
//    OXu modulo 16 between channel planes). Returned words are rotated into
//    segment order.
//  - Index line (idx_req): the 16 banks at row idx_row, 128 index bytes.
//  - Weight line (w_req): Cu*Ku bits = nb = Cu*Ku/64 banks. Weight lines are
//    packed 16/nb per SRAM row: line L uses banks (L mod 16/nb)*nb .. +nb-1
//    of row L div (16/nb), so every SU reads whole 64-bit segments and the
//    whole SRAM is usable. Unused high bits of w_line are zero.
// The paper states that every SU reads packed 64-bit segments; these exact
// address formulas are this design's choice.
//
// Timing: one request per cycle on each buffer; the line and its valid pulse
// appear the cycle after the request (1-cycle SRAM read).
//
// The index line is the activation buffer's read data itself (a whole row,
// bank 0 in the low bits), so idx_line is wired straight from a_rdata.
module data_fetcher
  import bitwave_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  su_e                            su,
  // activation / index requests (index/act buffer)
  input  logic                           act_req,
  input  logic [SEG_AW-1:0]              act_addr,
  input  logic [SEG_AW-1:0]              stride_c,
  input  logic [3:0]                     stride_x,
  input  logic                           idx_req,
  input  logic [ROW_AW-1:0]              idx_row,
  // weight requests
  input  logic                           w_req,
  input  logic [WLINE_AW-1:0]            w_line_addr,
  // to the SRAM controller
  output logic [N_BANK-1:0]              a_rd_en,
  output logic [N_BANK-1:0][ROW_AW-1:0]  a_rd_addr,
  output logic [N_BANK-1:0]              w_rd_en,
  output logic [N_BANK-1:0][ROW_AW-1:0]  w_rd_addr,
  input  logic [N_BANK-1:0][BANK_W-1:0]  a_rdata,
  input  logic [N_BANK-1:0][BANK_W-1:0]  w_rdata,
  // assembled lines
  output logic [LINE_W-1:0]              act_line,
  output logic                           act_valid,
  output logic [LINE_W-1:0]              idx_line,
  output logic                           idx_valid,
  output logic [LINE_W-1:0]              w_line,
  output logic                           w_valid
);
  logic [N_BANK-1:0][3:0] seg_bank, seg_bank_q;
  logic [N_BANK-1:0]      seg_used, seg_used_q;
  logic [3:0]             w_bank0, w_bank0_q;
  logic [4:0]             nb, nb_q;
  logic [SEG_AW-1:0]      seg_addr [N_BANK];
  int unsigned            lcug, lnb;

  always_comb begin
    lcug = su_lcug(su);
    lnb  = su_lcug(su) + su_lku(su) - 3;   // log2(banks per weight line)
    nb   = 5'(1 << lnb);

    a_rd_en   = '0;
    a_rd_addr = '0;
    seg_bank  = '0;
    seg_used  = '0;
    for (int unsigned i = 0; i < N_BANK; i++) begin
      automatic int unsigned cg = i & ((1 << lcug) - 1);
      automatic int unsigned ox = i >> lcug;
      seg_addr[i] = act_addr + SEG_AW'(cg) * stride_c + SEG_AW'(ox * stride_x);
    end
    if (act_req) begin
      for (int unsigned i = 0; i < N_BANK; i++) begin
        if (i < su_aseg(su)) begin
          seg_used[i]                  = 1'b1;
          seg_bank[i]                  = seg_addr[i][3:0];
          a_rd_en[seg_addr[i][3:0]]    = 1'b1;
          a_rd_addr[seg_addr[i][3:0]]  = seg_addr[i][SEG_AW-1:4];
        end
      end
    end else if (idx_req) begin
      a_rd_en = '1;
      for (int i = 0; i < N_BANK; i++) a_rd_addr[i] = idx_row;
    end

    // weight line L: banks (L mod 16/nb)*nb .. +nb-1 of row L / (16/nb)
    w_rd_en   = '0;
    w_rd_addr = '0;
    w_bank0   = 4'((w_line_addr & WLINE_AW'((16 >> lnb) - 1)) << lnb);
    if (w_req) begin
      for (int unsigned i = 0; i < N_BANK; i++) begin
        if (i < nb) begin
          w_rd_en[w_bank0 + 4'(i)]   = 1'b1;
          w_rd_addr[w_bank0 + 4'(i)] = ROW_AW'(w_line_addr >> (4 - lnb));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_valid  <= 1'b0;
      idx_valid  <= 1'b0;
      w_valid    <= 1'b0;
      seg_bank_q <= '0;
      seg_used_q <= '0;
      w_bank0_q  <= '0;
      nb_q       <= '0;
    end else begin
      act_valid  <= act_req;
      idx_valid  <= idx_req && !act_req;
      w_valid    <= w_req;
      if (act_req) begin
        seg_bank_q <= seg_bank;
        seg_used_q <= seg_used;
      end
      if (w_req) begin
        w_bank0_q <= w_bank0;
        nb_q      <= nb;
      end
    end
  end

  always_comb begin
    act_line = '0;
    for (int i = 0; i < N_BANK; i++)
      if (seg_used_q[i]) act_line[i*BANK_W +: BANK_W] = a_rdata[seg_bank_q[i]];
    idx_line = a_rdata;
    w_line = '0;
    for (int i = 0; i < N_BANK; i++)
      if (i < int'(nb_q)) w_line[i*BANK_W +: BANK_W] = w_rdata[w_bank0_q + 4'(i)];
  end

  // the segments of one activation line must lie in distinct banks
  always_comb begin
    if (rst_n && act_req) begin
      for (int i = 0; i < N_BANK; i++)
        for (int j = i + 1; j < N_BANK; j++)
          if (seg_used[i] && seg_used[j])
            assert (seg_addr[i][3:0] != seg_addr[j][3:0] || seg_addr[i] == seg_addr[j])
              else $error("data_fetcher: activation segments %0d and %0d share bank", i, j);
    end
  end
endmodule
