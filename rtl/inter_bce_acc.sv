// inter_bce_acc: inter-BCE accumulator and output write-back of BitWave.
//
// With Cu = 16 or 32 one output (ox, k) is spread over Cu/8 neighbouring
// BCEs (b = (ox*Ku + k)*Cu/8 + cg, see data_dispatcher); this block adds
// their accumulators with a small adder tree (pairs, then pairs of pairs).
// With Cu = 8 the BCE accumulator is the output. Output o = ox*Ku + k.
// The sums are requantised to 8 bits (arithmetic right shift by out_shift,
// then saturation to -128..127; the paper does not describe requantisation,
// this is this design's choice) and packed into output lines: line j holds
// outputs o = 128j .. 128j+127, segment s of it the eight channels
// k = 8*kg .. 8*kg+7 of one ox. Output segment q = 16j + s is written to
// segment address out_base + kg*out_stride_c + ox, i.e. in the same
// channel-plane layout (C, H, W, Cu) that the next layer reads. The 16
// segments of a line must land in 16 different banks (assertion).
//
// Timing: combinational; the controller pulses wb_req with wb_line for one
// cycle per line, and the SRAM writes on that clock edge. clk and rst_n
// only clock and enable the bank-conflict check (the one place rst_n is used
// synchronously; the lint note about rst_n being used both ways refers to
// this checker, not to any flip-flop).
module inter_bce_acc
  import bitwave_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  su_e                               su,
  input  logic [N_BCE-1:0][ACC_W-1:0]       acc,
  input  logic [4:0]                        out_shift,
  input  logic                              wb_req,
  input  logic [1:0]                        wb_line,
  input  logic [SEG_AW-1:0]                 out_base,
  input  logic [SEG_AW-1:0]                 out_stride_c,
  output logic [N_BANK-1:0]                 wr_en,
  output logic [N_BANK-1:0][ROW_AW-1:0]     wr_addr,
  output logic [N_BANK-1:0][BANK_W-1:0]     wr_data,
  output logic signed [ACC_W-1:0]           sum_dbg [LINE_W/ACT_W]  // line's sums, for observation
);
  localparam int unsigned NL = LINE_W / ACT_W;  // 128 outputs per line

  logic signed [ACC_W-1:0] s2 [N_BCE/2];   // pair sums (Cu = 16)
  logic signed [ACC_W-1:0] s4 [N_BCE/4];   // quad sums (Cu = 32)
  logic signed [ACC_W-1:0] sum [NL];
  logic [ACT_W-1:0]        q8  [NL];
  logic [SEG_AW-1:0]       seg_addr [N_BANK];
  logic [N_BANK-1:0]       seg_ok;

  always_comb begin
    for (int i = 0; i < N_BCE/2; i++) s2[i] = acc[2*i] + acc[2*i+1];
    for (int i = 0; i < N_BCE/4; i++) s4[i] = s2[2*i] + s2[2*i+1];
  end

  // select the 128 sums of the requested line
  always_comb begin
    for (int e = 0; e < NL; e++) begin
      case (su_lcug(su))
        0: begin
          case (wb_line)
            2'd0: sum[e] = acc[e];
            2'd1: sum[e] = acc[NL + e];
            2'd2: sum[e] = acc[2*NL + e];
            default: sum[e] = acc[3*NL + e];
          endcase
        end
        1: sum[e] = wb_line[0] ? s2[NL + e] : s2[e];
        default: sum[e] = s4[e];
      endcase
      sum_dbg[e] = sum[e];
    end
  end

  // requantise: arithmetic shift, saturate to int8
  always_comb begin
    for (int e = 0; e < NL; e++) begin
      automatic logic signed [ACC_W-1:0] v = sum[e] >>> out_shift;
      if (v > 127)       q8[e] = 8'sd127;
      else if (v < -128) q8[e] = 8'h80;
      else               q8[e] = v[ACT_W-1:0];
    end
  end

  // pack the line into segments and place them into banks
  always_comb begin
    automatic int unsigned lkg  = su_lku(su) - 3;          // log2(Ku/8)
    automatic int unsigned nseg = su_nout(su) / N_SMM;     // output segments of the tile
    wr_en   = '0;
    wr_addr = '0;
    wr_data = '0;
    for (int unsigned s = 0; s < N_BANK; s++) begin
      automatic int unsigned q  = 16 * wb_line + s;
      automatic int unsigned ox = q >> lkg;
      automatic int unsigned kg = q & ((1 << lkg) - 1);
      automatic logic [BANK_W-1:0] d;
      for (int e = 0; e < N_SMM; e++) d[e*ACT_W +: ACT_W] = q8[s*N_SMM + e];
      seg_addr[s] = out_base + SEG_AW'(kg) * out_stride_c + SEG_AW'(ox);
      seg_ok[s]   = wb_req && (q < nseg);
      if (seg_ok[s]) begin
        wr_en[seg_addr[s][3:0]]   = 1'b1;
        wr_addr[seg_addr[s][3:0]] = seg_addr[s][SEG_AW-1:4];
        wr_data[seg_addr[s][3:0]] = d;
      end
    end
  end

  // output segments written in one cycle must use distinct banks
  always_ff @(posedge clk) begin
    if (rst_n && wb_req)
      for (int i = 0; i < N_BANK; i++)
        for (int j = i + 1; j < N_BANK; j++)
          if (seg_ok[i] && seg_ok[j])
            assert (seg_addr[i][3:0] != seg_addr[j][3:0])
              else $error("inter_bce_acc: output segments %0d and %0d share a bank", i, j);
  end
endmodule
