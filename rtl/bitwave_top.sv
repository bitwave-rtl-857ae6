// bitwave_top: the BitWave bit-column-serial DNN accelerator.
//
// Weights are stored compressed: for every group of 8 sign-magnitude weights
// (one bit column of 8 input channels of one kernel) only the bit columns
// that hold a 1 are kept, plus an 8-bit zero-column index. The 128 index
// parsers turn the indices into a shift per stored column; the 512 BCEs
// multiply one stored column by eight 8-bit activations per cycle, add the
// eight products, shift the sum once and accumulate. Zero columns therefore
// cost neither memory nor cycles. The dispatcher and fetcher reshape the
// array per layer into one of six spatial unrollings (SU1-SU6: Cu x OXu x Ku
// = 8x16x32, 16x8x32, 32x4x32, 8x1x128, 16x1x64, 32x1x32).
//
// Blocks and wiring follow the paper's architecture figure: instruction
// memory and top controller, SRAM controller with a 256 KB weight buffer and
// a 256 KB index/activation buffer (16 banks of 64 bits each), the
// W./IDX/Act. fetcher, the data dispatcher, the zero-column index parser,
// the 512-BCE array and the inter-BCE accumulator, whose output is written
// back into the activation buffer. The host port (loading buffers and
// instructions, reading results) stands in for the chip IO and DRAM
// transfers, which the paper does not describe.
//
// Use: while busy is low, write the buffers through host_* (segment
// addresses, bank = addr[3:0]) and the instructions through im_*; pulse
// start; wait for done; read the outputs back. host_rdata is valid the
// cycle after a host read.
//
// Signals left unconnected on purpose: the fetcher's act/idx/w_valid pulses
// (the controller times its loads itself, one cycle after each request),
// the inter-BCE accumulator's sum_dbg output (full-precision sums, for
// observation only), and the instruction fields that only the controller
// reads (loop counts, base addresses, strides) are not used at this level.
// rst_n is used synchronously only to disable assertions in the blocks.
module bitwave_top
  import bitwave_pkg::*;
#(
  parameter int unsigned SRAM_DEPTH = 2048,   // rows per bank: 16 x 64 b x 2048 = 256 KB
  parameter int unsigned IM_DEPTH   = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host IO
  input  logic                         host_en,
  input  logic                         host_we,
  input  logic                         host_sel,      // 0 = index/act buffer, 1 = weight buffer
  input  logic [SEG_AW-1:0]            host_addr,
  input  logic [BANK_W-1:0]            host_wdata,
  output logic [BANK_W-1:0]            host_rdata,
  input  logic                         im_we,
  input  logic [$clog2(IM_DEPTH)-1:0]  im_waddr,
  input  instr_t                       im_wdata,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  output logic [31:0]                  stat_steps,
  output logic [31:0]                  stat_cols,
  output logic [31:0]                  stat_sign_rows
);
  // instruction memory <-> controller
  logic   im_rd_en;
  logic [$clog2(IM_DEPTH)-1:0] im_raddr;
  instr_t im_rdata, cfg;

  // controller -> fetcher / parser / dispatcher / write-back
  logic act_req, idx_req, w_req;
  logic [SEG_AW-1:0]   act_addr;
  logic [ROW_AW-1:0]   idx_row;
  logic [WLINE_AW-1:0] w_line_addr;
  logic zc_load, zc_sign_load, zc_advance, act_load, col_en, bce_clr, wb_req;
  logic [$clog2(N_PARSER):0] n_active;
  logic [3:0] sync_cnt;
  logic any_sign_rqst;
  logic [1:0] wb_line;

  // fetcher <-> SRAM controller
  logic [N_BANK-1:0]              f_a_rd_en, f_w_rd_en;
  logic [N_BANK-1:0][ROW_AW-1:0]  f_a_rd_addr, f_w_rd_addr;
  logic [N_BANK-1:0]              wb_en;
  logic [N_BANK-1:0][ROW_AW-1:0]  wb_addr;
  logic [N_BANK-1:0][BANK_W-1:0]  wb_data;

  // SRAM controller <-> buffers
  logic [N_BANK-1:0]              a_en, a_we, w_en, w_we;
  logic [N_BANK-1:0][ROW_AW-1:0]  a_addr, w_addr;
  logic [N_BANK-1:0][BANK_W-1:0]  a_wdata, a_rdata, w_wdata, w_rdata;

  // lines
  logic [LINE_W-1:0] act_line, idx_line, w_line;
  logic act_valid, idx_valid, w_valid;

  // parser outputs
  logic [N_PARSER-1:0][N_SMM-1:0] p_signs;
  logic [N_PARSER-1:0][2:0]       p_shift;
  logic [N_PARSER-1:0]            p_valid;

  // array
  logic [N_BCE-1:0][N_SMM-1:0][ACT_W-1:0] bce_act;
  logic [N_BCE-1:0][N_SMM-1:0] bce_w, bce_sign;
  logic [N_BCE-1:0][2:0]       bce_shift;
  logic [N_BCE-1:0]            bce_en;
  logic [N_BCE-1:0][ACC_W-1:0] bce_acc;
  logic signed [ACC_W-1:0]     sum_dbg [LINE_W/ACT_W];

  inst_mem #(.DEPTH(IM_DEPTH)) u_inst_mem (
    .clk  (clk),
    .we   (im_we && !busy),
    .waddr(im_waddr),
    .wdata(im_wdata),
    .rd_en(im_rd_en),
    .raddr(im_raddr),
    .rdata(im_rdata)
  );

  top_controller #(.IM_DEPTH(IM_DEPTH)) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .busy         (busy),
    .done         (done),
    .im_rd_en     (im_rd_en),
    .im_raddr     (im_raddr),
    .im_rdata     (im_rdata),
    .cfg          (cfg),
    .act_req      (act_req),
    .act_addr     (act_addr),
    .idx_req      (idx_req),
    .idx_row      (idx_row),
    .w_req        (w_req),
    .w_line_addr  (w_line_addr),
    .zc_load      (zc_load),
    .zc_sign_load (zc_sign_load),
    .zc_advance   (zc_advance),
    .n_active     (n_active),
    .sync_cnt     (sync_cnt),
    .any_sign_rqst(any_sign_rqst),
    .act_load     (act_load),
    .col_en       (col_en),
    .bce_clr      (bce_clr),
    .wb_req       (wb_req),
    .wb_line      (wb_line),
    .stat_steps   (stat_steps),
    .stat_cols    (stat_cols),
    .stat_sign_rows(stat_sign_rows)
  );

  data_fetcher u_fetch (
    .clk        (clk),
    .rst_n      (rst_n),
    .su         (cfg.su),
    .act_req    (act_req),
    .act_addr   (act_addr),
    .stride_c   (cfg.stride_c),
    .stride_x   (cfg.stride_x),
    .idx_req    (idx_req),
    .idx_row    (idx_row),
    .w_req      (w_req),
    .w_line_addr(w_line_addr),
    .a_rd_en    (f_a_rd_en),
    .a_rd_addr  (f_a_rd_addr),
    .w_rd_en    (f_w_rd_en),
    .w_rd_addr  (f_w_rd_addr),
    .a_rdata    (a_rdata),
    .w_rdata    (w_rdata),
    .act_line   (act_line),
    .act_valid  (act_valid),
    .idx_line   (idx_line),
    .idx_valid  (idx_valid),
    .w_line     (w_line),
    .w_valid    (w_valid)
  );

  sram_ctrl u_sram_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .core_busy (busy),
    .host_en   (host_en),
    .host_we   (host_we),
    .host_sel  (host_sel),
    .host_addr (host_addr),
    .host_wdata(host_wdata),
    .host_rdata(host_rdata),
    .a_rd_en   (f_a_rd_en),
    .a_rd_addr (f_a_rd_addr),
    .a_wr_en   (wb_en),
    .a_wr_addr (wb_addr),
    .a_wr_data (wb_data),
    .w_rd_en   (f_w_rd_en),
    .w_rd_addr (f_w_rd_addr),
    .a_en      (a_en),
    .a_we      (a_we),
    .a_addr    (a_addr),
    .a_wdata   (a_wdata),
    .a_rdata   (a_rdata),
    .w_en      (w_en),
    .w_we      (w_we),
    .w_addr    (w_addr),
    .w_wdata   (w_wdata),
    .w_rdata   (w_rdata)
  );

  banked_sram #(.DEPTH(SRAM_DEPTH)) u_act_buf (
    .clk  (clk),
    .en   (a_en),
    .we   (a_we),
    .addr (a_addr),
    .wdata(a_wdata),
    .rdata(a_rdata)
  );

  banked_sram #(.DEPTH(SRAM_DEPTH)) u_w_buf (
    .clk  (clk),
    .en   (w_en),
    .we   (w_we),
    .addr (w_addr),
    .wdata(w_wdata),
    .rdata(w_rdata)
  );

  zcip_array u_zcip (
    .clk          (clk),
    .rst_n        (rst_n),
    .load         (zc_load),
    .idx_line     (idx_line),
    .col          (cfg.col),
    .dense        (cfg.dense),
    .prec         (cfg.prec),
    .n_active     (n_active),
    .sign_load    (zc_sign_load),
    .sign_line    (w_line),
    .advance      (zc_advance),
    .signs        (p_signs),
    .shift        (p_shift),
    .col_valid    (p_valid),
    .sync_cnt     (sync_cnt),
    .any_sign_rqst(any_sign_rqst)
  );

  data_dispatcher u_disp (
    .clk      (clk),
    .rst_n    (rst_n),
    .su       (cfg.su),
    .act_load (act_load),
    .act_line (act_line),
    .w_line   (w_line),
    .col_en   (col_en),
    .p_signs  (p_signs),
    .p_shift  (p_shift),
    .p_valid  (p_valid),
    .bce_act  (bce_act),
    .bce_w    (bce_w),
    .bce_sign (bce_sign),
    .bce_shift(bce_shift),
    .bce_en   (bce_en)
  );

  bce_array u_array (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (bce_clr),
    .en     (bce_en),
    .act    (bce_act),
    .w_bits (bce_w),
    .w_signs(bce_sign),
    .shift  (bce_shift),
    .acc    (bce_acc)
  );

  inter_bce_acc u_iacc (
    .clk         (clk),
    .rst_n       (rst_n),
    .su          (cfg.su),
    .acc         (bce_acc),
    .out_shift   (cfg.out_shift),
    .wb_req      (wb_req),
    .wb_line     (wb_line),
    .out_base    (cfg.out_base),
    .out_stride_c(cfg.out_stride_c),
    .wr_en       (wb_en),
    .wr_addr     (wb_addr),
    .wr_data     (wb_data),
    .sum_dbg     (sum_dbg)
  );
endmodule
