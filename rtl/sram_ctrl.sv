// sram_ctrl: on-chip SRAM controller of BitWave.
//
// Gives the bank ports of the two buffers either to the host IO (while the
// accelerator is idle) or to the core (while busy): the fetcher's reads of
// the index/activation and weight buffers and the inter-BCE accumulator's
// write-back of output activations into the activation buffer. Host
// addresses are segment addresses, bank = addr[3:0], row = addr[14:4]. The
// paper only names this block; this arbitration is this design's choice.
//
// Timing: combinational towards the banks; host_rdata is valid the cycle
// after a host read, taken from the bank and buffer registered at the read.
//
// rst_n also disables the bank-conflict assertion; that is its only
// synchronous use, so the lint note about rst_n being used both ways
// refers to the checker, not to a flip-flop.
module sram_ctrl
  import bitwave_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               core_busy,
  // host IO
  input  logic                               host_en,
  input  logic                               host_we,
  input  logic                               host_sel,    // 0 = act/idx buffer, 1 = weight buffer
  input  logic [SEG_AW-1:0]                  host_addr,
  input  logic [BANK_W-1:0]                  host_wdata,
  output logic [BANK_W-1:0]                  host_rdata,
  // core
  input  logic [N_BANK-1:0]                  a_rd_en,
  input  logic [N_BANK-1:0][ROW_AW-1:0]      a_rd_addr,
  input  logic [N_BANK-1:0]                  a_wr_en,
  input  logic [N_BANK-1:0][ROW_AW-1:0]      a_wr_addr,
  input  logic [N_BANK-1:0][BANK_W-1:0]      a_wr_data,
  input  logic [N_BANK-1:0]                  w_rd_en,
  input  logic [N_BANK-1:0][ROW_AW-1:0]      w_rd_addr,
  // activation buffer banks
  output logic [N_BANK-1:0]                  a_en,
  output logic [N_BANK-1:0]                  a_we,
  output logic [N_BANK-1:0][ROW_AW-1:0]      a_addr,
  output logic [N_BANK-1:0][BANK_W-1:0]      a_wdata,
  input  logic [N_BANK-1:0][BANK_W-1:0]      a_rdata,
  // weight buffer banks
  output logic [N_BANK-1:0]                  w_en,
  output logic [N_BANK-1:0]                  w_we,
  output logic [N_BANK-1:0][ROW_AW-1:0]      w_addr,
  output logic [N_BANK-1:0][BANK_W-1:0]      w_wdata,
  input  logic [N_BANK-1:0][BANK_W-1:0]      w_rdata
);
  logic [3:0] h_bank;
  logic       h_act, h_w;
  logic [3:0] rd_bank_q;
  logic       rd_sel_q;

  assign h_bank = host_addr[3:0];
  assign h_act  = host_en && !core_busy && !host_sel;
  assign h_w    = host_en && !core_busy &&  host_sel;

  always_comb begin
    for (int b = 0; b < N_BANK; b++) begin
      if (core_busy) begin
        a_en[b]    = a_rd_en[b] | a_wr_en[b];
        a_we[b]    = a_wr_en[b];
        a_addr[b]  = a_wr_en[b] ? a_wr_addr[b] : a_rd_addr[b];
        a_wdata[b] = a_wr_data[b];
        w_en[b]    = w_rd_en[b];
        w_we[b]    = 1'b0;
        w_addr[b]  = w_rd_addr[b];
        w_wdata[b] = '0;
      end else begin
        a_en[b]    = h_act && (h_bank == 4'(b));
        a_we[b]    = host_we;
        a_addr[b]  = host_addr[SEG_AW-1:4];
        a_wdata[b] = host_wdata;
        w_en[b]    = h_w && (h_bank == 4'(b));
        w_we[b]    = host_we;
        w_addr[b]  = host_addr[SEG_AW-1:4];
        w_wdata[b] = host_wdata;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bank_q <= '0;
      rd_sel_q  <= 1'b0;
    end else if (host_en && !host_we && !core_busy) begin
      rd_bank_q <= h_bank;
      rd_sel_q  <= host_sel;
    end
  end

  assign host_rdata = rd_sel_q ? w_rdata[rd_bank_q] : a_rdata[rd_bank_q];

  // the core never reads and writes the same activation bank in one cycle
  assert property (@(posedge clk) disable iff (!rst_n) core_busy |-> ((a_rd_en & a_wr_en) == '0))
    else $error("sram_ctrl: read and write to one activation bank in the same cycle");
endmodule
