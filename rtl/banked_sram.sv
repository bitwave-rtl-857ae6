// banked_sram: N_BANK independent single-port SRAM banks of BANK_W bits.
//
// Used twice in BitWave: as the weight buffer and as the index/activation
// buffer, each 16 banks x 64 bits x 2048 rows = 256 KB, as in the paper's
// implementation (256 KB weight SRAM, 256 KB activation SRAM, 16 banks of
// 64 bits). Every bank has its own enable, write enable and row address, so
// a line can be read from 16 different rows at once (the fetcher uses this
// for unaligned activation reads). Written as a plain array per bank; a
// foundry macro would replace it.
//
// Timing: write on the clock edge with en & we; read data of en & !we
// appears on rdata in the next cycle and holds until the next read.
module banked_sram
  import bitwave_pkg::*;
#(
  parameter int unsigned NBANK = N_BANK,
  parameter int unsigned WIDTH = BANK_W,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                                 clk,
  input  logic [NBANK-1:0]                     en,
  input  logic [NBANK-1:0]                     we,
  input  logic [NBANK-1:0][$clog2(DEPTH)-1:0]  addr,
  input  logic [NBANK-1:0][WIDTH-1:0]          wdata,
  output logic [NBANK-1:0][WIDTH-1:0]          rdata
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b]     <= mem[addr[b]];
      end
    end
  end
endmodule
