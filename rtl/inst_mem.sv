// inst_mem: instruction memory of BitWave.
//
// Holds the layer configurations the top controller executes, one
// instruction (bitwave_pkg::instr_t) per output tile: spatial unrolling,
// column size, dense mode and precision, loop counts, strides, base
// addresses and the requantisation shift. The paper states that the SU of
// each layer, chosen offline, is stored here; the instruction format and the
// depth (DEPTH entries) are this design's choice. Written by the host
// through its own port, read by the controller.
//
// Timing: host write on the clock edge with we; controller read data appears
// the cycle after rd_en.
module inst_mem
  import bitwave_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  instr_t                    wdata,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output instr_t                    rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
