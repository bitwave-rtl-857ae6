// bce_array: the PE array of BitWave, N_BCE compute engines.
//
// Each BCE receives its own eight activations, weight bit column, signs and
// shift from the data dispatcher, and keeps its own output-stationary
// accumulator. clr zeroes all accumulators at the start of an output tile.
// The array adds no logic of its own; the paper describes it as 512 BCEs fed
// by the dispatcher. Timing: as bce (one column per cycle, result in acc on
// the next clock edge).
module bce_array
  import bitwave_pkg::*;
#(
  parameter int unsigned NB = N_BCE
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clr,
  input  logic [NB-1:0]                        en,
  input  logic [NB-1:0][N_SMM-1:0][ACT_W-1:0]  act,
  input  logic [NB-1:0][N_SMM-1:0]             w_bits,
  input  logic [NB-1:0][N_SMM-1:0]             w_signs,
  input  logic [NB-1:0][2:0]                   shift,
  output logic [NB-1:0][ACC_W-1:0]             acc
);
  for (genvar b = 0; b < NB; b++) begin : g_bce
    bce u_bce (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr    (clr),
      .en     (en[b]),
      .act    (act[b]),
      .w_bits (w_bits[b]),
      .w_signs(w_signs[b]),
      .shift  (shift[b]),
      .acc    (acc[b])
    );
  end
endmodule
