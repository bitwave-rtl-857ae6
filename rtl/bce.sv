// bce: BitWave compute engine (one processing element).
//
// Each enabled cycle the BCE takes one bit column of N_SMM weights: N_SMM
// weight bits of the same significance, from N_SMM input channels, together
// with N_SMM activations and the N_SMM weight signs. It forms the signed
// partial products in its sign-magnitude multipliers, adds them, shifts the
// sum once by the column's bit position and adds it to its accumulator
// ("add, then shift"). Input loading, multiplication, addition, shift and
// accumulation all happen in the same cycle, as in the paper. Activations
// and signs are held by the dispatcher for all columns of a weight step;
// weight bits change every cycle.
//
// Timing: acc updates on the clock edge where en=1; clr (synchronous) has
// priority and zeroes the accumulator. The accumulator width (32 bits) is
// this design's choice; the paper does not give it.
module bce
  import bitwave_pkg::*;
#(
  parameter int unsigned N     = N_SMM,
  parameter int unsigned AW    = ACT_W,
  parameter int unsigned ACCW  = ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,              // zero the accumulator
  input  logic                   en,               // a valid weight column is present
  input  logic [N-1:0][AW-1:0]   act,              // activations, two's complement
  input  logic [N-1:0]           w_bits,           // weight bit column
  input  logic [N-1:0]           w_signs,          // weight signs
  input  logic [2:0]             shift,            // bit significance of the column
  output logic signed [ACCW-1:0] acc               // accumulated partial sum
);
  localparam int unsigned SUM_W = AW + 1 + $clog2(N);

  logic signed [AW:0]      prod [N];
  logic signed [SUM_W-1:0] col_sum;
  logic signed [ACCW-1:0]  shifted;

  for (genvar i = 0; i < N; i++) begin : g_smm
    smm #(.ACT_W(AW)) u_smm (
      .act   (act[i]),
      .w_bit (w_bits[i]),
      .w_sign(w_signs[i]),
      .prod  (prod[i])
    );
  end

  always_comb begin
    col_sum = '0;
    for (int i = 0; i < N; i++) col_sum += SUM_W'(prod[i]);
    shifted = ACCW'(col_sum) <<< shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + shifted;
  end
endmodule
