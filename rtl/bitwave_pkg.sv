// bitwave_pkg: sizes, types and the spatial-unrolling table shared by the
// BitWave accelerator modules.
//
// The array sizes follow the paper's main configuration: 512 BitWave compute
// engines (BCEs) of eight 1b x 8b sign-magnitude multipliers each, 128
// zero-column index parsers of 8 bits, and two 16-bank SRAMs of 64-bit banks.
// The spatial unrollings SU1..SU6 are the ones of the paper's dataflow table;
// SU7 (depthwise) is listed in the encoding but is not supported by the
// dispatcher (see data_dispatcher). The instruction format, the address
// widths and the accumulator width are this design's own choices.
package bitwave_pkg;

  localparam int unsigned N_BCE      = 512;  // BCEs in the PE array
  localparam int unsigned N_SMM      = 8;    // SMMs (weight bits) per BCE = column group of 8
  localparam int unsigned ACT_W      = 8;    // activation width (two's complement)
  localparam int unsigned W_BITS     = 8;    // weight width (sign-magnitude, bit 7 = sign)
  localparam int unsigned N_PARSER   = 128;  // zero-column index parsers
  localparam int unsigned IDX_W      = 8;    // index bits per parser
  localparam int unsigned N_BANK     = 16;   // banks per SRAM
  localparam int unsigned BANK_W     = 64;   // bits per bank word (one "segment")
  localparam int unsigned LINE_W     = N_BANK * BANK_W;  // 1024-bit line
  localparam int unsigned ACC_W      = 32;   // BCE accumulator width
  localparam int unsigned SEG_AW     = 15;   // segment address: {row[10:0], bank[3:0]}
  localparam int unsigned ROW_AW     = 11;   // bank row address (2048 rows)
  localparam int unsigned WLINE_AW   = 15;   // weight line address
  localparam int unsigned N_OUT_MAX  = 512;  // outputs of one tile (SU1: 16 x 32)
  localparam int unsigned N_OLINE    = N_OUT_MAX * ACT_W / LINE_W;  // 4 output lines

  // Spatial unrolling (Table I of the paper). Cu = 8 * cug.
  typedef enum logic [2:0] {
    SU1 = 3'd0,  // Cu=8,  OXu=16, Ku=32
    SU2 = 3'd1,  // Cu=16, OXu=8,  Ku=32
    SU3 = 3'd2,  // Cu=32, OXu=4,  Ku=32
    SU4 = 3'd3,  // Cu=8,  OXu=1,  Ku=128
    SU5 = 3'd4,  // Cu=16, OXu=1,  Ku=64
    SU6 = 3'd5,  // Cu=32, OXu=1,  Ku=32
    SU7 = 3'd6   // Gu=64, OXu=2, Ku=1 (depthwise; not supported)
  } su_e;

  // Column (group) size of the bit-column compression.
  typedef enum logic [1:0] {
    COL8  = 2'd0,
    COL16 = 2'd1,
    COL32 = 2'd2
  } colsize_e;

  // log2 of Cu/8 (number of BCEs that share one output)
  function automatic int unsigned su_lcug(su_e su);
    case (su)
      SU2, SU5: return 1;
      SU3, SU6: return 2;
      default:  return 0;
    endcase
  endfunction

  // log2 of OXu
  function automatic int unsigned su_loxu(su_e su);
    case (su)
      SU1:     return 4;
      SU2:     return 3;
      SU3:     return 2;
      default: return 0;
    endcase
  endfunction

  // log2 of Ku
  function automatic int unsigned su_lku(su_e su);
    case (su)
      SU4:     return 7;
      SU5:     return 6;
      default: return 5;
    endcase
  endfunction

  // Number of 8-weight column groups streamed per cycle (Cu*Ku/8).
  function automatic int unsigned su_groups(su_e su);
    return 1 << (su_lcug(su) + su_lku(su));
  endfunction

  // 64-bit weight banks read per cycle (weight bandwidth / 64).
  function automatic int unsigned su_wbanks(su_e su);
    return su_groups(su) / 8;
  endfunction

  // Activation segments (8 activations each) per line: OXu * Cu / 8.
  function automatic int unsigned su_aseg(su_e su);
    return 1 << (su_loxu(su) + su_lcug(su));
  endfunction

  // Outputs of one tile: OXu * Ku.
  function automatic int unsigned su_nout(su_e su);
    return 1 << (su_loxu(su) + su_lku(su));
  endfunction

  // One instruction = one output tile (OXu x Ku outputs) of a layer.
  // Addresses of the activation buffer are segment addresses (64-bit words,
  // bank = addr[3:0], row = addr[14:4]).
  typedef struct packed {
    logic            last;        // stop after this instruction
    su_e             su;          // spatial unrolling
    colsize_e        col;         // column size 8/16/32 (index shared by 1/2/4 parsers)
    logic            dense;       // dense mode: no index, shifts from precision
    logic [3:0]      prec;        // dense-mode weight precision incl. sign (2..8)
    logic [11:0]     n_ct;        // temporal channel steps (C / Cu)
    logic [3:0]      n_fy;        // kernel rows
    logic [3:0]      n_fx;        // kernel columns
    logic [SEG_AW-1:0] act_base;  // segment address of (c=0, y=0, x=0)
    logic [SEG_AW-1:0] stride_c;  // segments between 8-channel planes
    logic [SEG_AW-1:0] stride_y;  // segments between input rows
    logic [3:0]      stride_x;    // segments between neighbouring outputs (conv stride)
    logic [ROW_AW-1:0] idx_base;  // act-buffer row of the first index line
    logic [WLINE_AW-1:0] w_base;  // first weight line
    logic [SEG_AW-1:0] out_base;  // segment address of output (k=0..7, ox=0)
    logic [SEG_AW-1:0] out_stride_c; // segments between output 8-channel planes
    logic [4:0]      out_shift;   // requantisation right shift
  } instr_t;

endpackage
