// top_controller: sequencer of BitWave.
//
// On start it executes instructions from address 0 of the instruction memory
// until one with the last flag. One instruction computes one output tile of
// OXu x Ku outputs in output-stationary fashion: the BCE accumulators are
// cleared, then for every weight step (loops, outermost first: channel
// steps n_ct, kernel rows n_fy, kernel columns n_fx) the controller
//   IDX   reads the index line of the step from the index/activation buffer
//         (in dense mode it only tells the parsers to load the precision),
//   ACT   reads the activation line of the step (held by the dispatcher for
//         all columns of the step),
//   SIGN  reads the sign-column line if any active parser requested it,
//   COMP  reads sync_cnt weight bit-column lines, one per cycle; each line
//         reaches the BCEs the cycle after its read (col_en) and advances
//         the parsers,
// and after the last step writes the tile back through the inter-BCE
// accumulator, one 1024-bit line per cycle. Weight lines are read
// sequentially from w_base; index lines from row idx_base + step.
// The paper gives the role of this block (program fetcher and dispatcher
// with the SU of each layer); the state sequence is this design's own. It
// does not overlap the index/activation reads of the next step with the
// column cycles of the current one, so a step costs 5 cycles (7 with a sign
// column) plus one per stored bit column.
//
// Timing: start is a one-cycle pulse while idle; busy is high from the
// following cycle until done, a one-cycle pulse after the last write-back.
//
// rst_n also disables the SU7 assertion; that is its only synchronous use,
// so the lint note about rst_n being used both ways refers to the checker.
module top_controller
  import bitwave_pkg::*;
#(
  parameter int unsigned IM_DEPTH = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // instruction memory
  output logic                         im_rd_en,
  output logic [$clog2(IM_DEPTH)-1:0]  im_raddr,
  input  instr_t                       im_rdata,
  // current configuration
  output instr_t                       cfg,
  // fetcher
  output logic                         act_req,
  output logic [SEG_AW-1:0]            act_addr,
  output logic                         idx_req,
  output logic [ROW_AW-1:0]            idx_row,
  output logic                         w_req,
  output logic [WLINE_AW-1:0]          w_line_addr,
  // parsers
  output logic                         zc_load,
  output logic                         zc_sign_load,
  output logic                         zc_advance,
  output logic [$clog2(N_PARSER):0]    n_active,
  input  logic [3:0]                   sync_cnt,
  input  logic                         any_sign_rqst,
  // dispatcher / array
  output logic                         act_load,
  output logic                         col_en,
  output logic                         bce_clr,
  // write-back
  output logic                         wb_req,
  output logic [1:0]                   wb_line,
  // statistics
  output logic [31:0]                  stat_steps,
  output logic [31:0]                  stat_cols,
  output logic [31:0]                  stat_sign_rows
);
  typedef enum logic [3:0] {
    S_IDLE, S_IRD, S_ILAT, S_IDX, S_IDXW, S_ACT, S_ACTW, S_SIGN, S_SIGNW,
    S_COMP, S_NEXT, S_WB, S_DONE
  } state_e;

  state_e state;
  logic [$clog2(IM_DEPTH)-1:0] pc;
  logic [11:0] ct;
  logic [3:0]  fy, fx;
  logic [SEG_AW-1:0] ct_base, fy_off;
  logic [ROW_AW-1:0] step;
  logic [3:0]  ncol, col_cnt;
  logic        idx_pend, act_pend, sign_pend, col_pend;
  logic [1:0]  nlines;

  // number of 1024-bit output lines of a tile: OXu*Ku*8/1024 (at least one)
  always_comb begin
    automatic int unsigned n = su_nout(cfg.su) / (LINE_W / ACT_W);
    nlines = (n == 0) ? 2'd0 : 2'(n - 1);     // index of the last line
  end

  assign busy     = (state != S_IDLE);
  assign im_rd_en = (state == S_IRD);
  assign im_raddr = pc;
  assign n_active = ($clog2(N_PARSER)+1)'(su_groups(cfg.su));

  assign idx_req     = (state == S_IDX) && !cfg.dense;
  assign idx_row     = cfg.idx_base + step;
  assign act_req     = (state == S_ACT);
  assign act_addr    = ct_base + fy_off + SEG_AW'(fx);
  assign w_req       = (state == S_SIGN) || (state == S_COMP);
  assign zc_load     = idx_pend || ((state == S_IDX) && cfg.dense);
  assign act_load    = act_pend;
  assign zc_sign_load = sign_pend;
  assign col_en      = col_pend;
  assign zc_advance  = col_pend;
  assign bce_clr     = (state == S_ILAT);
  assign wb_req      = (state == S_WB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      cfg     <= '0;
      ct      <= '0;
      fy      <= '0;
      fx      <= '0;
      ct_base <= '0;
      fy_off  <= '0;
      step    <= '0;
      ncol    <= '0;
      col_cnt <= '0;
      w_line_addr <= '0;
      wb_line <= '0;
      done    <= 1'b0;
      idx_pend <= 1'b0;
      act_pend <= 1'b0;
      sign_pend <= 1'b0;
      col_pend <= 1'b0;
      stat_steps <= '0;
      stat_cols <= '0;
      stat_sign_rows <= '0;
    end else begin
      done      <= 1'b0;
      idx_pend  <= idx_req;
      act_pend  <= act_req;
      sign_pend <= (state == S_SIGN);
      col_pend  <= (state == S_COMP);
      if (w_req) w_line_addr <= w_line_addr + 1'b1;
      if (state == S_COMP) stat_cols <= stat_cols + 1;
      if (state == S_SIGN) stat_sign_rows <= stat_sign_rows + 1;
      unique case (state)
        S_IDLE: if (start) begin
          pc         <= '0;
          stat_steps <= '0;
          stat_cols  <= '0;
          stat_sign_rows <= '0;
          state      <= S_IRD;
        end
        S_IRD:  state <= S_ILAT;
        S_ILAT: begin
          cfg         <= im_rdata;
          ct          <= '0;
          fy          <= '0;
          fx          <= '0;
          ct_base     <= im_rdata.act_base;
          fy_off      <= '0;
          step        <= '0;
          w_line_addr <= im_rdata.w_base;
          state       <= S_IDX;
        end
        S_IDX:  state <= cfg.dense ? S_ACT : S_IDXW;
        S_IDXW: state <= S_ACT;
        S_ACT: begin
          ncol  <= sync_cnt;          // parsers were loaded in the cycle before
          state <= S_ACTW;
        end
        S_ACTW: begin
          col_cnt <= '0;
          if (any_sign_rqst)   state <= S_SIGN;
          else if (ncol != 0)  state <= S_COMP;
          else                 state <= S_NEXT;
        end
        S_SIGN:  state <= S_SIGNW;
        S_SIGNW: state <= (ncol != 0) ? S_COMP : S_NEXT;
        S_COMP: begin
          col_cnt <= col_cnt + 1'b1;
          if (col_cnt + 1'b1 == ncol) state <= S_NEXT;
        end
        S_NEXT: begin
          stat_steps <= stat_steps + 1;
          step <= step + 1'b1;
          if (fx + 1'b1 < cfg.n_fx) begin
            fx    <= fx + 1'b1;
            state <= S_IDX;
          end else if (fy + 1'b1 < cfg.n_fy) begin
            fx     <= '0;
            fy     <= fy + 1'b1;
            fy_off <= fy_off + cfg.stride_y;
            state  <= S_IDX;
          end else if (ct + 1'b1 < cfg.n_ct) begin
            fx      <= '0;
            fy      <= '0;
            fy_off  <= '0;
            ct      <= ct + 1'b1;
            ct_base <= ct_base + (cfg.stride_c << su_lcug(cfg.su));
            state   <= S_IDX;
          end else begin
            wb_line <= '0;
            state   <= S_WB;
          end
        end
        S_WB: begin
          wb_line <= wb_line + 1'b1;
          if (wb_line == nlines) begin
            if (cfg.last) begin
              done  <= 1'b1;
              state <= S_DONE;
            end else begin
              pc    <= pc + 1'b1;
              state <= S_IRD;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a layer must not use the unsupported depthwise unrolling
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDX) |-> (cfg.su != SU7))
    else $error("top_controller: SU7 is not supported");
endmodule
