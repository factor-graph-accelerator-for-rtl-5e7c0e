// fg_accel: factor-graph solver for a chain of LiDAR-inertial keyframes.
//
// The chain x_lo..x_hi of keyframe variables is solved by Gauss-Newton. In
// each iteration the external factor block linearises every factor at the
// current state X and writes the whitened blocks A_b, eps_b into the linear
// system buffer (lin_req / lin_ack handshake). The design then
//   1. eliminates the variables one by one with Householder partial QR,
//      each elimination leaving a conditional [R_j | T_j | d_j] in the
//      Bayes-net store and a new factor tau on the next variable;
//   2. back-substitutes from the root of the Bayes net outwards;
//   3. applies X = X + delta and stops when max |delta| < conv_thresh or
//      after max_iter iterations, copying X to the output buffer.
// Two elimination orders are selectable at run time:
//   ELIM_PARALLEL  both elimination sides work at once, side 0 from x_lo
//                  upwards and side 1 from x_hi downwards; the root is the
//                  middle keyframe r = (lo+hi)/2, which side 0 eliminates
//                  last from the two carried factors; back substitution then
//                  runs on both halves at once with two units.
//   ELIM_SERIAL    side 0 alone, x_lo..x_hi-1, root x_hi, one back-
//                  substitution unit.
// Batch optimisation uses the whole chain as the window; incremental
// smoothing re-solves the three newest keyframes (win_hi-2..win_hi).
// The cost unit is reached directly from the factor block's residual port.
//
// Blocks, their order and the two elimination orders follow the reference
// architecture. The sequencer, the lin_req/lin_ack handshake, the
// full triangularisation of each side job (so tau keeps D rows) and the
// fixed-point number format are this design's.
module fg_accel
  import fg_pkg::*;
#(
  parameter int unsigned KF_MAX = KF_MAX_DEF,
  parameter int unsigned D      = VAR_DIM_DEF,
  parameter int unsigned G      = GPS_ROWS_DEF,
  parameter int unsigned B      = EDGE_ROWS_DEF,
  parameter int unsigned NU     = NU_DEF,
  localparam int unsigned KW    = $clog2(KF_MAX),
  localparam int unsigned AW    = $clog2(KF_MAX * D),
  localparam int unsigned RW    = $clog2(((G > B) ? G : B) + 1),
  localparam int unsigned CW    = $clog2(2*D + 2),
  localparam int unsigned DW    = $clog2(D + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host control
  input  logic          start,
  input  elim_mode_e    mode,
  input  logic [KW-1:0] win_lo,
  input  logic [KW-1:0] win_hi,
  input  logic [7:0]    max_iter,
  input  fx_t           conv_thresh,
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [7:0]    iter_count,
  output fx_t           max_delta,
  // host load of the initial state
  input  logic          x_we,
  input  logic [AW-1:0] x_addr,
  input  fx_t           x_wdata,
  // factor block (outside this design)
  output logic          lin_req,
  input  logic          lin_ack,
  input  logic [AW-1:0] fb_x_addr,
  output fx_t           fb_x_data,
  input  logic          ls_we,
  input  fac_kind_e     ls_kind,
  input  logic [KW-1:0] ls_idx,
  input  logic [RW-1:0] ls_row,
  input  logic [CW-1:0] ls_col,
  input  fx_t           ls_wdata,
  input  logic          res_clear,
  input  logic          res_valid,
  input  fx_t           res_data,
  input  logic          res_last,
  output logic [47:0]   cost,
  output logic          cost_valid,
  // result
  input  logic [AW-1:0] xs_addr,
  output fx_t           xs_data,
  output logic          xs_valid
);
  localparam int unsigned BN_COLS = 2*D + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LIN, S_ELIM, S_ROOT, S_BSROOT, S_BS, S_UPD, S_COPY, S_FIN
  } state_e;
  state_e state;

  // ---------------- buffers ----------------
  logic          upd_en;
  logic [AW-1:0] upd_addr, cp_addr;
  fx_t           upd_delta, cp_data;
  logic          ob_we, ob_commit;

  input_buffer #(.KF_MAX(KF_MAX), .D(D)) u_inbuf (
    .clk, .host_we(x_we), .host_addr(x_addr), .host_wdata(x_wdata),
    .upd_en, .upd_addr, .upd_delta,
    .rd_addr(fb_x_addr), .rd_data(fb_x_data), .cp_addr, .cp_data);

  output_buffer #(.KF_MAX(KF_MAX), .D(D)) u_outbuf (
    .clk, .rst_n, .we(ob_we), .waddr(cp_addr), .wdata(cp_data),
    .commit(ob_commit), .invalidate(start && state == S_IDLE),
    .rd_addr(xs_addr), .rd_data(xs_data), .valid(xs_valid));

  cost_unit #(.COST_W(48)) u_cost (
    .clk, .rst_n, .clear(res_clear), .in_valid(res_valid), .in_data(res_data),
    .in_last(res_last), .cost, .cost_valid);

  fac_kind_e     lsb_kind [2];
  logic [KW-1:0] lsb_idx  [2];
  logic [RW-1:0] lsb_row  [2];
  logic [CW-1:0] lsb_col  [2];
  fx_t           lsb_data [2];

  linear_system_buffer #(.KF_MAX(KF_MAX), .D(D), .G(G), .B(B)) u_lsb (
    .clk, .we(ls_we), .wr_kind(ls_kind), .wr_idx(ls_idx), .wr_row(ls_row),
    .wr_col(ls_col), .wr_data(ls_wdata),
    .rd_kind(lsb_kind), .rd_idx(lsb_idx), .rd_row(lsb_row), .rd_col(lsb_col),
    .rd_data(lsb_data));

  // ---------------- elimination sides ----------------
  logic          clear_tau;
  logic          js_start [2], js_root [2], js_dir [2], js_busy [2], js_done [2];
  logic [KW-1:0] js_var   [2];
  logic [DW-1:0] oth_row  [2], oth_col [2];
  fx_t           oth_data [2];
  logic          bn_we    [2];
  logic [KW-1:0] bn_var   [2];
  logic [CW-1:0] bn_col   [2];
  fx_t [D-1:0]   bn_data  [2];
  logic          eval_wait [2];

  for (genvar s = 0; s < 2; s++) begin : g_side
    elim_side #(.KF_MAX(KF_MAX), .D(D), .G(G), .B(B), .NU(NU)) u_side (
      .clk, .rst_n, .clear_tau,
      .job_start(js_start[s]), .job_root(js_root[s]), .job_dir(js_dir[s]),
      .job_var(js_var[s]), .job_busy(js_busy[s]), .job_done(js_done[s]),
      .ls_kind(lsb_kind[s]), .ls_idx(lsb_idx[s]), .ls_row(lsb_row[s]),
      .ls_col(lsb_col[s]), .ls_data(lsb_data[s]),
      .oth_row(oth_row[s]), .oth_col(oth_col[s]), .oth_data(oth_data[s]),
      .tau_rd_row(oth_row[1-s]), .tau_rd_col(oth_col[1-s]),
      .tau_rd_data(oth_data[1-s]),
      .bn_we(bn_we[s]), .bn_var(bn_var[s]), .bn_col(bn_col[s]),
      .bn_data(bn_data[s]), .eval_wait(eval_wait[s]));
  end

  // ---------------- Bayes net and delta stores ----------------
  fx_t [D-1:0] bn_mem [KF_MAX * BN_COLS];
  fx_t         dl_mem [KF_MAX * D];

  logic          bs_start [2], bs_par [2], bs_busy [2], bs_done [2];
  logic [KW-1:0] bs_var [2], bs_pvar [2];
  logic [DW-1:0] bs_row [2], bs_pidx [2], bs_didx [2];
  logic [CW-1:0] bs_col [2];
  fx_t           bs_cdata [2], bs_pdata [2], bs_dwdata [2];
  logic          bs_dwe [2];

  for (genvar s = 0; s < 2; s++) begin : g_bs
    back_substitution #(.D(D)) u_bs (
      .clk, .rst_n, .start(bs_start[s]), .has_parent(bs_par[s]),
      .cond_row(bs_row[s]), .cond_col(bs_col[s]), .cond_data(bs_cdata[s]),
      .parent_idx(bs_pidx[s]), .parent_data(bs_pdata[s]),
      .delta_we(bs_dwe[s]), .delta_idx(bs_didx[s]), .delta_wdata(bs_dwdata[s]),
      .busy(bs_busy[s]), .done(bs_done[s]));
    assign bs_cdata[s] = bn_mem[int'(bs_var[s]) * BN_COLS + int'(bs_col[s])][bs_row[s]];
    assign bs_pdata[s] = dl_mem[int'(bs_pvar[s]) * D + int'(bs_pidx[s])];
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (bn_we[s]) bn_mem[int'(bn_var[s]) * BN_COLS + int'(bn_col[s])] <= bn_data[s];
      if (bs_dwe[s]) dl_mem[int'(bs_var[s]) * D + int'(bs_didx[s])] <= bs_dwdata[s];
    end
  end

  // ---------------- sequencer ----------------
  elim_mode_e    mode_r;
  logic [KW-1:0] lo_r, hi_r, root_r;
  logic [7:0]    max_iter_r;
  fx_t           thresh_r;
  logic [KW-1:0] nxt  [2];   // next variable of each side / back-substitution unit
  logic [KW:0]   left [2];   // jobs left
  logic          run  [2];
  logic          root_run;
  logic [AW:0]   wi;
  fx_t           dmax;

  assign busy    = (state != S_IDLE);
  assign lin_req = (state == S_LIN);
  assign upd_addr  = AW'(wi);
  assign upd_delta = dl_mem[AW'(wi)];
  assign cp_addr   = AW'(wi);

  always_comb begin
    for (int s = 0; s < 2; s++) begin
      js_start[s] = 1'b0;
      js_root[s]  = 1'b0;
      js_dir[s]   = 1'(s);
      js_var[s]   = nxt[s];
      bs_start[s] = 1'b0;
      bs_par[s]   = 1'b1;
      if (state == S_ELIM && !run[s] && left[s] != 0) js_start[s] = 1'b1;
      if (state == S_BS   && !run[s] && left[s] != 0) bs_start[s] = 1'b1;
    end
    if (state == S_ROOT && !root_run) begin
      js_start[0] = 1'b1;
      js_root[0]  = 1'b1;
      js_var[0]   = root_r;
    end
    if (state == S_BSROOT && !root_run) begin
      bs_start[0] = 1'b1;
      bs_par[0]   = 1'b0;
    end
  end

  // the variable a back-substitution unit solves, and its parent
  always_comb begin
    bs_var[0]  = (state == S_BSROOT) ? root_r : nxt[0];
    bs_pvar[0] = nxt[0] + 1'b1;
    bs_var[1]  = nxt[1];
    bs_pvar[1] = nxt[1] - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; converged <= 1'b0; iter_count <= '0;
      max_delta <= '0; mode_r <= ELIM_PARALLEL; lo_r <= '0; hi_r <= '0;
      root_r <= '0; max_iter_r <= '0; thresh_r <= '0; root_run <= 1'b0;
      wi <= '0; dmax <= '0; clear_tau <= 1'b0; upd_en <= 1'b0;
      ob_we <= 1'b0; ob_commit <= 1'b0;
      for (int s = 0; s < 2; s++) begin nxt[s] <= '0; left[s] <= '0; run[s] <= 1'b0; end
    end else begin
      done      <= 1'b0;
      clear_tau <= 1'b0;
      ob_commit <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_r     <= mode;
          lo_r       <= win_lo;
          hi_r       <= win_hi;
          max_iter_r <= max_iter;
          thresh_r   <= conv_thresh;
          iter_count <= '0;
          converged  <= 1'b0;
          state      <= S_LIN;
        end
        S_LIN: if (lin_ack) begin
          clear_tau <= 1'b1;
          nxt[0]    <= lo_r;
          nxt[1]    <= hi_r;
          if (mode_r == ELIM_PARALLEL) begin
            root_r  <= KW'((int'(lo_r) + int'(hi_r)) / 2);
            left[0] <= (KW+1)'((int'(hi_r) - int'(lo_r)) / 2);
            left[1] <= (KW+1)'(int'(hi_r) - int'(lo_r) - (int'(hi_r) - int'(lo_r)) / 2);
          end else begin
            root_r  <= hi_r;
            left[0] <= (KW+1)'(int'(hi_r) - int'(lo_r));
            left[1] <= '0;
          end
          state <= S_ELIM;
        end
        S_ELIM: begin
          for (int s = 0; s < 2; s++) begin
            if (js_start[s]) run[s] <= 1'b1;
            if (js_done[s]) begin
              run[s]  <= 1'b0;
              left[s] <= left[s] - 1'b1;
              nxt[s]  <= (s == 0) ? nxt[s] + 1'b1 : nxt[s] - 1'b1;
            end
          end
          if (left[0] == 0 && left[1] == 0 && !run[0] && !run[1]) state <= S_ROOT;
        end
        S_ROOT: begin
          if (js_start[0]) root_run <= 1'b1;
          if (js_done[0]) begin
            root_run <= 1'b0;
            state    <= S_BSROOT;
          end
        end
        S_BSROOT: begin
          if (bs_start[0]) root_run <= 1'b1;
          if (bs_done[0]) begin
            root_run <= 1'b0;
            // children of the root: side 0 walks down to lo, side 1 up to hi
            nxt[0]  <= root_r - 1'b1;
            left[0] <= (KW+1)'(int'(root_r) - int'(lo_r));
            nxt[1]  <= root_r + 1'b1;
            left[1] <= (KW+1)'(int'(hi_r) - int'(root_r));
            state   <= S_BS;
          end
        end
        S_BS: begin
          for (int s = 0; s < 2; s++) begin
            if (bs_start[s]) run[s] <= 1'b1;
            if (bs_done[s]) begin
              run[s]  <= 1'b0;
              left[s] <= left[s] - 1'b1;
              nxt[s]  <= (s == 0) ? nxt[s] - 1'b1 : nxt[s] + 1'b1;
            end
          end
          if (left[0] == 0 && left[1] == 0 && !run[0] && !run[1]) begin
            wi     <= (AW+1)'(int'(lo_r) * int'(D));
            dmax   <= '0;
            upd_en <= 1'b1;
            state  <= S_UPD;
          end
        end
        S_UPD: begin
          // X = X + delta over the window, one word per clock
          if (fx_abs(upd_delta) > dmax) dmax <= fx_abs(upd_delta);
          if (wi + 1'b1 == (AW+1)'((int'(hi_r) + 1) * int'(D))) begin
            upd_en     <= 1'b0;
            iter_count <= iter_count + 1'b1;
            max_delta  <= (fx_abs(upd_delta) > dmax) ? fx_abs(upd_delta) : dmax;
            if (((fx_abs(upd_delta) > dmax) ? fx_abs(upd_delta) : dmax) < thresh_r) begin
              converged <= 1'b1;
              wi        <= '0;
              ob_we     <= 1'b1;
              state     <= S_COPY;
            end else if (iter_count + 1'b1 >= max_iter_r) begin
              wi        <= '0;
              ob_we     <= 1'b1;
              state     <= S_COPY;
            end else begin
              state <= S_LIN;
            end
          end else begin
            wi <= wi + 1'b1;
          end
        end
        S_COPY: begin
          if (wi + 1'b1 == (AW+1)'(KF_MAX * D)) begin
            ob_we     <= 1'b0;
            ob_commit <= 1'b1;
            state     <= S_FIN;
          end else begin
            wi <= wi + 1'b1;
          end
        end
        S_FIN: begin
          // X* is visible in the output buffer from this clock on
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the window must be ordered and inside the chain
  a_window: assert property (@(posedge clk) disable iff (!rst_n)
                             (state == S_IDLE && start) |-> (win_lo <= win_hi &&
                             int'(win_hi) < int'(KF_MAX)));
endmodule
