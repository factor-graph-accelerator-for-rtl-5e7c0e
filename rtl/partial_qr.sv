// partial_qr: Householder partial QR decomposition of one m x n matrix.
//
// The matrix arrives column by column (columns 0..n-1, valid/ready). Step k
// (k = 0..nhat-1) reduces column k: the Evaluate unit builds the reflector
// from column k, emits it as column k of the result (R on and above the
// diagonal, zeros below), and hands the reflector to Update unit k mod NU,
// which applies it to columns k+1..n-1 in turn. Each Update unit writes its
// columns into its own FIFO, and that FIFO feeds the Update unit of the next
// step, so the units form a ring: unit 0 takes step 0 from the input port,
// unit u takes step k from the FIFO of unit u-1, and after NU steps the ring
// wraps to unit 0 again. The first column that reaches a FIFO is the next
// pivot column; the Evaluate unit takes it, so Evaluate of step k+1 overlaps
// Update of step k. Evaluate waits for a unit until that unit has finished
// its previous step (eval_wait shows this stall). Columns that leave step
// nhat-1 are emitted with rows nhat..m-1 holding the reduced remainder.
//
// Result columns leave on out_* with their index, in no fixed order; the
// consumer must take one per cycle (no backpressure). done pulses after all
// n columns have left. Rows below the pivot of already reduced columns are
// never computed.
//
// The one Evaluate unit, NU time-multiplexed Update units and a FIFO behind
// each Update unit, chained in a ring, are taken from the reference
// architecture; the handshake, the column tagging and the stall rule are
// this design's.
module partial_qr
  import fg_pkg::*;
#(
  parameter int unsigned M_ROWS = 39,
  parameter int unsigned N_COLS = 31,
  parameter int unsigned NU     = NU_DEF,
  localparam int unsigned ROW_W = $clog2(M_ROWS + 1),
  localparam int unsigned IDX_W = $clog2(N_COLS + 1),
  localparam int unsigned UW    = (NU > 1) ? $clog2(NU) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ROW_W-1:0]     cfg_m,
  input  logic [IDX_W-1:0]     cfg_n,
  input  logic [IDX_W-1:0]     cfg_nhat,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  fx_t [M_ROWS-1:0]     in_col,
  output logic                 out_valid,
  output logic [IDX_W-1:0]     out_idx,
  output fx_t [M_ROWS-1:0]     out_col,
  output logic                 busy,
  output logic                 done,
  output logic                 eval_wait
);
  localparam int unsigned COL_W = M_ROWS * WORD_W;
  localparam int unsigned ENT_W = IDX_W + COL_W;

  typedef fx_t [M_ROWS-1:0] col_t;

  // ---------------- configuration and input tagging ----------------
  logic [ROW_W-1:0] m_r;
  logic [IDX_W-1:0] n_r, nhat_r, in_cnt, out_cnt;
  logic [ENT_W-1:0] ext_ent;
  assign ext_ent = {in_cnt, in_col};

  // ---------------- FIFO ring ----------------
  logic             f_in_valid  [NU];
  logic             f_in_ready  [NU];
  logic [ENT_W-1:0] f_in_data   [NU];
  logic             f_out_valid [NU];
  logic             f_out_ready [NU];
  logic [ENT_W-1:0] f_out_data  [NU];

  for (genvar f = 0; f < NU; f++) begin : g_fifo
    col_fifo #(.W(ENT_W), .DEPTH(N_COLS)) u_fifo (
      .clk, .rst_n,
      .in_valid(f_in_valid[f]), .in_ready(f_in_ready[f]), .in_data(f_in_data[f]),
      .out_valid(f_out_valid[f]), .out_ready(f_out_ready[f]), .out_data(f_out_data[f]));
  end

  // ---------------- Evaluate unit ----------------
  typedef enum logic [1:0] {E_IDLE, E_WAIT, E_RUN} estate_e;
  estate_e          estate;
  logic [IDX_W-1:0] ek;              // step being evaluated
  logic [UW-1:0]    eu;              // ek mod NU
  logic [UW-1:0]    esrc;            // FIFO feeding step ek (ek > 0)
  logic             ev_start, ev_done, ev_busy;
  col_t             ev_v, ev_rcol;
  fx_t              ev_beta;
  logic             e_src_valid;
  logic [ENT_W-1:0] e_src_data;
  logic             e_pop;

  assign esrc        = (eu == 0) ? UW'(NU - 1) : eu - 1'b1;
  assign e_src_valid = (ek == 0) ? in_valid : f_out_valid[esrc];
  assign e_src_data  = (ek == 0) ? ext_ent  : f_out_data[esrc];

  // ---------------- Update units ----------------
  logic             u_busy    [NU];  // holds a reflector with columns left
  logic             u_run     [NU];  // qr_update running
  logic             u_pend    [NU];  // result waiting to be pushed
  logic [IDX_W-1:0] u_stage   [NU];
  logic [IDX_W-1:0] u_remain  [NU];
  logic [IDX_W-1:0] u_idx     [NU];
  col_t             u_v       [NU];
  fx_t              u_beta    [NU];
  logic             u_start   [NU];
  logic             u_done    [NU];
  logic             u_ubusy   [NU];
  col_t             u_cin     [NU];
  col_t             u_cout    [NU];
  logic             u_src_valid [NU];
  logic [ENT_W-1:0] u_src_data  [NU];
  logic             u_pop     [NU];
  logic             u_last    [NU];  // current step is the final one
  logic             u_push    [NU];  // result leaves this cycle

  assign e_pop = (estate == E_WAIT) && e_src_valid && !u_busy[eu] && (ek < nhat_r);
  assign eval_wait = (estate == E_WAIT) && e_src_valid && u_busy[eu];
  assign ev_start  = e_pop;

  qr_evaluate #(.M_ROWS(M_ROWS)) u_eval (
    .clk, .rst_n, .start(ev_start), .col_in(col_t'(e_src_data[COL_W-1:0])),
    .k(ROW_W'(ek)), .m(m_r), .busy(ev_busy), .done(ev_done),
    .v(ev_v), .beta(ev_beta), .r_col(ev_rcol));

  for (genvar u = 0; u < NU; u++) begin : g_unit
    localparam int unsigned PREV = (u == 0) ? NU - 1 : u - 1;
    assign u_src_valid[u] = (u_stage[u] == 0) ? in_valid : f_out_valid[PREV];
    assign u_src_data[u]  = (u_stage[u] == 0) ? ext_ent  : f_out_data[PREV];
    assign u_pop[u]   = u_busy[u] && !u_run[u] && !u_pend[u] && u_src_valid[u];
    assign u_start[u] = u_pop[u];
    assign u_cin[u]   = col_t'(u_src_data[u][COL_W-1:0]);
    assign u_last[u]  = (u_stage[u] + 1'b1 == nhat_r);
    assign u_push[u]  = u_pend[u] && (u_last[u] ? !ev_done : f_in_ready[u]);

    assign f_in_valid[u] = u_pend[u] && !u_last[u];
    assign f_in_data[u]  = {u_idx[u], u_cout[u]};

    qr_update #(.M_ROWS(M_ROWS)) u_upd (
      .clk, .rst_n, .start(u_start[u]), .col_in(u_cin[u]), .v(u_v[u]),
      .beta(u_beta[u]), .k(ROW_W'(u_stage[u])), .m(m_r),
      .busy(u_ubusy[u]), .done(u_done[u]), .col_out(u_cout[u]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        u_busy[u] <= 1'b0; u_run[u] <= 1'b0; u_pend[u] <= 1'b0;
        u_stage[u] <= '0; u_remain[u] <= '0; u_idx[u] <= '0;
        u_v[u] <= '0; u_beta[u] <= '0;
      end else begin
        if (start) begin
          u_busy[u] <= 1'b0; u_run[u] <= 1'b0; u_pend[u] <= 1'b0;
          u_stage[u] <= '0;
        end else begin
          // the Evaluate unit hands over the reflector of step ek
          if (ev_done && eu == UW'(u)) begin
            u_v[u]      <= ev_v;
            u_beta[u]   <= ev_beta;
            u_stage[u]  <= ek;
            u_remain[u] <= n_r - ek - 1'b1;
            u_busy[u]   <= (n_r - ek - 1'b1) != 0;
          end
          if (u_pop[u]) begin
            u_run[u] <= 1'b1;
            u_idx[u] <= u_src_data[u][ENT_W-1 -: IDX_W];
          end
          if (u_done[u]) begin
            u_run[u]  <= 1'b0;
            u_pend[u] <= 1'b1;
          end
          if (u_push[u]) begin
            u_pend[u]   <= 1'b0;
            u_remain[u] <= u_remain[u] - 1'b1;
            if (u_remain[u] == 1) u_busy[u] <= 1'b0;
          end
        end
      end
    end
  end

  // FIFO f is read by the Update unit after it, or by Evaluate at a step start
  for (genvar f = 0; f < NU; f++) begin : g_pop
    localparam int unsigned NEXT = (f == NU - 1) ? 0 : f + 1;
    assign f_out_ready[f] = (u_pop[NEXT] && u_stage[NEXT] != 0) ||
                            (e_pop && ek != 0 && esrc == UW'(f));
  end

  assign in_ready = (e_pop && ek == 0) || (u_pop[0] && u_stage[0] == 0);

  // ---------------- result port ----------------
  always_comb begin
    out_valid = 1'b0;
    out_idx   = '0;
    out_col   = '0;
    if (ev_done) begin
      out_valid = 1'b1;
      out_idx   = ek;
      out_col   = ev_rcol;
    end else begin
      for (int u = 0; u < int'(NU); u++) begin
        if (u_push[u] && u_last[u]) begin
          out_valid = 1'b1;
          out_idx   = u_idx[u];
          out_col   = u_cout[u];
        end
      end
    end
  end

  // ---------------- step sequencing ----------------
  assign busy = (estate != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      estate <= E_IDLE; ek <= '0; eu <= '0; done <= 1'b0;
      m_r <= '0; n_r <= '0; nhat_r <= '0; in_cnt <= '0; out_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        estate  <= E_WAIT;
        ek      <= '0;
        eu      <= '0;
        m_r     <= cfg_m;
        n_r     <= cfg_n;
        nhat_r  <= cfg_nhat;
        in_cnt  <= '0;
        out_cnt <= '0;
      end else if (estate != E_IDLE) begin
        if (in_valid && in_ready) in_cnt <= in_cnt + 1'b1;
        if (estate == E_WAIT && e_pop) estate <= E_RUN;
        if (estate == E_RUN && ev_done) begin
          ek     <= ek + 1'b1;
          eu     <= (eu == UW'(NU - 1)) ? '0 : eu + 1'b1;
          estate <= E_WAIT;
        end
        if (out_valid) begin
          out_cnt <= out_cnt + 1'b1;
          if (out_cnt + 1'b1 == n_r) begin
            estate <= E_IDLE;
            done   <= 1'b1;
          end
        end
      end
    end
  end

  // The pivot column Evaluate takes is always the next one in index order.
  a_pivot_order: assert property (@(posedge clk) disable iff (!rst_n)
                                  e_pop |-> e_src_data[ENT_W-1 -: IDX_W] == ek);
endmodule
