// elim_side: one elimination side, a partial-QR block with its matrix builder.
//
// A job eliminates one keyframe variable x_j. The side gathers the small
// dense matrix A_bar_j straight from the linear system buffer and its own
// carried factor tau, because the chain fixes which factors take part:
//   side job  rows:  tau_j (D) | GPS g_j (G) | between factor on edge e (B)
//             cols:  x_j (D)   | neighbour x_n (D) | rhs
//             left side  (dir=0): n = j+1, e = j
//             right side (dir=1): n = j-1, e = j-1 (the edge's two column
//             blocks are swapped so that x_j comes first)
//   root job  rows:  own tau (D) | other side's tau (D) | g_j (G)
//             cols:  x_j (D) | rhs
// Columns are built one entry per clock and streamed into partial_qr. The
// QR result gives the conditional p(x_j | x_n) = [R_j | T_j | d_j] (rows
// 0..D-1), written to the Bayes-net store one column at a time, and the new
// factor tau on x_n (rows D..2D-1 of the neighbour and rhs columns), which
// replaces tau when the job ends. Side jobs are reduced over all 2D variable
// columns (nhat = 2D), so tau stays a D x (D+1) triangular block; the root
// job over its D columns.
// job_done pulses once every column has left the QR block. clear_tau zeroes
// tau (start of a solve: the first variable has no carried factor).
module elim_side
  import fg_pkg::*;
#(
  parameter int unsigned KF_MAX = KF_MAX_DEF,
  parameter int unsigned D      = VAR_DIM_DEF,
  parameter int unsigned G      = GPS_ROWS_DEF,
  parameter int unsigned B      = EDGE_ROWS_DEF,
  parameter int unsigned NU     = NU_DEF,
  localparam int unsigned M_ROWS = ((D + G + B) > (2*D + G)) ? (D + G + B) : (2*D + G),
  localparam int unsigned N_COLS = 2*D + 1,
  localparam int unsigned KW    = $clog2(KF_MAX),
  localparam int unsigned RW    = $clog2(((G > B) ? G : B) + 1),
  localparam int unsigned CW    = $clog2(2*D + 2),
  localparam int unsigned DW    = $clog2(D + 1),
  localparam int unsigned ROW_W = $clog2(M_ROWS + 1),
  localparam int unsigned IDX_W = $clog2(N_COLS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_tau,
  input  logic             job_start,
  input  logic             job_root,
  input  logic             job_dir,
  input  logic [KW-1:0]    job_var,
  output logic             job_busy,
  output logic             job_done,
  // linear system buffer read port
  output fac_kind_e        ls_kind,
  output logic [KW-1:0]    ls_idx,
  output logic [RW-1:0]    ls_row,
  output logic [CW-1:0]    ls_col,
  input  fx_t              ls_data,
  // the other side's tau (root job)
  output logic [DW-1:0]    oth_row,
  output logic [DW-1:0]    oth_col,
  input  fx_t              oth_data,
  // this side's tau, for the other side
  input  logic [DW-1:0]    tau_rd_row,
  input  logic [DW-1:0]    tau_rd_col,
  output fx_t              tau_rd_data,
  // Bayes-net store write port: one column of a conditional
  output logic             bn_we,
  output logic [KW-1:0]    bn_var,
  output logic [CW-1:0]    bn_col,
  output fx_t [D-1:0]      bn_data,
  output logic             eval_wait
);
  typedef fx_t [M_ROWS-1:0] col_t;

  fx_t tau      [D][D+1];
  fx_t tau_next [D][D+1];

  logic             root_r, dir_r;
  logic [KW-1:0]    var_r;
  logic [ROW_W-1:0] m_r;
  logic [IDX_W-1:0] n_r;
  logic [ROW_W-1:0] fi;          // fetch row
  logic [IDX_W-1:0] fc;          // fetch column
  logic             fetching, col_full;
  col_t             col_buf;

  // QR block
  logic             qr_start, qr_in_valid, qr_in_ready, qr_out_valid, qr_busy, qr_done;
  logic [IDX_W-1:0] qr_out_idx;
  col_t             qr_out_col;

  partial_qr #(.M_ROWS(M_ROWS), .N_COLS(N_COLS), .NU(NU)) u_qr (
    .clk, .rst_n, .start(qr_start), .cfg_m(m_r), .cfg_n(n_r),
    .cfg_nhat(n_r - 1'b1),
    .in_valid(qr_in_valid), .in_ready(qr_in_ready), .in_col(col_buf),
    .out_valid(qr_out_valid), .out_idx(qr_out_idx), .out_col(qr_out_col),
    .busy(qr_busy), .done(qr_done), .eval_wait);

  assign qr_in_valid = col_full;
  assign job_busy    = fetching || col_full || qr_busy || qr_start;

  // ---------------- element of A_bar at (fi, fc) ----------------
  logic            is_rhs;
  fx_t             elem;
  assign is_rhs = root_r ? (fc == IDX_W'(D)) : (fc == IDX_W'(2*D));

  always_comb begin
    ls_kind = FAC_UNARY;
    ls_idx  = var_r;
    ls_row  = '0;
    ls_col  = '0;
    oth_row = '0;
    oth_col = '0;
    elem    = '0;
    if (root_r) begin
      if (fi < ROW_W'(D)) begin
        elem = tau[DW'(fi)][DW'(fc)];
      end else if (fi < ROW_W'(2*D)) begin
        oth_row = DW'(fi - ROW_W'(D));
        oth_col = DW'(fc);
        elem    = oth_data;
      end else begin
        ls_kind = FAC_UNARY;
        ls_row  = RW'(fi - ROW_W'(2*D));
        ls_col  = CW'(fc);
        elem    = ls_data;
      end
    end else begin
      if (fi < ROW_W'(D)) begin
        if (fc < IDX_W'(D)) elem = tau[DW'(fi)][DW'(fc)];
        else if (is_rhs)    elem = tau[DW'(fi)][D];
      end else if (fi < ROW_W'(D + G)) begin
        ls_kind = FAC_UNARY;
        ls_row  = RW'(fi - ROW_W'(D));
        ls_col  = is_rhs ? CW'(D) : CW'(fc);
        if (fc < IDX_W'(D) || is_rhs) elem = ls_data;
      end else begin
        ls_kind = FAC_BINARY;
        ls_idx  = dir_r ? var_r - 1'b1 : var_r;
        ls_row  = RW'(fi - ROW_W'(D + G));
        if (is_rhs)                 ls_col = CW'(2*D);
        else if (!dir_r)            ls_col = CW'(fc);
        else if (fc < IDX_W'(D))    ls_col = CW'(fc) + CW'(D);
        else                        ls_col = CW'(fc) - CW'(D);
        elem = ls_data;
      end
    end
  end

  assign tau_rd_data = tau[tau_rd_row][tau_rd_col];

  // ---------------- QR result -> conditional and new tau ----------------
  always_comb begin
    bn_we   = qr_out_valid;
    bn_var  = var_r;
    bn_col  = (root_r && qr_out_idx == IDX_W'(D)) ? CW'(2*D) : CW'(qr_out_idx);
    for (int r = 0; r < int'(D); r++) bn_data[r] = qr_out_col[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      root_r <= 1'b0; dir_r <= 1'b0; var_r <= '0; m_r <= '0; n_r <= '0;
      fi <= '0; fc <= '0; fetching <= 1'b0; col_full <= 1'b0; col_buf <= '0;
      qr_start <= 1'b0; job_done <= 1'b0;
      for (int r = 0; r < int'(D); r++)
        for (int c = 0; c <= int'(D); c++) begin
          tau[r][c] <= '0; tau_next[r][c] <= '0;
        end
    end else begin
      qr_start <= 1'b0;
      job_done <= 1'b0;
      if (clear_tau) begin
        for (int r = 0; r < int'(D); r++)
          for (int c = 0; c <= int'(D); c++) tau[r][c] <= '0;
      end
      if (job_start) begin
        root_r   <= job_root;
        dir_r    <= job_dir;
        var_r    <= job_var;
        m_r      <= job_root ? ROW_W'(2*D + G) : ROW_W'(D + G + B);
        n_r      <= job_root ? IDX_W'(D + 1)   : IDX_W'(2*D + 1);
        fi       <= '0;
        fc       <= '0;
        fetching <= 1'b1;
        col_buf  <= '0;
        qr_start <= 1'b1;
      end else begin
        if (col_full && qr_in_ready) col_full <= 1'b0;
        if (fetching && !col_full) begin
          col_buf[fi] <= elem;
          if (fi + 1'b1 == m_r) begin
            fi       <= '0;
            col_full <= 1'b1;
            fc       <= fc + 1'b1;
            if (fc + 1'b1 == n_r) fetching <= 1'b0;
          end else begin
            fi <= fi + 1'b1;
          end
        end
        if (qr_out_valid && !root_r && qr_out_idx >= IDX_W'(D)) begin
          for (int r = 0; r < int'(D); r++)
            tau_next[r][DW'(qr_out_idx - IDX_W'(D))] <= qr_out_col[D + r];
        end
        if (qr_done) begin
          job_done <= 1'b1;
          if (!root_r) tau <= tau_next;
        end
      end
    end
  end
endmodule
