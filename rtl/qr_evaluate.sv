// qr_evaluate: Evaluate phase of one Householder step of the partial QR.
//
// Given a column a of the working matrix and the pivot row k, it builds the
// reflector H = I - beta v v^T that maps rows k..m-1 of a onto alpha e_k:
//   sigma = sum_{i>=k} a_i^2,  norm = sqrt(sigma),  alpha = -sign(a_k) norm,
//   v_i = 0 (i<k),  v_k = a_k - alpha,  v_i = a_i (i>k),
//   beta = 1 / (sigma + norm |a_k|)   (= 2 / v^T v).
// It also returns the reduced column (r_col): rows above k unchanged, alpha
// on row k and zeros below, which is column k of the triangular factor. The
// zeros below the diagonal are written, never computed.
// One multiplier accumulates sigma (m-k clocks), then fx_sqrt and fx_div run
// one after the other; done pulses about m-k+80 clocks after start. An
// all-zero column gives beta = 0 (H = I) and alpha = 0.
// The split of Evaluate and Update follows the reference architecture; the
// arithmetic sequence and the one-multiplier datapath are this design's.
module qr_evaluate
  import fg_pkg::*;
#(
  parameter int unsigned M_ROWS = 39,
  localparam int unsigned ROW_W = $clog2(M_ROWS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  fx_t [M_ROWS-1:0]     col_in,
  input  logic [ROW_W-1:0]     k,      // pivot row
  input  logic [ROW_W-1:0]     m,      // rows in use
  output logic                 busy,
  output logic                 done,
  output fx_t [M_ROWS-1:0]     v,
  output fx_t                  beta,
  output fx_t [M_ROWS-1:0]     r_col
);
  typedef enum logic [2:0] {S_IDLE, S_SUM, S_SQRT, S_DIV, S_OUT} state_e;
  state_e state;

  fx_t [M_ROWS-1:0] a;
  logic [ROW_W-1:0] kk, mm, i;
  fx_t sigma, norm, ak;

  logic sq_start, sq_done, sq_busy;
  fx_t  sq_y;
  logic dv_start, dv_done, dv_busy, dv_zero;
  fx_t  dv_q;

  fx_sqrt u_sqrt (.clk, .rst_n, .start(sq_start), .x(sigma), .busy(sq_busy),
                  .done(sq_done), .y(sq_y));
  fx_div  u_div  (.clk, .rst_n, .start(dv_start), .a(FX_ONE),
                  .b(sigma + fx_mul(norm, fx_abs(ak))),
                  .busy(dv_busy), .done(dv_done), .q(dv_q), .div_zero(dv_zero));

  assign busy = (state != S_IDLE);

  // Diagonal value of the reduced column: -sign(a_k) * ||a||.
  fx_t alpha;
  assign alpha = (sigma == 0) ? fx_t'(0) : (ak[WORD_W-1] ? norm : -norm);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; v <= '0; beta <= '0; r_col <= '0;
      a <= '0; kk <= '0; mm <= '0; i <= '0; sigma <= '0; norm <= '0; ak <= '0;
      sq_start <= 1'b0; dv_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          a     <= col_in;
          kk    <= k;
          mm    <= m;
          i     <= k;
          ak    <= col_in[k];
          sigma <= '0;
          state <= S_SUM;
        end
        S_SUM: begin
          if (i < mm) begin
            sigma <= sigma + fx_mul(a[i], a[i]);
            i     <= i + 1'b1;
          end else begin
            sq_start <= 1'b1;
            state    <= S_SQRT;
          end
        end
        S_SQRT: if (sq_done) begin
          norm <= sq_y;
          if (sigma == 0) begin
            state <= S_OUT;
          end else begin
            dv_start <= 1'b1;
            state    <= S_DIV;
          end
        end
        S_DIV: if (dv_done) begin
          state <= S_OUT;
        end
        S_OUT: begin
          beta  <= (sigma == 0 || dv_zero) ? fx_t'(0) : dv_q;
          for (int r = 0; r < int'(M_ROWS); r++) begin
            if (r < int'(kk) || r >= int'(mm)) begin
              v[r]     <= '0;
              r_col[r] <= (r < int'(kk)) ? a[r] : fx_t'(0);
            end else if (r == int'(kk)) begin
              v[r]     <= a[r] - alpha;
              r_col[r] <= alpha;
            end else begin
              v[r]     <= a[r];
              r_col[r] <= '0;
            end
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
