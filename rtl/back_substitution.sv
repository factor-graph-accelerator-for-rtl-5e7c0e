// back_substitution: solves one conditional of the Bayes net for its variable.
//
// A conditional p(x_j | x_p) is stored as D rows [R_j | T_j | d_j]: R_j upper
// triangular (columns 0..D-1), T_j the coupling to the parent variable
// (columns D..2D-1) and d_j the right-hand side (column 2D). The unit solves
//   R_j delta_j = d_j - T_j delta_p
// from the last row upwards. For each row r it accumulates d_r, subtracts
// R_rc delta_c for c > r (already solved) and, with has_parent, T_rc
// delta_p,c, then divides by R_rr (a zero pivot gives delta_r = 0).
// The conditional and the parent solution are read through combinational
// read ports (address out, data back in the same clock); every solved entry
// is written out on delta_we/delta_idx/delta_wdata as it is found. About
// D(D+1)/2 + D*D + D*(WORD_W+FRAC_W+3) clocks per variable. One multiplier
// and one fx_div. The reference architecture has two such units working on
// the two halves of the chain; the row-serial schedule is this design's.
module back_substitution
  import fg_pkg::*;
#(
  parameter int unsigned D = VAR_DIM_DEF,
  localparam int unsigned DW = $clog2(D + 1),
  localparam int unsigned CW = $clog2(2*D + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          has_parent,
  output logic [DW-1:0] cond_row,
  output logic [CW-1:0] cond_col,
  input  fx_t           cond_data,
  output logic [DW-1:0] parent_idx,
  input  fx_t           parent_data,
  output logic          delta_we,
  output logic [DW-1:0] delta_idx,
  output fx_t           delta_wdata,
  output logic          busy,
  output logic          done
);
  typedef enum logic [2:0] {S_IDLE, S_RHS, S_RSUM, S_TSUM, S_PIV, S_DIV} state_e;
  state_e state;

  fx_t              x [D];           // solved entries of delta_j
  fx_t              acc;
  logic [DW-1:0]    r, c;
  logic             par;
  logic             dv_start, dv_done, dv_busy, dv_zero;
  fx_t              dv_q, piv;

  fx_div u_div (.clk, .rst_n, .start(dv_start), .a(acc), .b(piv),
                .busy(dv_busy), .done(dv_done), .q(dv_q), .div_zero(dv_zero));

  assign busy = (state != S_IDLE);

  // read addresses
  always_comb begin
    cond_row   = r;
    cond_col   = '0;
    parent_idx = c;
    unique case (state)
      S_RHS:   cond_col = CW'(2*D);
      S_RSUM:  cond_col = CW'(c);
      S_TSUM:  cond_col = CW'(D) + CW'(c);
      S_PIV:   cond_col = CW'(r);
      default: cond_col = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; acc <= '0; r <= '0; c <= '0; par <= 1'b0;
      dv_start <= 1'b0; piv <= '0; done <= 1'b0;
      delta_we <= 1'b0; delta_idx <= '0; delta_wdata <= '0;
      for (int i = 0; i < int'(D); i++) x[i] <= '0;
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      delta_we <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          par   <= has_parent;
          r     <= DW'(D - 1);
          state <= S_RHS;
        end
        S_RHS: begin
          acc   <= cond_data;
          c     <= r + 1'b1;
          state <= S_RSUM;
        end
        S_RSUM: begin
          if (c < DW'(D)) begin
            acc <= acc - fx_mul(cond_data, x[c]);
            c   <= c + 1'b1;
          end else begin
            c     <= '0;
            state <= par ? S_TSUM : S_PIV;
          end
        end
        S_TSUM: begin
          if (c < DW'(D)) begin
            acc <= acc - fx_mul(cond_data, parent_data);
            c   <= c + 1'b1;
          end else begin
            state <= S_PIV;
          end
        end
        S_PIV: begin
          piv      <= cond_data;
          dv_start <= 1'b1;
          state    <= S_DIV;
        end
        S_DIV: if (dv_done) begin
          x[r]        <= dv_zero ? fx_t'(0) : dv_q;
          delta_we    <= 1'b1;
          delta_idx   <= r;
          delta_wdata <= dv_zero ? fx_t'(0) : dv_q;
          if (r == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            r     <= r - 1'b1;
            state <= S_RHS;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
