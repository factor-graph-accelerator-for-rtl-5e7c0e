// qr_update: Update phase of one Householder step, applied to one column.
//
// Computes a' = H a = a - (beta (v^T a)) v on rows k..m-1 of the column and
// leaves rows above k untouched: those rows are final and, below the
// diagonal, known to be zero, so no work is spent on them.
// One multiplier is shared by the dot product (m-k clocks), the scale
// (1 clock) and the axpy (m-k clocks); done is seen 2(m-k)+4 clocks after
// start, with col_out valid until the next start. The partial-QR block holds
// several of these units and time-multiplexes them over the columns of the
// matrix; the sequencing inside one unit is this design's.
module qr_update
  import fg_pkg::*;
#(
  parameter int unsigned M_ROWS = 39,
  localparam int unsigned ROW_W = $clog2(M_ROWS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  fx_t [M_ROWS-1:0]     col_in,
  input  fx_t [M_ROWS-1:0]     v,
  input  fx_t                  beta,
  input  logic [ROW_W-1:0]     k,
  input  logic [ROW_W-1:0]     m,
  output logic                 busy,
  output logic                 done,
  output fx_t [M_ROWS-1:0]     col_out
);
  typedef enum logic [1:0] {S_IDLE, S_DOT, S_SCALE, S_AXPY} state_e;
  state_e state;

  fx_t [M_ROWS-1:0] vv;
  fx_t              bb, s;
  logic [ROW_W-1:0] kk, mm, i;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; col_out <= '0;
      vv <= '0; bb <= '0; s <= '0; kk <= '0; mm <= '0; i <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          col_out <= col_in;
          vv      <= v;
          bb      <= beta;
          kk      <= k;
          mm      <= m;
          i       <= k;
          s       <= '0;
          state   <= S_DOT;
        end
        S_DOT: begin
          if (i < mm) begin
            s <= s + fx_mul(vv[i], col_out[i]);
            i <= i + 1'b1;
          end else begin
            state <= S_SCALE;
          end
        end
        S_SCALE: begin
          s     <= fx_mul(s, bb);
          i     <= kk;
          state <= S_AXPY;
        end
        S_AXPY: begin
          if (i < mm) begin
            col_out[i] <= col_out[i] - fx_mul(s, vv[i]);
            i          <= i + 1'b1;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
