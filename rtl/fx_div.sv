// fx_div: sequential signed fixed-point divider, q = a / b in Q15.16.
//
// Restoring division of |a| << FRAC_W by |b|, one quotient bit per clock,
// followed by the sign correction. A pulse on start latches a and b; done
// pulses WORD_W + FRAC_W + 1 clocks later with q valid until the next start.
// Division by zero returns 0 and raises div_zero with done. A quotient
// that does not fit saturates to the largest magnitude of the right sign.
// Helper of the Evaluate unit and of back substitution.
module fx_div
  import fg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  a,
  input  fx_t  b,
  output logic busy,
  output logic done,
  output fx_t  q,
  output logic div_zero
);
  localparam int unsigned NUM_W = WORD_W + FRAC_W;
  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0]  num;     // remaining dividend bits, shifted out MSB first
  logic [NUM_W-1:0]  quo;
  logic [WORD_W:0]   rem;
  logic [WORD_W-1:0] den;
  logic              neg;
  logic [CNT_W-1:0]  cnt;

  logic [WORD_W:0] rem_sh;
  assign rem_sh = {rem[WORD_W-1:0], num[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; div_zero <= 1'b0;
      num <= '0; quo <= '0; rem <= '0; den <= '0; neg <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= (b != 0);
        done     <= (b == 0);
        div_zero <= (b == 0);
        q        <= '0;
        num      <= {WORD_W'(fx_abs(a)), FRAC_W'(0)};
        den      <= WORD_W'(fx_abs(b));
        neg      <= a[WORD_W-1] ^ b[WORD_W-1];
        rem      <= '0;
        quo      <= '0;
        cnt      <= CNT_W'(NUM_W);
      end else if (busy) begin
        if (cnt != 0) begin
          num <= num << 1;
          if (rem_sh >= {1'b0, den}) begin
            rem <= rem_sh - {1'b0, den};
            quo <= {quo[NUM_W-2:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[NUM_W-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (quo > NUM_W'(2**(WORD_W-1) - 1))
            q <= neg ? fx_t'(-(2**(WORD_W-1) - 1)) : fx_t'(2**(WORD_W-1) - 1);
          else
            q <= neg ? -fx_t'(quo[WORD_W-1:0]) : fx_t'(quo[WORD_W-1:0]);
        end
      end
    end
  end
endmodule
