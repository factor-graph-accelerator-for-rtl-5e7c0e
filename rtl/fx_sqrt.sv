// fx_sqrt: sequential fixed-point square root, y = sqrt(x) in Q15.16.
//
// Digit-by-digit integer square root of x << FRAC_W, two radicand bits and
// one root bit per clock. A pulse on start latches x (negative x is taken
// as 0); done pulses (WORD_W + FRAC_W) / 2 + 1 clocks later with y valid
// until the next start. The result is rounded down. The largest input,
// 2^31 - 1 in raw units, has a root below 2^24, so the top 8 bits of y are
// always 0: y is the 24-bit root zero-extended to the word type. Helper of the Evaluate
// unit, which needs the column norm.
module fx_sqrt
  import fg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x,
  output logic busy,
  output logic done,
  output fx_t  y
);
  localparam int unsigned RAD_W = WORD_W + FRAC_W;   // 48 radicand bits
  localparam int unsigned ROOT_W = RAD_W / 2;        // 24 root bits
  localparam int unsigned CNT_W = $clog2(ROOT_W + 1);

  logic [RAD_W-1:0]  rad;
  logic [ROOT_W-1:0] root;
  logic [ROOT_W+1:0] rem;
  logic [CNT_W-1:0]  cnt;

  logic [ROOT_W+1:0] trial, rem_sh;
  assign rem_sh = {rem[ROOT_W-1:0], rad[RAD_W-1:RAD_W-2]};
  assign trial  = {root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0;
      rad <= '0; root <= '0; rem <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rad  <= x[WORD_W-1] ? '0 : {x, FRAC_W'(0)};
        root <= '0;
        rem  <= '0;
        cnt  <= CNT_W'(ROOT_W);
      end else if (busy) begin
        if (cnt != 0) begin
          rad <= rad << 2;
          if (rem_sh >= trial) begin
            rem  <= rem_sh - trial;
            root <= {root[ROOT_W-2:0], 1'b1};
          end else begin
            rem  <= rem_sh;
            root <= {root[ROOT_W-2:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          y    <= fx_t'(root);
        end
      end
    end
  end
endmodule
