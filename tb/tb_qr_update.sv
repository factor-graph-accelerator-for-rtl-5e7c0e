// tb_qr_update: self-checking test of one Householder Update unit.
//
// For random columns, pivots and row counts it builds a reflector (v, beta)
// here in double precision, runs the unit and checks a - beta (v^T a) v on
// rows k..m-1, that rows above k are untouched, and that done arrives
// exactly 2(m-k)+4 clocks after start.
module tb_qr_update;
  import fg_pkg::*;
  localparam int M = 10;
  localparam int ROW_W = $clog2(M + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  fx_t [M-1:0] col_in, v, col_out;
  fx_t beta;
  logic [ROW_W-1:0] k, m;

  qr_update #(.M_ROWS(M)) dut (.*);

  int checks = 0, failures = 0;

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t x); return $itor(x) / 65536.0; endfunction

  initial begin
    start = 0; col_in = '0; v = '0; beta = '0; k = '0; m = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int kk, mm, cyc;
      real a [M], vr [M], s, br, sig, nrm, exp_v;
      mm = $urandom_range(2, M);
      kk = $urandom_range(0, mm - 1);
      sig = 0;
      for (int i = 0; i < M; i++) begin
        a[i]  = $itor($urandom_range(0, 4000)) / 1000.0 - 2.0;
        vr[i] = (i < kk || i >= mm) ? 0.0 : $itor($urandom_range(0, 4000)) / 1000.0 - 2.0;
        if (i >= kk && i < mm) sig += vr[i] * vr[i];
      end
      br = (sig > 0) ? 2.0 / sig : 0.0;
      for (int i = 0; i < M; i++) begin col_in[i] = to_fx(a[i]); v[i] = to_fx(vr[i]); end
      beta = to_fx(br);
      k = ROW_W'(kk); m = ROW_W'(mm);
      s = 0;
      for (int i = kk; i < mm; i++) s += fr_fx(v[i]) * fr_fx(col_in[i]);
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2 * (mm - kk) + 4) begin
        failures++; $display("latency %0d, expected %0d", cyc, 2 * (mm - kk) + 4);
      end
      for (int i = 0; i < M; i++) begin
        exp_v = fr_fx(col_in[i]);
        if (i >= kk && i < mm) exp_v -= fr_fx(beta) * s * fr_fx(v[i]);
        checks++;
        if (fr_fx(col_out[i]) - exp_v > 0.005 || exp_v - fr_fx(col_out[i]) > 0.005) begin
          failures++;
          $display("trial %0d row %0d: %f, expected %f", t, i, fr_fx(col_out[i]), exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
