// tb_qr_evaluate: self-checking test of the Householder Evaluate unit.
//
// For random columns, pivots and row counts it checks, against double
// precision: the reduced column (rows above k kept, alpha = -sign(a_k)||a||
// on row k, zeros below), the reflector v, and that beta v^T v = 2 (so H is
// orthogonal). An all-zero column must give beta = 0 and alpha = 0.
module tb_qr_evaluate;
  import fg_pkg::*;
  localparam int M = 10;
  localparam int ROW_W = $clog2(M + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  fx_t [M-1:0] col_in, v, r_col;
  fx_t beta;
  logic [ROW_W-1:0] k, m;

  qr_evaluate #(.M_ROWS(M)) dut (.*);

  int checks = 0, failures = 0;

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t x); return $itor(x) / 65536.0; endfunction

  task automatic chk(real got, real exp_v, real tol, string what);
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      $display("%s: %f, expected %f", what, got, exp_v);
    end
  endtask

  initial begin
    start = 0; col_in = '0; k = '0; m = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 41; t++) begin
      int kk, mm;
      real a [M], sig, nrm, alpha, vtv;
      mm = $urandom_range(2, M);
      kk = $urandom_range(0, mm - 1);
      sig = 0;
      for (int i = 0; i < M; i++) begin
        a[i] = (t == 40) ? 0.0 : $itor($urandom_range(0, 4000)) / 1000.0 - 2.0;
        col_in[i] = to_fx(a[i]);
        a[i] = fr_fx(col_in[i]);
        if (i >= kk && i < mm) sig += a[i] * a[i];
      end
      nrm = $sqrt(sig);
      alpha = (sig == 0) ? 0.0 : (a[kk] < 0 ? nrm : -nrm);
      k = ROW_W'(kk); m = ROW_W'(mm);
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      vtv = 0;
      for (int i = 0; i < M; i++) begin
        real ev, er;
        if (i < kk)       begin er = a[i];  ev = 0.0; end
        else if (i == kk) begin er = alpha; ev = a[i] - alpha; end
        else if (i < mm)  begin er = 0.0;   ev = a[i]; end
        else              begin er = 0.0;   ev = 0.0; end
        chk(fr_fx(r_col[i]), er, 0.002, $sformatf("trial %0d r_col[%0d]", t, i));
        chk(fr_fx(v[i]), ev, 0.002, $sformatf("trial %0d v[%0d]", t, i));
        vtv += fr_fx(v[i]) ** 2;
      end
      if (sig == 0) chk(fr_fx(beta), 0.0, 0.0, "beta of a zero column");
      else          chk(fr_fx(beta) * vtv, 2.0, 0.01 + 2.0 * vtv / 65536.0, $sformatf("trial %0d beta v'v", t));
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
