// tb_partial_qr: self-checking test of the partial-QR block.
//
// Builds random matrices, streams them in column by column and compares
// every result column with a Householder QR computed here in double
// precision with the same sign convention (alpha = -sign(a_k) ||a||).
// Four runs: 7 x 5 over 4 columns, 6 x 4 over 2 columns (partial: the
// remaining 4 x 2 block is checked too), 12 x 10 over 9 columns and 10 x 8
// over 3. With 2 Update units the ring wraps, and on the 12 x 10 matrix the
// Update work of a step outlasts two evaluations, so the Evaluate unit must
// stall for a busy Update unit; that is counted and checked.
module tb_partial_qr;
  import fg_pkg::*;
  localparam int M = 12, N = 10, NU = 2;
  localparam int ROW_W = $clog2(M + 1), IDX_W = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  logic [ROW_W-1:0] cfg_m;
  logic [IDX_W-1:0] cfg_n, cfg_nhat;
  logic in_valid, in_ready, out_valid, busy, done, eval_wait;
  fx_t [M-1:0] in_col, out_col;
  logic [IDX_W-1:0] out_idx;

  partial_qr #(.M_ROWS(M), .N_COLS(N), .NU(NU)) dut (.*);

  int checks = 0, failures = 0, waits = 0, outs = 0;
  real a [M][N];
  real ref_a [M][N];
  fx_t [M-1:0] got [N];
  bit  seen [N];

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t v); return $itor(v) / 65536.0; endfunction

  task automatic householder(int m, int n, int nhat);
    for (int k = 0; k < nhat; k++) begin
      real sigma = 0, nrm, alpha, beta, s;
      real v [M];
      for (int i = k; i < m; i++) sigma += ref_a[i][k] ** 2;
      nrm = $sqrt(sigma);
      alpha = (ref_a[k][k] < 0) ? nrm : -nrm;
      if (sigma == 0) continue;
      for (int i = 0; i < M; i++) v[i] = (i < k || i >= m) ? 0.0 : ref_a[i][k];
      v[k] = ref_a[k][k] - alpha;
      beta = 1.0 / (sigma + nrm * ((ref_a[k][k] < 0) ? -ref_a[k][k] : ref_a[k][k]));
      for (int j = k + 1; j < n; j++) begin
        s = 0;
        for (int i = k; i < m; i++) s += v[i] * ref_a[i][j];
        for (int i = k; i < m; i++) ref_a[i][j] -= beta * s * v[i];
      end
      ref_a[k][k] = alpha;
      for (int i = k + 1; i < m; i++) ref_a[i][k] = 0;
    end
  endtask

  always @(posedge clk) begin
    if (eval_wait) waits++;
    if (out_valid) begin
      outs++;
      if (seen[out_idx]) begin failures++; $display("column %0d emitted twice", out_idx); end
      seen[out_idx] = 1;
      got[out_idx] = out_col;
    end
  end

  task automatic run(int m, int n, int nhat);
    int t0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        a[i][j] = (i < m && j < n) ? ($itor($urandom_range(0, 4000)) / 1000.0 - 2.0) : 0.0;
        ref_a[i][j] = a[i][j];
      end
    for (int j = 0; j < N; j++) seen[j] = 0;
    householder(m, n, nhat);
    @(negedge clk);
    cfg_m = ROW_W'(m); cfg_n = IDX_W'(n); cfg_nhat = IDX_W'(nhat);
    start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      begin
        for (int j = 0; j < n; j++) begin
          for (int i = 0; i < M; i++) in_col[i] = to_fx(a[i][j]);
          in_valid = 1;
          do @(posedge clk); while (!in_ready);
          @(negedge clk);
          in_valid = 0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
      end
      begin
        @(posedge done);
      end
    join
    @(negedge clk);
    for (int j = 0; j < n; j++) begin
      checks++;
      if (!seen[j]) begin failures++; $display("column %0d missing", j); end
      for (int i = 0; i < m; i++) begin
        real e = fr_fx(got[j][i]) - ref_a[i][j];
        checks++;
        if (e > 0.01 || e < -0.01) begin
          failures++;
          $display("m=%0d n=%0d: entry (%0d,%0d) = %f, expected %f", m, n, i, j,
                   fr_fx(got[j][i]), ref_a[i][j]);
        end
      end
    end
    $display("run m=%0d n=%0d nhat=%0d: %0d cycles", m, n, nhat, ($time - t0) / 10);
  endtask

  initial begin
    start = 0; in_valid = 0; in_col = '0; cfg_m = '0; cfg_n = '0; cfg_nhat = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(7, 5, 4);
    run(6, 4, 2);
    run(12, 10, 9);
    run(10, 8, 3);
    checks++;
    if (waits == 0) begin failures++; $display("Evaluate never waited for a busy Update unit"); end
    $display("evaluate stalls: %0d cycles, columns out: %0d", waits, outs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
