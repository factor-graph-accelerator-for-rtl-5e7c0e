// tb_qr_nu_sweep: the partial-QR block at full size for 4 to 9 Update units.
//
// Six copies of partial_qr, with NU = 4, 5, 6, 7, 8 and 9, all at the
// default matrix size (39 x 31), eliminate the same matrices at the same
// time. The matrices have the shape of one side job of the solver:
// m = D+G+B = 39 rows, n = 2D+1 = 31 columns, reduced over nhat = 30
// columns. Each copy has its own driver, which streams the columns in as
// fast as the copy accepts them. Every result column is compared with a
// double-precision Householder QR with the same sign convention
// (alpha = -sign(a_k) ||a||), and the cycle count of each copy is printed.
// Extra Update units must never make a job slower, and 9 units must be
// faster than 4. The Evaluate stall (eval_wait) is counted per copy and
// must occur with 4 units. A second run reduces a root-job-shaped matrix
// (2D+G = 33 rows, D+1 = 16 columns, nhat = 15).
module tb_qr_nu_sweep;
  import fg_pkg::*;
  localparam int M = 39, N = 31, NCFG = 6, NU_LO = 4;
  localparam int ROW_W = $clog2(M + 1), IDX_W = $clog2(N + 1);
  localparam int RUNS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real a [M][N];
  real ref_a [M][N];
  int  run_m [RUNS] = '{39, 33};
  int  run_n [RUNS] = '{31, 16};
  int  run_h [RUNS] = '{30, 15};
  int  cycles [RUNS][NCFG];
  int  waits [NCFG];
  bit  finished [NCFG];
  event go;

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t v); return $itor(v) / 65536.0; endfunction

  task automatic householder(int m, int n, int nhat);
    real sigma, nrm, alpha, beta, s;
    real v [M];
    for (int k = 0; k < nhat; k++) begin
      sigma = 0;
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

  for (genvar u = 0; u < NCFG; u++) begin : g_cfg
    logic start, in_valid, in_ready, out_valid, busy, done, eval_wait;
    logic [ROW_W-1:0] cfg_m;
    logic [IDX_W-1:0] cfg_n, cfg_nhat, out_idx;
    fx_t [M-1:0] in_col, out_col;
    fx_t [M-1:0] got [N];
    bit seen [N];

    partial_qr #(.M_ROWS(M), .N_COLS(N), .NU(NU_LO + u)) dut (.*);

    always @(posedge clk) begin
      if (eval_wait) waits[u]++;
      if (out_valid) begin
        if (seen[out_idx]) begin
          failures++;
          $display("NU=%0d: column %0d emitted twice", NU_LO + u, out_idx);
        end
        seen[out_idx] = 1;
        got[out_idx]  = out_col;
      end
    end

    initial begin
      int t0;
      start = 0; in_valid = 0; in_col = '0; cfg_m = '0; cfg_n = '0; cfg_nhat = '0;
      for (int r = 0; r < RUNS; r++) begin
        @go;
        for (int j = 0; j < N; j++) seen[j] = 0;
        @(negedge clk);
        cfg_m = ROW_W'(run_m[r]); cfg_n = IDX_W'(run_n[r]); cfg_nhat = IDX_W'(run_h[r]);
        start = 1; @(negedge clk); start = 0;
        t0 = $time;
        fork
          begin
            for (int j = 0; j < run_n[r]; j++) begin
              for (int i = 0; i < M; i++) in_col[i] = to_fx(a[i][j]);
              in_valid = 1;
              do @(posedge clk); while (!in_ready);
              @(negedge clk);
              in_valid = 0;
            end
          end
          begin
            @(posedge done);
          end
        join
        cycles[r][u] = int'(($time - t0) / 10);
        @(negedge clk);
        for (int j = 0; j < run_n[r]; j++) begin
          checks++;
          if (!seen[j]) begin
            failures++;
            $display("NU=%0d: column %0d missing", NU_LO + u, j);
          end
          for (int i = 0; i < run_m[r]; i++) begin
            real e, tol;
            e   = fr_fx(got[j][i]) - ref_a[i][j];
            tol = 0.02 + 0.01 * ((ref_a[i][j] < 0) ? -ref_a[i][j] : ref_a[i][j]);
            checks++;
            if (e > tol || e < -tol) begin
              failures++;
              $display("NU=%0d run %0d: entry (%0d,%0d) = %f, expected %f", NU_LO + u, r,
                       i, j, fr_fx(got[j][i]), ref_a[i][j]);
            end
          end
        end
        finished[u] = 1;
      end
    end
  end

  initial begin
    for (int u = 0; u < NCFG; u++) waits[u] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < RUNS; r++) begin
      for (int i = 0; i < M; i++)
        for (int j = 0; j < N; j++) begin
          a[i][j] = (i < run_m[r] && j < run_n[r]) ?
                    ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0) : 0.0;
          ref_a[i][j] = a[i][j];
        end
      householder(run_m[r], run_n[r], run_h[r]);
      for (int u = 0; u < NCFG; u++) finished[u] = 0;
      repeat (2) @(negedge clk);
      ->go;
      wait (finished.and() == 1'b1);
      for (int u = 0; u < NCFG; u++)
        $display("run %0d (%0d x %0d, nhat %0d): NU=%0d %0d cycles", r, run_m[r], run_n[r],
                 run_h[r], NU_LO + u, cycles[r][u]);
      for (int u = 1; u < NCFG; u++) begin
        checks++;
        if (cycles[r][u] > cycles[r][u-1]) begin
          failures++;
          $display("run %0d: NU=%0d slower than NU=%0d", r, NU_LO + u, NU_LO + u - 1);
        end
      end
      checks++;
      if (cycles[r][NCFG-1] >= cycles[r][0]) begin
        failures++;
        $display("run %0d: 9 Update units no faster than 4", r);
      end
      $display("run %0d: speedup NU=9 over NU=4 %0.2f", r,
               $itor(cycles[r][0]) / $itor(cycles[r][NCFG-1]));
    end
    for (int u = 0; u < NCFG; u++)
      $display("NU=%0d: evaluate stalls %0d cycles", NU_LO + u, waits[u]);
    checks++;
    if (waits[0] == 0) begin
      failures++;
      $display("Evaluate never waited with 4 Update units");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
