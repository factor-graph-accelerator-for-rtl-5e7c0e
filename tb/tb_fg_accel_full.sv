// tb_fg_accel_full: the solver at its default size, one complete batch solve.
//
// Same factor-block model and checks as tb_fg_accel, with the top at its
// default parameters: 30 keyframes of 15 dimensions, 3 GPS rows per
// keyframe, 21 between-factor rows per edge and 9 Update units per QR
// block. All scenarios of the smaller test are run at this size: parallel
// and serial batch solves of the 30-keyframe chain, a 29-keyframe batch,
// incremental smoothing of the three newest keyframes in both orders, a
// solve stopped by the iteration limit and the cost path. Every entry of X*
// is compared with the true state each time.
module tb_fg_accel_full;
  import fg_pkg::*;
  localparam int KF = KF_MAX_DEF, D = VAR_DIM_DEF, G = GPS_ROWS_DEF, B = EDGE_ROWS_DEF;
  localparam bit FULL = 1'b0;   // 1: one batch solve only
  localparam int KW = $clog2(KF), AW = $clog2(KF * D);
  localparam int RW = $clog2(((G > B) ? G : B) + 1), CW = $clog2(2*D + 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, converged, x_we, lin_req, lin_ack, ls_we;
  logic res_clear, res_valid, res_last, cost_valid, xs_valid;
  elim_mode_e mode;
  logic [KW-1:0] win_lo, win_hi, ls_idx;
  logic [7:0] max_iter, iter_count;
  fx_t conv_thresh, max_delta, x_wdata, fb_x_data, ls_wdata, res_data, xs_data;
  logic [AW-1:0] x_addr, fb_x_addr, xs_addr;
  fac_kind_e ls_kind;
  logic [RW-1:0] ls_row;
  logic [CW-1:0] ls_col;
  logic [47:0] cost;

  fg_accel dut (.*);

  real U  [KF][G][D];
  real Ja [KF][B][D];
  real Jb [KF][B][D];
  real xt [KF][D];
  real zu [KF][G];
  real zb [KF][B];
  real xs_prev [KF][D];

  int checks = 0, failures = 0;
  int n_par = 0, n_ser = 0, n_inc = 0, n_relin = 0, n_conv = 0, n_limit = 0;
  int n_stall = 0, n_both_qr = 0, n_both_bs = 0, n_cost = 0, n_uneven = 0;
  int lin_served = 0;

  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t x); return $itor(x) / 65536.0; endfunction
  function automatic real rnd(); return $itor($urandom_range(0, 2000)) / 1000.0 - 1.0; endfunction

  always @(posedge clk) begin
    if (dut.eval_wait[0] || dut.eval_wait[1]) n_stall++;
    if (dut.js_busy[0] && dut.js_busy[1]) n_both_qr++;
    if (dut.bs_busy[0] && dut.bs_busy[1]) n_both_bs++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // current state as seen by the factor block
  task automatic read_x(int j, int i, output real v);
    fb_x_addr = AW'(j * D + i);
    #1;
    v = fr_fx(fb_x_data);
  endtask

  task automatic ls_write(fac_kind_e kd, int j, int r, int c, real v);
    @(negedge clk);
    ls_we = 1; ls_kind = kd; ls_idx = KW'(j); ls_row = RW'(r); ls_col = CW'(c);
    ls_wdata = to_fx(v);
    @(negedge clk);
    ls_we = 0;
  endtask

  // residuals at the current state, optionally streamed into the cost unit
  task automatic residuals(bit to_cost, output real total);
    real x [KF][D];
    total = 0;
    for (int j = 0; j < KF; j++) for (int i = 0; i < D; i++) read_x(j, i, x[j][i]);
    if (to_cost) begin @(negedge clk); res_clear = 1; @(negedge clk); res_clear = 0; end
    for (int j = 0; j < KF; j++) begin
      for (int r = 0; r < G; r++) begin
        real e;
        e = zu[j][r];
        for (int c = 0; c < D; c++) e -= U[j][r][c] * x[j][c];
        if (!to_cost) begin
          for (int c = 0; c < D; c++) ls_write(FAC_UNARY, j, r, c, U[j][r][c]);
          ls_write(FAC_UNARY, j, r, D, e);
        end else begin
          res_valid = 1; res_data = to_fx(e); res_last = (j == KF - 1 && r == G - 1);
          @(negedge clk); res_valid = 0; res_last = 0;
          total += fr_fx(to_fx(e)) ** 2;
        end
      end
    end
    if (!to_cost)
      for (int e = 0; e < KF - 1; e++)
        for (int r = 0; r < B; r++) begin
          real v;
          v = zb[e][r];
          for (int c = 0; c < D; c++) v -= Ja[e][r][c] * x[e][c] + Jb[e][r][c] * x[e+1][c];
          for (int c = 0; c < D; c++) ls_write(FAC_BINARY, e, r, c, Ja[e][r][c]);
          for (int c = 0; c < D; c++) ls_write(FAC_BINARY, e, r, D + c, Jb[e][r][c]);
          ls_write(FAC_BINARY, e, r, 2*D, v);
        end
  endtask

  // factor block: answer every linearisation request
  initial begin
    real dummy;
    lin_ack = 0;
    forever begin
      @(negedge clk);
      if (lin_req) begin
        residuals(0, dummy);
        lin_served++;
        @(negedge clk); lin_ack = 1; @(negedge clk); lin_ack = 0;
      end
    end
  end

  task automatic load_x(int lo, int hi, real noise);
    for (int j = lo; j <= hi; j++)
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        x_we = 1; x_addr = AW'(j * D + i); x_wdata = to_fx(xt[j][i] + noise * rnd());
        @(negedge clk);
        x_we = 0;
      end
  endtask

  task automatic run_solve(elim_mode_e md, int lo, int hi, int iters, real thr,
                       bit expect_conv, string name);
    int t0, served0;
    served0 = lin_served;
    @(negedge clk);
    mode = md; win_lo = KW'(lo); win_hi = KW'(hi); max_iter = 8'(iters);
    conv_thresh = to_fx(thr);
    start = 1; @(negedge clk); start = 0;
    t0 = $time;
    @(posedge done);
    @(negedge clk);
    $display("%s: window %0d..%0d, %0d iterations, %0d cycles, max|delta| %f", name, lo, hi,
             iter_count, ($time - t0) / 10, fr_fx(max_delta));
    chk(xs_valid, {name, ": result not valid"});
    chk(converged == expect_conv, {name, ": wrong convergence flag"});
    chk(lin_served - served0 == int'(iter_count), {name, ": one linearisation per iteration"});
    if (iter_count > 1) n_relin++;
    if (converged) n_conv++; else n_limit++;
    for (int j = 0; j < KF; j++)
      for (int i = 0; i < D; i++) begin
        real got, exp_v;
        xs_addr = AW'(j * D + i);
        #1;
        got = fr_fx(xs_data);
        exp_v = (j >= lo && j <= hi) ? xt[j][i] : xs_prev[j][i];
        chk(got - exp_v < 0.02 && exp_v - got < 0.02,
            $sformatf("%s: x[%0d][%0d] = %f, expected %f", name, j, i, got, exp_v));
        xs_prev[j][i] = got;
      end
    if (md == ELIM_PARALLEL) n_par++; else n_ser++;
  endtask

  initial begin
    real c_model;
    start = 0; mode = ELIM_PARALLEL; win_lo = '0; win_hi = '0; max_iter = '0; conv_thresh = '0;
    x_we = 0; x_addr = '0; x_wdata = '0; fb_x_addr = '0; ls_we = 0; ls_kind = FAC_UNARY;
    ls_idx = '0; ls_row = '0; ls_col = '0; ls_wdata = '0; res_clear = 0; res_valid = 0;
    res_data = '0; res_last = 0; xs_addr = '0;
    // a well-conditioned synthetic problem
    for (int j = 0; j < KF; j++) begin
      for (int i = 0; i < D; i++) xt[j][i] = 2.0 * rnd();
      for (int r = 0; r < G; r++) for (int c = 0; c < D; c++) U[j][r][c] = rnd();
      for (int r = 0; r < B; r++)
        for (int c = 0; c < D; c++) begin
          Ja[j][r][c] = ((r == c) ? 1.0 : 0.0) + 0.1 * rnd();
          Jb[j][r][c] = ((r == c) ? -0.5 : 0.0) + 0.1 * rnd();
          if (r >= D) begin Ja[j][r][c] = 0.3 * rnd(); Jb[j][r][c] = 0.3 * rnd(); end
        end
    end
    for (int j = 0; j < KF; j++) begin
      for (int r = 0; r < G; r++) begin
        zu[j][r] = 0;
        for (int c = 0; c < D; c++) zu[j][r] += U[j][r][c] * xt[j][c];
      end
      if (j < KF - 1)
        for (int r = 0; r < B; r++) begin
          zb[j][r] = 0;
          for (int c = 0; c < D; c++) zb[j][r] += Ja[j][r][c] * xt[j][c] + Jb[j][r][c] * xt[j+1][c];
        end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    load_x(0, KF - 1, 0.5);
    run_solve(ELIM_PARALLEL, 0, KF - 1, 6, 0.01, 1, "parallel batch");
    if (!FULL) begin
    // cost of the residuals at a perturbed state, then at the solution
    load_x(0, KF - 1, 0.5);
    residuals(1, c_model);
    chk(cost_valid, "cost not valid");
    chk($itor(cost) / 65536.0 - c_model < 0.01 * c_model + 0.01 &&
        c_model - $itor(cost) / 65536.0 < 0.01 * c_model + 0.01,
        $sformatf("cost %f, expected %f", $itor(cost) / 65536.0, c_model));
    n_cost++;
    run_solve(ELIM_SERIAL, 0, KF - 1, 6, 0.01, 1, "serial batch");
    residuals(1, c_model);
    chk($itor(cost) / 65536.0 < 0.001, $sformatf("cost at the solution %f", $itor(cost) / 65536.0));
    n_cost++;
    load_x(0, KF - 2, 0.5);
    run_solve(ELIM_PARALLEL, 0, KF - 2, 6, 0.01, 1, "parallel batch, even count");
    n_uneven++;
    load_x(KF - 3, KF - 1, 0.5);
    run_solve(ELIM_PARALLEL, KF - 3, KF - 1, 6, 0.01, 1, "incremental");
    n_inc++;
    load_x(KF - 3, KF - 1, 0.5);
    run_solve(ELIM_SERIAL, KF - 3, KF - 1, 6, 0.01, 1, "incremental serial");
    n_inc++;
    load_x(0, KF - 1, 0.5);
    run_solve(ELIM_PARALLEL, 0, KF - 1, 1, 0.0001, 0, "iteration limit");

    chk(n_ser > 0, "serial elimination never ran");
    chk(n_inc > 0, "incremental smoothing never ran");
    chk(n_limit > 0, "iteration limit never reached");
    chk(n_cost > 0, "cost mode never used");
    chk(n_uneven > 0, "unequal sides never ran");
    end
    chk(n_par > 0, "parallel elimination never ran");
    chk(n_relin > 0, "no relinearisation");
    chk(n_conv > 0, "never converged");
    chk(n_stall > 0, "Evaluate never stalled for an Update unit");
    chk(n_both_qr > 0, "the two QR blocks never ran together");
    chk(n_both_bs > 0, "the two back-substitution units never ran together");
    $display("mechanisms: parallel %0d serial %0d incremental %0d relinearised %0d converged %0d limit %0d",
             n_par, n_ser, n_inc, n_relin, n_conv, n_limit);
    $display("            evaluate stalls %0d, both QR %0d, both BS %0d cycles, cost %0d, uneven %0d",
             n_stall, n_both_qr, n_both_bs, n_cost, n_uneven);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
