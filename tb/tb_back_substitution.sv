// tb_back_substitution: self-checking test of the back-substitution unit.
//
// A conditional [R | T | d] with a well-conditioned upper-triangular R and a
// parent solution are held in arrays here and served through the unit's
// combinational read ports. The solved vector is checked against a double-
// precision back substitution, with and without a parent, and with a zero
// pivot (which must give 0 for that entry).
module tb_back_substitution;
  import fg_pkg::*;
  localparam int D = 4;
  localparam int DW = $clog2(D + 1), CW = $clog2(2*D + 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, has_parent, delta_we, busy, done;
  logic [DW-1:0] cond_row, parent_idx, delta_idx;
  logic [CW-1:0] cond_col;
  fx_t cond_data, parent_data, delta_wdata;

  back_substitution #(.D(D)) dut (.*);

  fx_t cond [D][2*D+1];
  fx_t par [D];
  fx_t sol [D];
  int  writes;
  assign cond_data   = cond[cond_row][cond_col];
  assign parent_data = par[parent_idx];
  always @(posedge clk) if (delta_we) begin sol[delta_idx] = delta_wdata; writes++; end

  int checks = 0, failures = 0;
  function automatic fx_t to_fx(real r); return fx_t'($rtoi(r * 65536.0)); endfunction
  function automatic real fr_fx(fx_t x); return $itor(x) / 65536.0; endfunction
  function automatic real rnd(); return $itor($urandom_range(0, 2000)) / 1000.0 - 1.0; endfunction

  initial begin
    start = 0; has_parent = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      real x [D];
      bit hp;
      int zp;
      hp = (t % 2) == 1;
      zp = (t % 10 == 9) ? int'($urandom_range(0, D - 1)) : -1;
      for (int r = 0; r < D; r++) begin
        for (int c = 0; c < 2*D+1; c++) cond[r][c] = '0;
        for (int c = r; c < D; c++) cond[r][c] = to_fx((c == r) ? 1.0 + rnd() * 0.5 + 0.5 : rnd());
        if (r == zp) cond[r][r] = '0;
        for (int c = 0; c < D; c++) cond[r][D + c] = to_fx(rnd());
        cond[r][2*D] = to_fx(rnd() * 2.0);
        par[r] = to_fx(rnd());
      end
      for (int r = D - 1; r >= 0; r--) begin
        real acc;
        acc = fr_fx(cond[r][2*D]);
        for (int c = r + 1; c < D; c++) acc -= fr_fx(cond[r][c]) * x[c];
        if (hp) for (int c = 0; c < D; c++) acc -= fr_fx(cond[r][D + c]) * fr_fx(par[c]);
        x[r] = (cond[r][r] == 0) ? 0.0 : acc / fr_fx(cond[r][r]);
      end
      writes = 0;
      has_parent = hp;
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++;
      if (writes != D) begin failures++; $display("%0d entries written, expected %0d", writes, D); end
      for (int r = 0; r < D; r++) begin
        checks++;
        if (fr_fx(sol[r]) - x[r] > 0.005 || x[r] - fr_fx(sol[r]) > 0.005) begin
          failures++;
          $display("trial %0d entry %0d: %f, expected %f", t, r, fr_fx(sol[r]), x[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
