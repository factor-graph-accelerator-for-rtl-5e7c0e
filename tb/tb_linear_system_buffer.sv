// tb_linear_system_buffer: self-checking test of the linear system store.
//
// Fills every unary and binary factor block with random words through the
// write port, in random order, then reads all of them back through both
// read ports at once (different addresses on the two ports) and compares
// with a model. A block written twice must return the second value.
module tb_linear_system_buffer;
  import fg_pkg::*;
  localparam int KF = 4, D = 2, G = 2, B = 3;
  localparam int KW = $clog2(KF), RW = $clog2(((G > B) ? G : B) + 1), CW = $clog2(2*D + 2);

  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  fac_kind_e wr_kind;
  logic [KW-1:0] wr_idx;
  logic [RW-1:0] wr_row;
  logic [CW-1:0] wr_col;
  fx_t wr_data;
  fac_kind_e rd_kind [2];
  logic [KW-1:0] rd_idx [2];
  logic [RW-1:0] rd_row [2];
  logic [CW-1:0] rd_col [2];
  fx_t rd_data [2];

  linear_system_buffer #(.KF_MAX(KF), .D(D), .G(G), .B(B)) dut (.*);

  fx_t um [KF][G][D+1];
  fx_t bm [KF-1][B][2*D+1];
  int checks = 0, failures = 0;

  task automatic wr(fac_kind_e kd, int j, int r, int c, fx_t x);
    we = 1; wr_kind = kd; wr_idx = KW'(j); wr_row = RW'(r); wr_col = CW'(c); wr_data = x;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    we = 0; wr_kind = FAC_UNARY; wr_idx = '0; wr_row = '0; wr_col = '0; wr_data = '0;
    for (int p = 0; p < 2; p++) begin rd_kind[p] = FAC_UNARY; rd_idx[p] = '0; rd_row[p] = '0; rd_col[p] = '0; end
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int j = KF - 1; j >= 0; j--)
        for (int r = 0; r < G; r++)
          for (int c = 0; c <= D; c++) begin
            um[j][r][c] = fx_t'($urandom); wr(FAC_UNARY, j, r, c, um[j][r][c]);
          end
      for (int j = 0; j < KF - 1; j++)
        for (int r = B - 1; r >= 0; r--)
          for (int c = 0; c <= 2*D; c++) begin
            bm[j][r][c] = fx_t'($urandom); wr(FAC_BINARY, j, r, c, bm[j][r][c]);
          end
    end
    for (int j = 0; j < KF; j++)
      for (int r = 0; r < G; r++)
        for (int c = 0; c <= D; c++) begin
          int jb, rb, cb;
          jb = (j < KF - 1) ? j : 0; rb = r % B; cb = (c + 1) % (2*D + 1);
          rd_kind[0] = FAC_UNARY;  rd_idx[0] = KW'(j);  rd_row[0] = RW'(r);  rd_col[0] = CW'(c);
          rd_kind[1] = FAC_BINARY; rd_idx[1] = KW'(jb); rd_row[1] = RW'(rb); rd_col[1] = CW'(cb);
          #1;
          checks += 2;
          if (rd_data[0] != um[j][r][c])   begin failures++; $display("unary %0d,%0d,%0d wrong", j, r, c); end
          if (rd_data[1] != bm[jb][rb][cb]) begin failures++; $display("binary %0d,%0d,%0d wrong", jb, rb, cb); end
        end
    for (int j = 0; j < KF - 1; j++)
      for (int r = 0; r < B; r++)
        for (int c = 0; c <= 2*D; c++) begin
          rd_kind[1] = FAC_BINARY; rd_idx[1] = KW'(j); rd_row[1] = RW'(r); rd_col[1] = CW'(c);
          #1;
          checks++;
          if (rd_data[1] != bm[j][r][c]) begin failures++; $display("binary %0d,%0d,%0d wrong", j, r, c); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
