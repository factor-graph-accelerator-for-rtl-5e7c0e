// tb_cost_unit: self-checking test of the ||eps_b||^2 accumulator.
//
// Streams random residual vectors of random length with gaps, checks the
// sum of squares against a model (exact, same truncation per term), that
// cost_valid rises only after the last entry and falls on clear, and that
// a sum beyond the range saturates instead of wrapping.
module tb_cost_unit;
  import fg_pkg::*;
  localparam int COST_W = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_last, cost_valid;
  fx_t in_data;
  logic [COST_W-1:0] cost;

  cost_unit #(.COST_W(COST_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    clear = 0; in_valid = 0; in_last = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      longint unsigned sum;
      int n;
      sum = 0;
      n = $urandom_range(1, 30);
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        longint a;
        in_valid = 1; in_last = (i == n - 1);
        in_data = fx_t'($urandom_range(0, 400000)) - 200000;
        a = (in_data < 0) ? -longint'(in_data) : longint'(in_data);
        sum += $unsigned((a * a) >>> 16);
        @(negedge clk);
        in_valid = 0; in_last = 0;
        if (i != n - 1) begin
          checks++;
          if (cost_valid) begin failures++; $display("cost_valid before the last entry"); end
        end
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      checks += 2;
      if (!cost_valid) begin failures++; $display("cost_valid missing"); end
      if (64'(cost) != sum) begin failures++; $display("cost %0d, expected %0d", cost, sum); end
    end
    // saturation: 2^15 squared many times exceeds 2^48 / 2^16
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < 80; i++) begin
      in_valid = 1; in_data = fx_t'(32'h7fff_ffff); in_last = (i == 79);
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (cost != '1) begin failures++; $display("no saturation: %h", cost); end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (cost_valid || cost != 0) begin failures++; $display("clear failed"); end
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
