// tb_col_fifo: self-checking test of the column FIFO.
//
// Random pushes and pops against a queue model: every popped word must be
// the oldest one pushed, in_ready must drop exactly at DEPTH entries and
// out_valid exactly at zero. Both the full and the empty state are reached
// and counted.
module tb_col_fifo;
  localparam int W = 40, DEPTH = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;

  col_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  logic [W-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int phase;
      phase = (t / 200) % 2;
      in_valid  = ($urandom_range(0, 9) < (phase ? 3 : 8));
      out_ready = ($urandom_range(0, 9) < (phase ? 8 : 3));
      in_data   = {$urandom, 8'($urandom)};
      #1;
      checks++;
      if (in_ready != (q.size() < DEPTH) || out_valid != (q.size() > 0)) begin
        failures++;
        $display("flags wrong at %0d entries: in_ready=%0b out_valid=%0b", q.size(), in_ready, out_valid);
      end
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("popped %h, expected %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("full %0d, empty %0d times", fulls, empties); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
