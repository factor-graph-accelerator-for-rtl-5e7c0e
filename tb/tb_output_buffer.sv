// tb_output_buffer: self-checking test of the result store.
//
// The result must read as zero and valid low until commit, read back every
// written word after commit, and go invalid again on invalidate.
module tb_output_buffer;
  import fg_pkg::*;
  localparam int KF = 3, D = 4, N = KF * D, AW = $clog2(KF * D);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we, commit, invalidate, valid;
  logic [AW-1:0] waddr, rd_addr;
  fx_t wdata, rd_data;

  output_buffer #(.KF_MAX(KF), .D(D)) dut (.*);

  fx_t model [N];
  int checks = 0, failures = 0;

  initial begin
    we = 0; commit = 0; invalidate = 0; waddr = '0; wdata = '0; rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < N; i++) begin
        we = 1; waddr = AW'(i); wdata = fx_t'($urandom | 1); model[i] = wdata;
        @(negedge clk);
        rd_addr = AW'(i);
        #1;
        checks++;
        if (valid || rd_data != 0) begin failures++; $display("result visible before commit"); end
      end
      we = 0; commit = 1; @(negedge clk); commit = 0;
      for (int i = 0; i < N; i++) begin
        rd_addr = AW'(i); #1;
        checks++;
        if (!valid || rd_data != model[i]) begin failures++; $display("word %0d wrong after commit", i); end
      end
      invalidate = 1; @(negedge clk); invalidate = 0;
      checks++;
      if (valid) begin failures++; $display("valid after invalidate"); end
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
