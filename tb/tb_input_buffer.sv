// tb_input_buffer: self-checking test of the state store.
//
// Loads random states through the host port, applies random X = X + delta
// updates, including one that collides with a host write (the host value
// must win), and checks both read ports against a model.
module tb_input_buffer;
  import fg_pkg::*;
  localparam int KF = 3, D = 4, N = KF * D, AW = $clog2(KF * D);

  logic clk = 0;
  always #5 clk = ~clk;

  logic host_we, upd_en;
  logic [AW-1:0] host_addr, upd_addr, rd_addr, cp_addr;
  fx_t host_wdata, upd_delta, rd_data, cp_data;

  input_buffer #(.KF_MAX(KF), .D(D)) dut (.*);

  fx_t model [N];
  int checks = 0, failures = 0;

  initial begin
    host_we = 0; upd_en = 0; host_addr = '0; upd_addr = '0; host_wdata = '0; upd_delta = '0;
    rd_addr = '0; cp_addr = '0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      host_we = 1; host_addr = AW'(i); host_wdata = fx_t'($urandom_range(0, 200000)) - 100000;
      model[i] = host_wdata;
      @(negedge clk);
    end
    host_we = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = $urandom_range(0, N - 1);
      upd_en = 1; upd_addr = AW'(a); upd_delta = fx_t'($urandom_range(0, 2000)) - 1000;
      host_we = (t % 37 == 5); host_addr = AW'(a); host_wdata = fx_t'($urandom);
      if (host_we) model[a] = host_wdata; else model[a] = model[a] + upd_delta;
      @(negedge clk);
      upd_en = 0; host_we = 0;
      rd_addr = AW'($urandom_range(0, N - 1)); cp_addr = AW'(a);
      #1;
      checks += 2;
      if (rd_data != model[rd_addr]) begin failures++; $display("rd %0d wrong", rd_addr); end
      if (cp_data != model[a])       begin failures++; $display("cp %0d wrong", a); end
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
