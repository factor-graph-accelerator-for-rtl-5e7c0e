// output_buffer: holds the converged state X* for the host.
//
// Same layout as the input buffer (keyframe * D + entry). The sequencer
// writes every word once the Gauss-Newton loop stops, then pulses commit;
// valid stays high from commit until invalidate (a new solve starts), so the
// host never sees a half-written result. The host reads combinationally.
// Valid/commit is this design's addition.
module output_buffer
  import fg_pkg::*;
#(
  parameter int unsigned KF_MAX = KF_MAX_DEF,
  parameter int unsigned D      = VAR_DIM_DEF,
  localparam int unsigned AW    = $clog2(KF_MAX * D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fx_t           wdata,
  input  logic          commit,
  input  logic          invalidate,
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data,
  output logic          valid
);
  fx_t mem [KF_MAX * D];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          valid <= 1'b0;
    else if (invalidate) valid <= 1'b0;
    else if (commit)     valid <= 1'b1;
  end

  assign rd_data = valid ? mem[rd_addr] : fx_t'(0);
endmodule
