// input_buffer: state store X of every keyframe in the chain.
//
// KF_MAX keyframes of D words, address = keyframe * D + entry. The host
// loads the initial estimate through the host write port; after each solve
// the sequencer applies X = X + delta one word per clock through the update
// port (read-modify-write in one clock); the factor block reads the current
// linearisation point through rd_*, and the sequencer reads through cp_* when
// it copies the converged state to the output buffer. Both reads are
// combinational. A host write and an update to the same word in one clock
// keep the host value. Only X is held here: the measurements Z and
// covariances Sigma that the reference design also keeps in this buffer are
// read only by the factor block, which is outside this design.
module input_buffer
  import fg_pkg::*;
#(
  parameter int unsigned KF_MAX = KF_MAX_DEF,
  parameter int unsigned D      = VAR_DIM_DEF,
  localparam int unsigned AW    = $clog2(KF_MAX * D)
) (
  input  logic          clk,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  fx_t           host_wdata,
  input  logic          upd_en,
  input  logic [AW-1:0] upd_addr,
  input  fx_t           upd_delta,
  input  logic [AW-1:0] rd_addr,
  output fx_t           rd_data,
  input  logic [AW-1:0] cp_addr,
  output fx_t           cp_data
);
  fx_t mem [KF_MAX * D];

  always_ff @(posedge clk) begin
    if (upd_en && !(host_we && host_addr == upd_addr))
      mem[upd_addr] <= mem[upd_addr] + upd_delta;
    if (host_we)
      mem[host_addr] <= host_wdata;
  end

  assign rd_data = mem[rd_addr];
  assign cp_data = mem[cp_addr];
endmodule
