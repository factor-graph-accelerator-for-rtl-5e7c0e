// linear_system_buffer: on-chip store of the whitened linear system A_b, eps_b.
//
// The chain structure fixes which factors touch which keyframes, so no
// factor type or variable index is stored: each factor's Jacobian block and
// residual sit back to back in factor order, in two regions:
//   unary  (GPS) factor of keyframe j : G rows x (D+1) words, column D = eps
//   binary factor on edge (j, j+1)    : B rows x (2D+1) words, columns 0..D-1
//                                       d/dx_j, D..2D-1 d/dx_j+1, column 2D = eps
// Address = (index * rows + row) * width + col. The factor block fills it
// through the write port (one word per clock); the two elimination sides
// read it through two combinational read ports. Reads outside a written
// block return whatever was last written there.
// Dropping indexes and zero blocks follows the reference design's first two
// storage steps; its third step (skipping fixed zero and identity entries
// inside the IMU Jacobian, storing half of the symmetric LiDAR Jacobian) is
// not done here because the positions of those entries are not specified.
module linear_system_buffer
  import fg_pkg::*;
#(
  parameter int unsigned KF_MAX = KF_MAX_DEF,
  parameter int unsigned D      = VAR_DIM_DEF,
  parameter int unsigned G      = GPS_ROWS_DEF,
  parameter int unsigned B      = EDGE_ROWS_DEF,
  localparam int unsigned KW    = $clog2(KF_MAX),
  localparam int unsigned RW    = $clog2(((G > B) ? G : B) + 1),
  localparam int unsigned CW    = $clog2(2*D + 2)
) (
  input  logic          clk,
  input  logic          we,
  input  fac_kind_e     wr_kind,
  input  logic [KW-1:0] wr_idx,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  fx_t           wr_data,
  input  fac_kind_e     rd_kind [2],
  input  logic [KW-1:0] rd_idx  [2],
  input  logic [RW-1:0] rd_row  [2],
  input  logic [CW-1:0] rd_col  [2],
  output fx_t           rd_data [2]
);
  localparam int unsigned UWID  = D + 1;
  localparam int unsigned BWID  = 2*D + 1;
  localparam int unsigned U_WORDS = KF_MAX * G * UWID;
  localparam int unsigned B_WORDS = (KF_MAX - 1) * B * BWID;
  localparam int unsigned UA_W = $clog2(U_WORDS);
  localparam int unsigned BA_W = $clog2(B_WORDS);

  fx_t umem [U_WORDS];
  fx_t bmem [B_WORDS];

  function automatic logic [UA_W-1:0] uaddr(logic [KW-1:0] j, logic [RW-1:0] r,
                                            logic [CW-1:0] c);
    return UA_W'((int'(j) * int'(G) + int'(r)) * int'(UWID) + int'(c));
  endfunction
  function automatic logic [BA_W-1:0] baddr(logic [KW-1:0] j, logic [RW-1:0] r,
                                            logic [CW-1:0] c);
    return BA_W'((int'(j) * int'(B) + int'(r)) * int'(BWID) + int'(c));
  endfunction

  always_ff @(posedge clk) begin
    if (we && wr_kind == FAC_UNARY)  umem[uaddr(wr_idx, wr_row, wr_col)] <= wr_data;
    if (we && wr_kind == FAC_BINARY) bmem[baddr(wr_idx, wr_row, wr_col)] <= wr_data;
  end

  for (genvar p = 0; p < 2; p++) begin : g_rd
    assign rd_data[p] = (rd_kind[p] == FAC_UNARY) ? umem[uaddr(rd_idx[p], rd_row[p], rd_col[p])]
                                                  : bmem[baddr(rd_idx[p], rd_row[p], rd_col[p])];
  end
endmodule
