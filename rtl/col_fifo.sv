// col_fifo: synchronous FIFO that carries whole matrix columns.
//
// Sits behind each Update unit of a partial-QR block and hands the updated
// columns to the Update unit of the next Householder step. One entry is one
// column (plus its column index) of W bits. Valid/ready on both sides: a
// word moves when valid and ready are both high on a rising clock edge.
// The output is the head entry, shown combinationally (first-word
// fall-through). DEPTH entries; full and empty come from an occupancy count.
// Depth, width and handshake are this design's choices.
module col_fifo #(
  parameter int unsigned W     = 1254,
  parameter int unsigned DEPTH = 31,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;

  logic push, pop;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

endmodule
