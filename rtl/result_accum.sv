// result_accum: on-chip accumulation of the T_R x T_C output tile.
//
// An output tile is the sum of ceil(P/T_P) tile products. Intermediate sums
// stay on chip in this buffer: each cycle the T_C dot products of one PE row
// result are added to the stored row (one adder per PE, fed back from the
// results memory), or written over it on the first P-step of a tile. Only
// the finished tile leaves the chip, through result_writer.
// Timing: a write (in_valid) updates row in_row at the clock edge; rows of
// one P-step arrive in order and the same row is touched again only T_R
// cycles later, so no forwarding is needed. The read port is combinational.
module result_accum #(
  parameter int unsigned TR   = 64,
  parameter int unsigned TC   = 32,
  parameter int unsigned DOTW = 22,
  parameter int unsigned ACCW = 32
) (
  input  logic                              clk,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic [$clog2(TR)-1:0]             in_row,
  input  logic [TC-1:0][DOTW-1:0]           in_dot,
  input  logic [$clog2(TR)-1:0]             rd_row,
  output logic [TC-1:0][ACCW-1:0]           rd_data
);
  logic [TC-1:0][ACCW-1:0] mem [TR];
  logic [TC-1:0][ACCW-1:0] upd;

  always_comb begin
    for (int c = 0; c < TC; c++) begin
      upd[c] = (in_first ? ACCW'(0) : mem[in_row][c])
             + ACCW'(signed'(in_dot[c]));
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[in_row] <= upd;
  end

  assign rd_data = mem[rd_row];

endmodule
