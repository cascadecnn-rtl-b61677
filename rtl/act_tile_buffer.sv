// act_tile_buffer: double-buffered T_R x T_P input-activation tile.
//
// Two banks each hold one tile of the activation matrix, one row (a sliding
// window position, T_P values) per entry. The loader fills one bank while the
// compute side streams rows out of the other, which hides the memory latency
// between tiles (double buffering). Writes arrive as CHUNK_W-bit pieces of a
// row (one unpacked memory word); reads return a whole row, one per cycle,
// and the row is broadcast to every PE.
// Timing: write takes effect at the clock edge; read data is registered and
// valid one cycle after rd_en.
module act_tile_buffer #(
  parameter int unsigned WL      = 8,
  parameter int unsigned TR      = 64,
  parameter int unsigned TP      = 64,
  parameter int unsigned CHUNK_W = 64,
  localparam int unsigned ROW_W  = TP*WL,
  localparam int unsigned NCHUNK = ROW_W / CHUNK_W
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic                               wr_bank,
  input  logic [$clog2(TR)-1:0]              wr_row,
  input  logic [$clog2(NCHUNK+1)-1:0]        wr_chunk,
  input  logic [CHUNK_W-1:0]                 wr_data,
  input  logic                               rd_en,
  input  logic                               rd_bank,
  input  logic [$clog2(TR)-1:0]              rd_row,
  output logic [TP-1:0][WL-1:0]              rd_data
);
  logic [ROW_W-1:0] mem [2][TR];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_row][wr_chunk*CHUNK_W +: CHUNK_W] <= wr_data;
    if (rd_en) rd_data <= mem[rd_bank][rd_row];
  end

endmodule
