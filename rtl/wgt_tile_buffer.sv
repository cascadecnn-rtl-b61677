// wgt_tile_buffer: double-buffered T_P x T_C weight tile.
//
// Two banks each hold one weight tile: T_C columns (one per kernel, i.e. one
// per PE), each T_P values long. The loader writes one bank in CHUNK_W-bit
// pieces while the PEs read every column of the other bank in parallel; the
// columns stay fixed while the T_R activation rows of the tile stream past.
// Timing: write takes effect at the clock edge; the read side is a
// combinational view of the selected bank.
module wgt_tile_buffer #(
  parameter int unsigned WL      = 8,
  parameter int unsigned TC      = 32,
  parameter int unsigned TP      = 64,
  parameter int unsigned CHUNK_W = 64,
  localparam int unsigned COL_W  = TP*WL,
  localparam int unsigned NCHUNK = COL_W / CHUNK_W
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic                               wr_bank,
  input  logic [$clog2(TC)-1:0]              wr_col,
  input  logic [$clog2(NCHUNK+1)-1:0]        wr_chunk,
  input  logic [CHUNK_W-1:0]                 wr_data,
  input  logic                               rd_bank,
  output logic [TC-1:0][TP-1:0][WL-1:0]      rd_data
);
  logic [COL_W-1:0] mem [2][TC];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_col][wr_chunk*CHUNK_W +: CHUNK_W] <= wr_data;
  end

  always_comb begin
    for (int c = 0; c < TC; c++) rd_data[c] = mem[rd_bank][c];
  end

endmodule
