// mm_unit: matrix-multiplication processing unit (used as LPU and as HPU).
//
// The unit computes one CNN layer cast as a matrix product: an R x P matrix
// of input activations (one sliding-window position per row, all input
// channels concatenated) times a P x C weight matrix (one kernel per column)
// gives the R x C output activations. It follows the paper's tiled
// architecture: T_C processing elements each compute a fully unrolled T_P
// dot product; one activation row is broadcast to all PEs per cycle while
// each PE holds its own weight column, so a T_R x T_P by T_P x T_C tile
// product takes T_R cycles; partial tiles are summed on chip in
// result_accum and only finished output tiles go back to memory.
// Activation and weight tiles are double buffered (act_tile_buffer,
// wgt_tile_buffer) and fetched by two tile_loaders from two read ports;
// results leave through result_writer on one write port. mm_ctrl sequences
// the loop nest.
// The same module is the low-precision unit (WL = 4, PACK = 1: pairs of
// multipliers share one 25x18 DSP; W_SRC_WL = 8: weights are read in the
// high-precision format and rescaled on the fly) and the high-precision unit
// (WL = W_SRC_WL = 8). Tile sizes are compile-time parameters; the paper
// chooses them per CNN and device by design-space exploration and does not
// list the chosen values, so the defaults here are this design's own.
// Interface: start/cmd/busy/done (see cascade_pkg::mm_cmd_t); memory ports
// are valid/ready requests with in-order responses. Timing: a P-step takes
// max(T_R + 2 + log2(T_P), load time of the next tiles) cycles plus two
// cycles of hand-over.
//
// Lint notes: the busy outputs of the two loaders and the writer are left
// open because the controller tracks them through their done pulses, and
// only PE 0's valid bit is used because all PEs run in lock step.
module mm_unit
  import cascade_pkg::*;
#(
  parameter int unsigned WL       = 8,
  parameter int unsigned W_SRC_WL = 8,
  parameter int unsigned TR       = 64,
  parameter int unsigned TP       = 64,
  parameter int unsigned TC       = 32,
  parameter bit          PACK     = 1'b0,
  parameter int unsigned ACCW     = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  mm_cmd_t   cmd,
  output logic      busy,
  output logic      done,
  // activation read port
  output logic      a_req_valid,
  input  logic      a_req_ready,
  output rd_req_t   a_req,
  input  logic      a_rsp_valid,
  input  word_t     a_rsp_data,
  // weight read port
  output logic      w_req_valid,
  input  logic      w_req_ready,
  output rd_req_t   w_req,
  input  logic      w_rsp_valid,
  input  word_t     w_rsp_data,
  // output write port
  output logic      o_wr_valid,
  input  logic      o_wr_ready,
  output wr_req_t   o_wr
);
  localparam int unsigned LG      = $clog2(TP);
  localparam int unsigned DOTW    = 2*WL + LG;
  localparam int unsigned LAT     = 1 + LG;              // PE latency
  localparam int unsigned A_CHUNK = MEM_W;               // activations stored at WL
  localparam int unsigned W_CHUNK = (MEM_W/W_SRC_WL)*WL; // weights after rescaling
  localparam int unsigned A_NCH   = TP*WL/A_CHUNK;
  localparam int unsigned W_NCH   = TP*WL/W_CHUNK;

  // ---------------- control ----------------
  logic              ld_start, ld_bank, ld_a_done, ld_w_done;
  addr_t             ld_a_base, ld_a_stride, ld_w_base, ld_w_stride;
  logic [SH_W-1:0]   ld_w_shift, wb_shift;
  logic              iss_valid, iss_bank, iss_first, acc_valid;
  logic [$clog2(TR)-1:0] iss_row;
  logic              wb_start, wb_done;
  addr_t             wb_base, wb_stride;

  mm_ctrl #(.TR(TR), .TP(TP), .TC(TC), .WL(WL), .W_SRC_WL(W_SRC_WL)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .ld_start, .ld_bank, .ld_a_base, .ld_a_stride, .ld_w_base, .ld_w_stride,
    .ld_w_shift, .ld_a_done, .ld_w_done,
    .iss_valid, .iss_bank, .iss_row, .iss_first, .acc_valid,
    .wb_start, .wb_base, .wb_stride, .wb_shift, .wb_done
  );

  // ---------------- loaders and double buffers ----------------
  logic                          a_wr_en, w_wr_en;
  logic [$clog2(TR)-1:0]         a_wr_row;
  logic [$clog2(TC)-1:0]         w_wr_col;
  logic [$clog2(A_NCH+1)-1:0]    a_wr_chunk;
  logic [$clog2(W_NCH+1)-1:0]    w_wr_chunk;
  logic [A_CHUNK-1:0]            a_wr_data;
  logic [W_CHUNK-1:0]            w_wr_data;
  logic                          a_bank_q, w_bank_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_bank_q <= 1'b0;
      w_bank_q <= 1'b0;
    end else if (ld_start) begin
      a_bank_q <= ld_bank;
      w_bank_q <= ld_bank;
    end
  end

  tile_loader #(.NROWS(TR), .TP(TP), .SRC_WL(WL), .DST_WL(WL)) u_ld_a (
    .clk, .rst_n, .start(ld_start), .base(ld_a_base), .stride(ld_a_stride),
    .shift('0), .busy(), .done(ld_a_done),
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req(a_req),
    .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data),
    .wr_en(a_wr_en), .wr_row(a_wr_row), .wr_chunk(a_wr_chunk), .wr_data(a_wr_data)
  );

  tile_loader #(.NROWS(TC), .TP(TP), .SRC_WL(W_SRC_WL), .DST_WL(WL)) u_ld_w (
    .clk, .rst_n, .start(ld_start), .base(ld_w_base), .stride(ld_w_stride),
    .shift(ld_w_shift), .busy(), .done(ld_w_done),
    .req_valid(w_req_valid), .req_ready(w_req_ready), .req(w_req),
    .rsp_valid(w_rsp_valid), .rsp_data(w_rsp_data),
    .wr_en(w_wr_en), .wr_row(w_wr_col), .wr_chunk(w_wr_chunk), .wr_data(w_wr_data)
  );

  logic [TP-1:0][WL-1:0]         act_row;
  logic [TC-1:0][TP-1:0][WL-1:0] wgt_cols;
  logic                          pe_bank;

  act_tile_buffer #(.WL(WL), .TR(TR), .TP(TP), .CHUNK_W(A_CHUNK)) u_abuf (
    .clk, .wr_en(a_wr_en), .wr_bank(a_bank_q), .wr_row(a_wr_row),
    .wr_chunk(a_wr_chunk), .wr_data(a_wr_data),
    .rd_en(iss_valid), .rd_bank(iss_bank), .rd_row(iss_row), .rd_data(act_row)
  );

  wgt_tile_buffer #(.WL(WL), .TC(TC), .TP(TP), .CHUNK_W(W_CHUNK)) u_wbuf (
    .clk, .wr_en(w_wr_en), .wr_bank(w_bank_q), .wr_col(w_wr_col),
    .wr_chunk(w_wr_chunk), .wr_data(w_wr_data),
    .rd_bank(pe_bank), .rd_data(wgt_cols)
  );

  // ---------------- PE array ----------------
  // Row index and first-step flag travel alongside the data: 1 cycle of
  // buffer read plus LAT cycles of PE pipeline.
  logic                   pe_in_valid;
  logic [LAT:0]           first_pipe;
  logic [$clog2(TR)-1:0]  row_pipe [LAT+1];
  logic [TC-1:0]          pe_out_valid;
  logic [TC-1:0][DOTW-1:0] pe_dot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_in_valid <= 1'b0;
      pe_bank     <= 1'b0;
      first_pipe  <= '0;
      for (int i = 0; i <= LAT; i++) row_pipe[i] <= '0;
    end else begin
      pe_in_valid <= iss_valid;
      if (iss_valid) pe_bank <= iss_bank;
      first_pipe  <= {first_pipe[LAT-1:0], iss_first};
      row_pipe[0] <= iss_row;
      for (int i = 1; i <= LAT; i++) row_pipe[i] <= row_pipe[i-1];
    end
  end

  for (genvar c = 0; c < TC; c++) begin : g_pe
    pe #(.WL(WL), .TP(TP), .PACK(PACK)) u_pe (
      .clk, .rst_n, .in_valid(pe_in_valid), .act(act_row), .wgt(wgt_cols[c]),
      .out_valid(pe_out_valid[c]), .dot(pe_dot[c])
    );
  end

  assign acc_valid = pe_out_valid[0];

  // ---------------- results ----------------
  logic [$clog2(TR)-1:0]   rd_row;
  logic [TC-1:0][ACCW-1:0] rd_data;

  result_accum #(.TR(TR), .TC(TC), .DOTW(DOTW), .ACCW(ACCW)) u_acc (
    .clk, .in_valid(acc_valid), .in_first(first_pipe[LAT]), .in_row(row_pipe[LAT]),
    .in_dot(pe_dot), .rd_row, .rd_data
  );

  result_writer #(.TR(TR), .TC(TC), .WL(WL), .ACCW(ACCW)) u_wr (
    .clk, .rst_n, .start(wb_start), .base(wb_base), .stride(wb_stride),
    .shift(wb_shift), .busy(), .done(wb_done),
    .rd_row, .rd_data,
    .wr_valid(o_wr_valid), .wr_ready(o_wr_ready), .wr(o_wr)
  );

endmodule
