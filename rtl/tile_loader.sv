// tile_loader: fetches one tile from off-chip memory into a tile buffer.
//
// A tile is NROWS rows (activation rows, or weight columns stored as rows of
// the transposed weight matrix) of T_P packed values. Row i starts at word
// base + i*stride and spans WPR = T_P*SRC_WL/64 consecutive words. Each
// returned word is unpacked into its 64/SRC_WL lanes; when the stored
// precision SRC_WL differs from the unit's precision DST_WL (the
// low-precision unit reading the high-precision weights) every lane is
// rescaled by requant, so the low-precision model is derived at run time
// from the high-precision one and only one copy of the weights is stored.
// The paper states the packing and the run-time derivation; the address
// layout and this loader's structure are this design's own.
// Interface: start (with base, stride, bank, shift) begins a load; requests
// go out on a valid/ready port, one word address each; responses come back
// in order on rsp_valid and are never back-pressured. done pulses for one
// cycle after the last word has been written into the buffer.
//
// Lint note: when the source and destination widths are equal no
// rescaling is built and the latched shift is left unused.
module tile_loader
  import cascade_pkg::*;
#(
  parameter int unsigned NROWS  = 64,
  parameter int unsigned TP     = 64,
  parameter int unsigned SRC_WL = 8,
  parameter int unsigned DST_WL = 8,
  localparam int unsigned WPR     = TP*SRC_WL/MEM_W,
  localparam int unsigned LANES   = MEM_W/SRC_WL,
  localparam int unsigned CHUNK_W = LANES*DST_WL
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  addr_t                        base,
  input  addr_t                        stride,
  input  logic [SH_W-1:0]              shift,
  output logic                         busy,
  output logic                         done,
  // memory read port
  output logic                         req_valid,
  input  logic                         req_ready,
  output rd_req_t                      req,
  input  logic                         rsp_valid,
  input  word_t                        rsp_data,
  // buffer write port
  output logic                         wr_en,
  output logic [$clog2(NROWS)-1:0]     wr_row,
  output logic [$clog2(WPR+1)-1:0]     wr_chunk,
  output logic [CHUNK_W-1:0]           wr_data
);
  localparam int unsigned TOTAL = NROWS*WPR;
  localparam int unsigned CW    = $clog2(TOTAL+1);

  if (WPR*MEM_W != TP*SRC_WL) begin : g_bad_pack
    $error("tile_loader: a row of T_P values must fill whole memory words");
  end

  logic [CW-1:0]                 req_cnt, rsp_cnt;
  logic [$clog2(NROWS)-1:0]      req_row, rsp_row;
  logic [$clog2(WPR+1)-1:0]      req_word, rsp_word;
  addr_t                         base_q, stride_q;
  logic [SH_W-1:0]               shift_q;

  assign req_valid = busy && (req_cnt != CW'(TOTAL));
  assign req.addr  = base_q + addr_t'(req_row) * stride_q + addr_t'(req_word);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      req_cnt  <= '0;
      rsp_cnt  <= '0;
      req_row  <= '0;
      req_word <= '0;
      rsp_row  <= '0;
      rsp_word <= '0;
      base_q   <= '0;
      stride_q <= '0;
      shift_q  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        req_cnt  <= '0;
        rsp_cnt  <= '0;
        req_row  <= '0;
        req_word <= '0;
        rsp_row  <= '0;
        rsp_word <= '0;
        base_q   <= base;
        stride_q <= stride;
        shift_q  <= shift;
      end else if (busy) begin
        if (req_valid && req_ready) begin
          req_cnt <= req_cnt + 1'b1;
          if (req_word == ($bits(req_word))'(WPR-1)) begin
            req_word <= '0;
            req_row  <= req_row + 1'b1;
          end else begin
            req_word <= req_word + 1'b1;
          end
        end
        if (rsp_valid) begin
          rsp_cnt <= rsp_cnt + 1'b1;
          if (rsp_word == ($bits(rsp_word))'(WPR-1)) begin
            rsp_word <= '0;
            rsp_row  <= rsp_row + 1'b1;
          end else begin
            rsp_word <= rsp_word + 1'b1;
          end
          if (rsp_cnt == CW'(TOTAL-1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // Unpack and, if needed, rescale each lane of the returned word.
  logic [CHUNK_W-1:0] conv;
  if (SRC_WL == DST_WL) begin : g_same
    assign conv = rsp_data;
  end else begin : g_derive
    for (genvar i = 0; i < LANES; i++) begin : g_lane
      requant #(.IN_W(SRC_WL), .OUT_W(DST_WL), .SH_W(SH_W)) u_rq (
        .x(rsp_data[i*SRC_WL +: SRC_WL]), .shift(shift_q),
        .y(conv[i*DST_WL +: DST_WL])
      );
    end
  end

  assign wr_en    = busy && rsp_valid;
  assign wr_row   = rsp_row;
  assign wr_chunk = rsp_word;
  assign wr_data  = conv;

endmodule
