// result_writer: writes a finished output tile back to off-chip memory.
//
// For each of the T_R rows of the tile it reads the T_C accumulators,
// rescales them to the output activation format of the layer with requant
// (per-layer scaling, same wordlength WL as the inputs), packs them 64/WL to
// a word and writes the TC*WL/64 words of the row starting at
// base + row*stride. The requantisation step and the row-major output layout
// are this design's choices; the paper states only that final output tiles
// are transferred back to off-chip memory.
// Interface: start with base, stride and shift; writes go out on a
// valid/ready port; done pulses one cycle after the last accepted write.
module result_writer
  import cascade_pkg::*;
#(
  parameter int unsigned TR   = 64,
  parameter int unsigned TC   = 32,
  parameter int unsigned WL   = 8,
  parameter int unsigned ACCW = 32,
  localparam int unsigned WPR = TC*WL/MEM_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  addr_t                       base,
  input  addr_t                       stride,
  input  logic [SH_W-1:0]             shift,
  output logic                        busy,
  output logic                        done,
  // accumulator read port
  output logic [$clog2(TR)-1:0]       rd_row,
  input  logic [TC-1:0][ACCW-1:0]     rd_data,
  // memory write port
  output logic                        wr_valid,
  input  logic                        wr_ready,
  output wr_req_t                     wr
);
  if (WPR*MEM_W != TC*WL) begin : g_bad_pack
    $error("result_writer: a row of T_C outputs must fill whole memory words");
  end

  logic [$clog2(WPR+1)-1:0] word;
  addr_t                    base_q, stride_q;
  logic [SH_W-1:0]          shift_q;
  logic [TC-1:0][WL-1:0]    packed_row;

  for (genvar c = 0; c < TC; c++) begin : g_rq
    requant #(.IN_W(ACCW), .OUT_W(WL), .SH_W(SH_W)) u_rq (
      .x(rd_data[c]), .shift(shift_q), .y(packed_row[c])
    );
  end

  assign wr_valid = busy;
  assign wr.addr  = base_q + addr_t'(rd_row) * stride_q + addr_t'(word);
  assign wr.data  = packed_row[word*(MEM_W/WL) +: (MEM_W/WL)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      rd_row   <= '0;
      word     <= '0;
      base_q   <= '0;
      stride_q <= '0;
      shift_q  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        rd_row   <= '0;
        word     <= '0;
        base_q   <= base;
        stride_q <= stride;
        shift_q  <= shift;
      end else if (busy && wr_ready) begin
        if (word == ($bits(word))'(WPR-1)) begin
          word <= '0;
          if (rd_row == ($bits(rd_row))'(TR-1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            rd_row <= rd_row + 1'b1;
          end
        end else begin
          word <= word + 1'b1;
        end
      end
    end
  end

endmodule
