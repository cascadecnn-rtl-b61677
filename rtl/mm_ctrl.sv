// mm_ctrl: sequencer of one tiled matrix product (one CNN layer).
//
// It walks the loop nest of the tiled multiplication: for every output tile
// (row tile r, column tile c) it steps through the ceil(P/T_P) tiles of the
// shared dimension; each step multiplies a T_R x T_P activation tile by a
// T_P x T_C weight tile and adds the result to the on-chip output tile, and
// after the last step the output tile is written back. The activation and
// weight tiles are double buffered: while step s computes out of bank s%2,
// the tiles of step s+1 are loaded into the other bank. A step ends when
// both its computation and the next step's loads have finished, so a slow
// memory stalls the unit between steps and never inside one. Inside a step
// the T_R activation rows are issued on consecutive cycles (one row per
// cycle to all T_C PEs). The write-back of an output tile is not overlapped
// with computation: the results buffer is single, as drawn in the paper's
// architecture figure. R, P and C must be multiples of T_R, T_P and T_C
// (the host pads the matrices with zeros).
// Interface: start with cmd; busy while working; done pulses at the end.
// acc_valid counts the rows written into the results buffer.
//
// Lint note: the row-count field of the latched command is never read;
// the number of row tiles is taken from the command when it is accepted.
module mm_ctrl
  import cascade_pkg::*;
#(
  parameter int unsigned TR      = 64,
  parameter int unsigned TP      = 64,
  parameter int unsigned TC      = 32,
  parameter int unsigned WL      = 8,
  parameter int unsigned W_SRC_WL = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  mm_cmd_t                  cmd,
  output logic                     busy,
  output logic                     done,
  // loaders
  output logic                     ld_start,
  output logic                     ld_bank,
  output addr_t                    ld_a_base,
  output addr_t                    ld_a_stride,
  output addr_t                    ld_w_base,
  output addr_t                    ld_w_stride,
  output logic [SH_W-1:0]          ld_w_shift,
  input  logic                     ld_a_done,
  input  logic                     ld_w_done,
  // compute issue
  output logic                     iss_valid,
  output logic                     iss_bank,
  output logic [$clog2(TR)-1:0]    iss_row,
  output logic                     iss_first,
  input  logic                     acc_valid,
  // write-back
  output logic                     wb_start,
  output addr_t                    wb_base,
  output addr_t                    wb_stride,
  output logic [SH_W-1:0]          wb_shift,
  input  logic                     wb_done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD0, S_STEP, S_WB, S_DONE} state_e;
  state_e state;

  mm_cmd_t                cmd_q;
  logic [DIM_W-1:0]       nr, nc, np;           // tile counts
  logic [DIM_W-1:0]       rt, ct, pt;           // current step
  logic [DIM_W-1:0]       rt_n, ct_n, pt_n;     // next step
  logic                   last_step, last_p;
  logic                   bank;
  logic                   a_ok, w_ok, c_ok, issuing;
  logic [$clog2(TR+1)-1:0] acc_cnt;

  assign last_p    = (pt == np - 1'b1);
  assign last_step = last_p && (ct == nc - 1'b1) && (rt == nr - 1'b1);

  always_comb begin
    rt_n = rt; ct_n = ct; pt_n = pt + 1'b1;
    if (last_p) begin
      pt_n = '0;
      ct_n = ct + 1'b1;
      if (ct == nc - 1'b1) begin
        ct_n = '0;
        rt_n = rt + 1'b1;
      end
    end
  end

  // Word addresses of the tiles of a step (element index * WL / 64).
  function automatic addr_t a_addr(logic [DIM_W-1:0] r_i, logic [DIM_W-1:0] p_i);
    return cmd_q.a_base + ((addr_t'(r_i) * TR * cmd_q.p + addr_t'(p_i) * TP) * WL) / MEM_W;
  endfunction
  function automatic addr_t w_addr(logic [DIM_W-1:0] c_i, logic [DIM_W-1:0] p_i);
    return cmd_q.w_base + ((addr_t'(c_i) * TC * cmd_q.p + addr_t'(p_i) * TP) * W_SRC_WL) / MEM_W;
  endfunction

  logic [DIM_W-1:0] ld_r, ld_c, ld_p;
  assign ld_a_base   = a_addr(ld_r, ld_p);
  assign ld_w_base   = w_addr(ld_c, ld_p);
  assign ld_a_stride = (addr_t'(cmd_q.p) * WL) / MEM_W;
  assign ld_w_stride = (addr_t'(cmd_q.p) * W_SRC_WL) / MEM_W;
  assign ld_w_shift  = cmd_q.w_shift;
  assign wb_base     = cmd_q.o_base + ((addr_t'(rt) * TR * cmd_q.c + addr_t'(ct) * TC) * WL) / MEM_W;
  assign wb_stride   = (addr_t'(cmd_q.c) * WL) / MEM_W;
  assign wb_shift    = cmd_q.o_shift;

  assign iss_valid = issuing;
  assign iss_bank  = bank;
  assign iss_first = (pt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cmd_q    <= '0;
      nr <= '0; nc <= '0; np <= '0;
      rt <= '0; ct <= '0; pt <= '0;
      ld_r <= '0; ld_c <= '0; ld_p <= '0;
      bank     <= 1'b0;
      ld_start <= 1'b0;
      ld_bank  <= 1'b0;
      a_ok <= 1'b0; w_ok <= 1'b0; c_ok <= 1'b0;
      issuing  <= 1'b0;
      iss_row  <= '0;
      acc_cnt  <= '0;
      wb_start <= 1'b0;
      done     <= 1'b0;
    end else begin
      ld_start <= 1'b0;
      wb_start <= 1'b0;
      done     <= 1'b0;
      if (ld_a_done) a_ok <= 1'b1;
      if (ld_w_done) w_ok <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cmd_q <= cmd;
          nr <= DIM_W'(cmd.r / TR);
          nc <= DIM_W'(cmd.c / TC);
          np <= DIM_W'(cmd.p / TP);
          rt <= '0; ct <= '0; pt <= '0;
          ld_r <= '0; ld_c <= '0; ld_p <= '0;
          bank     <= 1'b0;
          ld_bank  <= 1'b0;
          ld_start <= 1'b1;
          a_ok <= 1'b0; w_ok <= 1'b0;
          state    <= S_LOAD0;
        end
        S_LOAD0: if (a_ok && w_ok) begin
          // first tiles are in: start computing, prefetch the next step
          issuing <= 1'b1;
          iss_row <= '0;
          acc_cnt <= '0;
          c_ok    <= 1'b0;
          a_ok <= last_step; w_ok <= last_step;
          if (!last_step) begin
            ld_r <= rt_n; ld_c <= ct_n; ld_p <= pt_n;
            ld_bank  <= ~bank;
            ld_start <= 1'b1;
          end
          state <= S_STEP;
        end
        S_STEP: begin
          if (issuing) begin
            if (iss_row == ($bits(iss_row))'(TR-1)) issuing <= 1'b0;
            else iss_row <= iss_row + 1'b1;
          end
          if (acc_valid) begin
            acc_cnt <= acc_cnt + 1'b1;
            if (acc_cnt == ($bits(acc_cnt))'(TR-1)) c_ok <= 1'b1;
          end
          if (c_ok && a_ok && w_ok) begin
            if (last_p) begin
              wb_start <= 1'b1;
              state    <= S_WB;
            end else begin
              rt <= rt_n; ct <= ct_n; pt <= pt_n;
              bank  <= ~bank;
              state <= S_LOAD0;
            end
          end
        end
        S_WB: if (wb_done) begin
          if (last_step) begin
            state <= S_DONE;
          end else begin
            rt <= rt_n; ct <= ct_n; pt <= pt_n;
            bank  <= ~bank;
            state <= S_LOAD0;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
