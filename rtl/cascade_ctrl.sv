// cascade_ctrl: batch sequencing of the two-stage cascade.
//
// A batch of samples is first classified entirely by the low-precision unit
// (LPU phase). For each sample, in order, the confidence evaluation unit
// reports pass/fail and a predicted class: the class is stored as the
// sample's label, and a failing sample's index is appended to the
// re-processing list. When the whole batch has been judged, the controller
// asks for the device to be switched to the high-precision unit
// (reconfig_req / reconfig_done; in the paper this is a full FPGA
// reconfiguration, here both units exist and the request only gates which
// one may start). In the HPU phase the list of failed samples is handed out
// (hpu_id stream) so they can be re-processed; the class the high-precision
// result produces replaces the stored label of the j-th failed sample. The
// batch is done when every failed sample has been re-classified, or right
// after the LPU phase when none failed. The order of events follows the
// paper; the handshake signals and storage layout are this design's own.
// Interface: start with batch_size (1..BATCH) in PH_IDLE or PH_DONE; ceu_*
// are the CEU's outputs; labels can be read at any time by index.
//
// Lint note: rst_n is both the asynchronous reset of the state and the
// disable condition of the batch-size assertion, which samples it on the
// clock; the assertion does not produce hardware.
module cascade_ctrl
  import cascade_pkg::*;
#(
  parameter int unsigned BATCH = 1024,
  parameter int unsigned CLSW  = 10,
  localparam int unsigned BW   = $clog2(BATCH+1),
  localparam int unsigned IW   = $clog2(BATCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BW-1:0]    batch_size,
  output phase_e           phase,
  output logic             reconfig_req,
  input  logic             reconfig_done,
  output logic             done,
  // CEU result
  input  logic             ceu_valid,
  input  logic             ceu_pass,
  input  logic [CLSW-1:0]  ceu_class,
  // samples to re-process on the HPU
  output logic             hpu_id_valid,
  input  logic             hpu_id_ready,
  output logic [IW-1:0]    hpu_id,
  // label read-out
  input  logic [IW-1:0]    lbl_idx,
  output logic [CLSW-1:0]  lbl_class,
  // statistics of the current batch
  output logic [BW-1:0]    n_pass,
  output logic [BW-1:0]    n_fail
);
  logic [CLSW-1:0] labels    [BATCH];
  logic [IW-1:0]   fail_list [BATCH];
  logic [BW-1:0]   size_q, seen, issued, redone;

  assign lbl_class    = labels[lbl_idx];
  assign hpu_id       = fail_list[issued[IW-1:0]];
  assign hpu_id_valid = (phase == PH_HPU) && (issued != n_fail);

  always_ff @(posedge clk) begin
    if (ceu_valid && phase == PH_LPU && !reconfig_req) begin
      labels[seen[IW-1:0]] <= ceu_class;
      if (!ceu_pass) fail_list[n_fail[IW-1:0]] <= seen[IW-1:0];
    end else if (ceu_valid && phase == PH_HPU) begin
      labels[fail_list[redone[IW-1:0]]] <= ceu_class;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= PH_IDLE;
      reconfig_req <= 1'b0;
      done         <= 1'b0;
      size_q       <= '0;
      seen         <= '0;
      issued       <= '0;
      redone       <= '0;
      n_pass       <= '0;
      n_fail       <= '0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        PH_IDLE, PH_DONE: if (start) begin
          phase  <= PH_LPU;
          size_q <= batch_size;
          seen   <= '0;
          issued <= '0;
          redone <= '0;
          n_pass <= '0;
          n_fail <= '0;
        end
        PH_LPU: begin
          if (reconfig_req) begin
            if (reconfig_done) begin
              reconfig_req <= 1'b0;
              phase        <= PH_HPU;
            end
          end else if (ceu_valid) begin
            seen <= seen + 1'b1;
            if (ceu_pass) n_pass <= n_pass + 1'b1;
            else          n_fail <= n_fail + 1'b1;
            if (seen + 1'b1 == size_q) begin
              if (!ceu_pass || n_fail != '0) reconfig_req <= 1'b1;
              else begin
                phase <= PH_DONE;
                done  <= 1'b1;
              end
            end
          end
        end
        PH_HPU: begin
          if (hpu_id_valid && hpu_id_ready) issued <= issued + 1'b1;
          if (ceu_valid) begin
            redone <= redone + 1'b1;
            if (redone + 1'b1 == n_fail) begin
              phase <= PH_DONE;
              done  <= 1'b1;
            end
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  a_batch_size: assert property (@(posedge clk) disable iff (!rst_n)
    start && (phase == PH_IDLE || phase == PH_DONE) |-> batch_size != '0 && batch_size <= BW'(BATCH));

endmodule
