// mem_model: behavioural model of the off-chip memory seen by one
// processing unit (two read ports for activations and weights, one write
// port for outputs). Not synthesizable. Words are 64 bits; unwritten words
// read as zero. Each port accepts a request on valid & ready; ready drops at
// random with probability STALL_PCT percent to exercise stalls, and read
// responses return in order RD_LAT cycles after acceptance.
module mem_model
  import cascade_pkg::*;
#(
  parameter int RD_LAT    = 4,
  parameter int STALL_PCT = 20
) (
  input  logic    clk,
  input  logic    a_req_valid,
  output logic    a_req_ready,
  input  rd_req_t a_req,
  output logic    a_rsp_valid,
  output word_t   a_rsp_data,
  input  logic    w_req_valid,
  output logic    w_req_ready,
  input  rd_req_t w_req,
  output logic    w_rsp_valid,
  output word_t   w_rsp_data,
  input  logic    o_wr_valid,
  output logic    o_wr_ready,
  input  wr_req_t o_wr
);
  word_t mem [addr_t];
  int    stalls = 0;
  int    cyc = 0;

  typedef struct { addr_t addr; int t; } pend_t;
  pend_t qa [$], qw [$];

  function automatic word_t rd(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic write_word(addr_t a, word_t d);
    mem[a] = d;
  endtask

  initial begin
    a_req_ready = 1'b0; w_req_ready = 1'b0; o_wr_ready = 1'b0;
    a_rsp_valid = 1'b0; w_rsp_valid = 1'b0;
    a_rsp_data = '0; w_rsp_data = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (a_req_valid && a_req_ready) qa.push_back('{a_req.addr, cyc});
    if (w_req_valid && w_req_ready) qw.push_back('{w_req.addr, cyc});
    if (o_wr_valid && o_wr_ready) mem[o_wr.addr] = o_wr.data;
    if ((a_req_valid && !a_req_ready) || (w_req_valid && !w_req_ready) ||
        (o_wr_valid && !o_wr_ready)) stalls++;
    a_rsp_valid <= 1'b0;
    w_rsp_valid <= 1'b0;
    if (qa.size() != 0 && cyc - qa[0].t >= RD_LAT) begin
      a_rsp_valid <= 1'b1;
      a_rsp_data  <= rd(qa[0].addr);
      void'(qa.pop_front());
    end
    if (qw.size() != 0 && cyc - qw[0].t >= RD_LAT) begin
      w_rsp_valid <= 1'b1;
      w_rsp_data  <= rd(qw[0].addr);
      void'(qw.pop_front());
    end
    a_req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    w_req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    o_wr_ready  <= ($urandom_range(0, 99) >= STALL_PCT);
  end
endmodule
