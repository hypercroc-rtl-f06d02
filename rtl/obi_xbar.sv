// obi_xbar: the SoC's main 32-bit OBI crossbar.
//
// Every manager can reach every subordinate. Each manager's address is
// decoded against one [start, end) rule per subordinate; an address that
// matches no rule goes to an internal error subordinate, which grants and
// answers with err one cycle later. Each subordinate port has its own
// round-robin arbiter, so different managers reach different subordinates
// in the same cycle, and conflicting managers are served in turn.
//
// Timing: request, decode and arbitration are combinational, so a granted
// request reaches the subordinate in the same cycle. All subordinates answer
// exactly one cycle after their grant; the crossbar remembers per
// subordinate which manager was granted and routes the response back to it
// in the next cycle. The crossbar thus adds no cycle of its own: this is the
// single-cycle interconnect of the paper. The number of ports, the address
// rules and the arbitration policy are this design's choice.
//
// Lint tools may report rst_ni as used both asynchronously and
// synchronously: the flip-flops reset asynchronously, the synchronous use
// is only the disable-iff condition of the assertions at the end.
module obi_xbar
  import croc_pkg::*;
#(
  parameter int unsigned NumMgr = 6,
  parameter int unsigned NumSbr = 6,
  parameter addr_rule_t [NumSbr-1:0] Rules = '0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  obi_req_t [NumMgr-1:0] mgr_req_i,
  output obi_rsp_t [NumMgr-1:0] mgr_rsp_o,
  output obi_req_t [NumSbr-1:0] sbr_req_o,
  input  obi_rsp_t [NumSbr-1:0] sbr_rsp_i
);
  localparam int unsigned MgrIdxW = (NumMgr > 1) ? $clog2(NumMgr) : 1;
  localparam int unsigned SbrIdxW = $clog2(NumSbr + 1);
  localparam int unsigned ErrIdx  = NumSbr;  // internal error subordinate

  logic [NumMgr-1:0][SbrIdxW-1:0] sel;
  // arbitration results
  logic [NumSbr:0]                 win_valid;
  logic [NumSbr:0][MgrIdxW-1:0]    win_idx;
  logic [NumSbr:0][MgrIdxW-1:0]    rr_q;
  // response routing, one cycle after the grant
  logic [NumSbr:0]                 pend_q;
  logic [NumSbr:0][MgrIdxW-1:0]    pend_mgr_q;
  logic [NumSbr:0]                 gnt_s;

  // Address decode
  always_comb begin
    for (int m = 0; m < NumMgr; m++) begin
      sel[m] = SbrIdxW'(ErrIdx);
      for (int s = NumSbr - 1; s >= 0; s--) begin
        if (mgr_req_i[m].addr >= Rules[s].start_addr && mgr_req_i[m].addr < Rules[s].end_addr)
          sel[m] = SbrIdxW'(s);
      end
    end
  end

  // Round-robin arbitration per subordinate (including the error one)
  always_comb begin
    for (int s = 0; s <= NumSbr; s++) begin
      win_valid[s] = 1'b0;
      win_idx[s]   = '0;
      for (int k = 0; k < NumMgr; k++) begin
        automatic int m = (int'(rr_q[s]) + k) % NumMgr;
        if (!win_valid[s] && mgr_req_i[m].req && sel[m] == SbrIdxW'(s)) begin
          win_valid[s] = 1'b1;
          win_idx[s]   = MgrIdxW'(m);
        end
      end
    end
  end

  // Forward requests, return grants
  always_comb begin
    for (int s = 0; s < NumSbr; s++) begin
      sbr_req_o[s]     = mgr_req_i[win_idx[s]];
      sbr_req_o[s].req = win_valid[s];
      gnt_s[s]         = win_valid[s] && sbr_rsp_i[s].gnt;
    end
    gnt_s[ErrIdx] = win_valid[ErrIdx];
  end

  always_comb begin
    for (int m = 0; m < NumMgr; m++) mgr_rsp_o[m] = ObiRspIdle;
    for (int s = 0; s <= NumSbr; s++) begin
      if (gnt_s[s]) mgr_rsp_o[win_idx[s]].gnt = 1'b1;
    end
    for (int s = 0; s < NumSbr; s++) begin
      if (pend_q[s]) begin
        mgr_rsp_o[pend_mgr_q[s]].rvalid = sbr_rsp_i[s].rvalid;
        mgr_rsp_o[pend_mgr_q[s]].rdata  = sbr_rsp_i[s].rdata;
        mgr_rsp_o[pend_mgr_q[s]].err    = sbr_rsp_i[s].err;
      end
    end
    if (pend_q[ErrIdx]) begin
      mgr_rsp_o[pend_mgr_q[ErrIdx]].rvalid = 1'b1;
      mgr_rsp_o[pend_mgr_q[ErrIdx]].rdata  = 32'hBADC_AB1E;
      mgr_rsp_o[pend_mgr_q[ErrIdx]].err    = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q       <= '0;
      pend_q     <= '0;
      pend_mgr_q <= '0;
    end else begin
      for (int s = 0; s <= NumSbr; s++) begin
        pend_q[s] <= gnt_s[s];
        if (gnt_s[s]) begin
          pend_mgr_q[s] <= win_idx[s];
          rr_q[s]       <= (win_idx[s] == MgrIdxW'(NumMgr - 1)) ? '0 : win_idx[s] + 1'b1;
        end
      end
    end
  end

  // Every subordinate answers exactly one cycle after its grant.
  for (genvar s = 0; s < NumSbr; s++) begin : gen_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q[s] |-> sbr_rsp_i[s].rvalid)
      else $error("obi_xbar: subordinate %0d missed its one-cycle response", s);
  end

endmodule
