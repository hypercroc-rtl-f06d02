// obi_demux: routes the crossbar's peripheral port to the peripherals.
//
// One OBI manager port fans out to NumSbr subordinate ports; the target is
// found by comparing the address against one [start, end) rule per port.
// An address that matches no rule is granted by an internal error
// subordinate, which answers with err one cycle later. The request path is
// combinational; the index of the granted port is registered so that the
// response of the next cycle is taken from the right port. Like every
// subordinate in this SoC, each peripheral answers one cycle after its
// grant, so the demux needs no more than one response in flight.
// The paper names this block in its figure; the decode rules are this
// design's choice.
module obi_demux
  import croc_pkg::*;
#(
  parameter int unsigned NumSbr = 9,
  parameter addr_rule_t [NumSbr-1:0] Rules = '0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  obi_req_t              mgr_req_i,
  output obi_rsp_t              mgr_rsp_o,
  output obi_req_t [NumSbr-1:0] sbr_req_o,
  input  obi_rsp_t [NumSbr-1:0] sbr_rsp_i
);
  localparam int unsigned IdxW = $clog2(NumSbr + 1);

  logic [IdxW-1:0] sel, sel_q;
  logic            pend_q;
  logic            hit;

  always_comb begin
    sel = IdxW'(NumSbr);
    for (int s = NumSbr - 1; s >= 0; s--) begin
      if (mgr_req_i.addr >= Rules[s].start_addr && mgr_req_i.addr < Rules[s].end_addr)
        sel = IdxW'(s);
    end
  end
  assign hit = (sel != IdxW'(NumSbr));

  always_comb begin
    mgr_rsp_o = ObiRspIdle;
    for (int s = 0; s < NumSbr; s++) begin
      sbr_req_o[s]     = mgr_req_i;
      sbr_req_o[s].req = mgr_req_i.req && (sel == IdxW'(s));
      if (sel == IdxW'(s)) mgr_rsp_o.gnt = sbr_rsp_i[s].gnt;
    end
    if (!hit) mgr_rsp_o.gnt = 1'b1;
    if (pend_q) begin
      if (sel_q == IdxW'(NumSbr)) begin
        mgr_rsp_o.rvalid = 1'b1;
        mgr_rsp_o.rdata  = 32'hBADC_AB1E;
        mgr_rsp_o.err    = 1'b1;
      end else begin
        for (int s = 0; s < NumSbr; s++) begin
          if (sel_q == IdxW'(s)) begin
            mgr_rsp_o.rvalid = sbr_rsp_i[s].rvalid;
            mgr_rsp_o.rdata  = sbr_rsp_i[s].rdata;
            mgr_rsp_o.err    = sbr_rsp_i[s].err;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0;
      sel_q  <= '0;
    end else begin
      pend_q <= mgr_req_i.req && mgr_rsp_o.gnt;
      if (mgr_req_i.req && mgr_rsp_o.gnt) sel_q <= sel;
    end
  end

endmodule
