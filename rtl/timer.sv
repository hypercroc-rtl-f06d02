// timer: 32-bit up-counter with a compare interrupt.
//
// The paper only names the block; the register set is this design's own:
//   0x00 COUNT   rw  counter value
//   0x04 CMP     rw  compare value
//   0x08 CTRL    rw  [0] enable, [1] clear the counter when it reaches CMP
//   0x0C PRESC   rw  the counter advances once every PRESC+1 cycles
//   0x10 STATUS  rw1c [0] compare match pending
// When the enabled counter equals CMP at an advance, STATUS[0] is set and
// stays set until software writes a one to it; irq_o follows STATUS[0].
// Response one cycle after the grant.
module timer
  import croc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output logic     irq_o
);
  data_t count_q, cmp_q, presc_q, pcnt_q;
  logic  en_q, clr_q, pend_q;
  logic  rvalid_q;
  data_t rdata_q;
  logic  adv, match;

  assign adv   = en_q && (pcnt_q == presc_q);
  assign match = adv && (count_q == cmp_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      count_q  <= '0;
      cmp_q    <= '1;
      presc_q  <= '0;
      pcnt_q   <= '0;
      en_q     <= 1'b0;
      clr_q    <= 1'b0;
      pend_q   <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (en_q) pcnt_q <= adv ? '0 : pcnt_q + 32'd1;
      if (adv) count_q <= (match && clr_q) ? '0 : count_q + 32'd1;
      if (match) pend_q <= 1'b1;
      rvalid_q <= req_i.req;
      if (req_i.req) begin
        rdata_q <= '0;
        unique case (req_i.addr[4:2])
          3'd0: begin rdata_q <= count_q; if (req_i.we) count_q <= req_i.wdata; end
          3'd1: begin rdata_q <= cmp_q;   if (req_i.we) cmp_q   <= req_i.wdata; end
          3'd2: begin
            rdata_q <= {30'b0, clr_q, en_q};
            if (req_i.we) begin
              en_q   <= req_i.wdata[0];
              clr_q  <= req_i.wdata[1];
              pcnt_q <= '0;
            end
          end
          3'd3: begin rdata_q <= presc_q; if (req_i.we) presc_q <= req_i.wdata; end
          3'd4: begin
            rdata_q <= {31'b0, pend_q};
            if (req_i.we && req_i.wdata[0]) pend_q <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end

  assign irq_o        = pend_q;
  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
