// gpio: general-purpose I/O pins with per-pin direction and edge interrupt.
//
// The paper only names the block; the register set is this design's own:
//   0x00 DIR     rw  1 = pin is an output (drives gpio_oe_o)
//   0x04 OUT     rw  output values
//   0x08 IN      ro  pin values after a two-flop synchroniser
//   0x0C SET     wo  OUT |= wdata
//   0x10 CLEAR   wo  OUT &= ~wdata
//   0x14 IRQEN   rw  enable a rising-edge interrupt per pin
//   0x18 IRQPEND rw1c pending rising edges (write ones to clear)
// irq_o is high while any enabled pin has a pending edge. Response one cycle
// after the grant.
module gpio
  import croc_pkg::*;
#(
  parameter int unsigned NumPins = 32
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t           req_i,
  output obi_rsp_t           rsp_o,
  input  logic [NumPins-1:0] gpio_i,
  output logic [NumPins-1:0] gpio_o,
  output logic [NumPins-1:0] gpio_oe_o,
  output logic               irq_o
);
  typedef logic [NumPins-1:0] pins_t;
  pins_t dir_q, out_q, in_q1, in_q2, in_q3, irqen_q, pend_q;
  logic  rvalid_q;
  data_t rdata_q;
  pins_t wd;

  assign wd = pins_t'(req_i.wdata);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dir_q    <= '0;
      out_q    <= '0;
      in_q1    <= '0;
      in_q2    <= '0;
      in_q3    <= '0;
      irqen_q  <= '0;
      pend_q   <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      in_q1 <= gpio_i;
      in_q2 <= in_q1;
      in_q3 <= in_q2;
      pend_q <= pend_q | (in_q2 & ~in_q3);
      rvalid_q <= req_i.req;
      if (req_i.req) begin
        rdata_q <= '0;
        unique case (req_i.addr[4:2])
          3'd0: begin rdata_q <= data_t'(dir_q);   if (req_i.we) dir_q   <= wd; end
          3'd1: begin rdata_q <= data_t'(out_q);   if (req_i.we) out_q   <= wd; end
          3'd2: rdata_q <= data_t'(in_q2);
          3'd3: if (req_i.we) out_q <= out_q | wd;
          3'd4: if (req_i.we) out_q <= out_q & ~wd;
          3'd5: begin rdata_q <= data_t'(irqen_q); if (req_i.we) irqen_q <= wd; end
          3'd6: begin
            rdata_q <= data_t'(pend_q);
            if (req_i.we) pend_q <= (pend_q | (in_q2 & ~in_q3)) & ~wd;
          end
          default: ;
        endcase
      end
    end
  end

  assign gpio_o       = out_q;
  assign gpio_oe_o    = dir_q;
  assign irq_o        = |(pend_q & irqen_q);
  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
