// clint: RISC-V core-local interruptor (machine timer and software interrupt).
//
// Registers (byte offsets in the 64 KiB window, the usual CLINT layout):
//   0x0000 msip          bit 0 drives sw_irq_o
//   0x4000 mtimecmp low  0x4004 mtimecmp high
//   0xBFF8 mtime low     0xBFFC mtime high   (writable)
// mtime counts up by one on every cycle where tick_i is high (a reference
// tick; tie it high to count SoC cycles). timer_irq_o is high while
// mtime >= mtimecmp. mtimecmp resets to all ones so no interrupt is pending
// after reset. The paper only names the block; the layout is the standard
// one of RISC-V platforms. Response one cycle after the grant.
module clint
  import croc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     tick_i,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output logic     timer_irq_o,
  output logic     sw_irq_o
);
  logic [63:0] mtime_q, mtimecmp_q;
  logic        msip_q;
  logic        rvalid_q;
  data_t       rdata_q;
  logic [15:0] off;

  assign off = req_i.addr[15:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtime_q    <= '0;
      mtimecmp_q <= '1;
      msip_q     <= 1'b0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      rvalid_q <= req_i.req;
      if (tick_i) mtime_q <= mtime_q + 64'd1;
      if (req_i.req) begin
        rdata_q <= '0;
        unique case (off)
          16'h0000: begin
            rdata_q <= {31'b0, msip_q};
            if (req_i.we && req_i.be[0]) msip_q <= req_i.wdata[0];
          end
          16'h4000: begin
            rdata_q <= mtimecmp_q[31:0];
            if (req_i.we) mtimecmp_q[31:0] <= req_i.wdata;
          end
          16'h4004: begin
            rdata_q <= mtimecmp_q[63:32];
            if (req_i.we) mtimecmp_q[63:32] <= req_i.wdata;
          end
          16'hBFF8: begin
            rdata_q <= mtime_q[31:0];
            if (req_i.we) mtime_q[31:0] <= req_i.wdata;
          end
          16'hBFFC: begin
            rdata_q <= mtime_q[63:32];
            if (req_i.we) mtime_q[63:32] <= req_i.wdata;
          end
          default: ;
        endcase
      end
    end
  end

  assign timer_irq_o  = (mtime_q >= mtimecmp_q);
  assign sw_irq_o     = msip_q;
  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
