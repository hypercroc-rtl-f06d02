// sram_bank: one on-chip SRAM bank behind a single-cycle OBI subordinate port.
//
// The paper's SoC has four such banks of 8 KiB each (32-bit words, so 2048
// words per bank). The bank always grants; the read data (or, for a write,
// the write acknowledge) is returned with rvalid one cycle after the grant,
// which is the single-cycle access the paper gives the core and the iDMA.
// Byte enables mask writes per byte. The array is written as a plain memory
// so synthesis maps it to a macro; the memory content is not reset.
module sram_bank
  import croc_pkg::*;
#(
  parameter int unsigned NumWords = 2048  // 8 KiB of 32-bit words
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o
);
  localparam int unsigned IdxW = $clog2(NumWords);

  data_t mem [NumWords];
  logic  [IdxW-1:0] idx;
  logic  rvalid_q;
  data_t rdata_q;

  assign idx = req_i.addr[IdxW+1:2];

  always_ff @(posedge clk_i) begin
    if (req_i.req && req_i.we) begin
      for (int b = 0; b < DataWidth/8; b++) begin
        if (req_i.be[b]) mem[idx][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end
    end
    if (req_i.req && !req_i.we) rdata_q <= mem[idx];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_q <= 1'b0;
    else         rvalid_q <= req_i.req;
  end

  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
