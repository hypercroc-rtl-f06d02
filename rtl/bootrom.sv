// bootrom: read-only boot code behind an OBI subordinate port.
//
// The paper only names this block. Its content here is a four-instruction
// RV32I loader of this design's own: it reads the boot address from the
// SoC registers and jumps there (the core then runs code that the debug
// port or the iDMA placed in SRAM). Words past the program read as zero.
//   0x00 lui  t0, 0x03000      # t0 = SoC register base
//   0x04 lw   t1, 0(t0)        # t1 = boot address register
//   0x08 jalr x0, 0(t1)        # jump to it
//   0x0C jal  x0, 0            # never reached
// Writes are ignored (acknowledged, no error). Response one cycle after the
// grant, like every subordinate in the SoC.
module bootrom
  import croc_pkg::*;
#(
  parameter int unsigned NumWords = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o
);
  localparam int unsigned IdxW = $clog2(NumWords);

  function automatic data_t rom_word(input logic [IdxW-1:0] idx);
    case (idx)
      IdxW'(0): return 32'h0300_02B7;
      IdxW'(1): return 32'h0002_A303;
      IdxW'(2): return 32'h0003_0067;
      IdxW'(3): return 32'h0000_006F;
      default:  return '0;
    endcase
  endfunction

  logic  rvalid_q;
  data_t rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= req_i.req;
      if (req_i.req) rdata_q <= rom_word(req_i.addr[IdxW+1:2]);
    end
  end

  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
