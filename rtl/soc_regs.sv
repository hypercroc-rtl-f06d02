// soc_regs: SoC control and status registers.
//
// The paper only names this block; this register set is this design's own:
//   0x00 BOOTADDR   rw  address the boot ROM jumps to (reset: SRAM base)
//   0x04 FETCHEN    rw  bit 0 -> fetch_enable_o (core may start fetching)
//   0x08 CORESTATUS rw  free word software uses to report an exit code
//   0x0C BOOTMODE   ro  boot-mode pins
//   0x10 INFO       ro  [7:0] SRAM banks, [15:8] KiB per bank,
//                       [19:16] HyperBus PHYs, [23:20] chip selects per PHY
// Unknown offsets read zero and ignore writes. Response one cycle after the
// grant.
module soc_regs
  import croc_pkg::*;
#(
  parameter int unsigned NumBanks  = 4,
  parameter int unsigned BankKiB   = 8,
  parameter int unsigned NumPhys   = 2,
  parameter int unsigned NumCs     = 4,
  parameter addr_t       BootReset = SramBase
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  obi_req_t   req_i,
  output obi_rsp_t   rsp_o,
  input  logic [1:0] bootmode_i,
  output addr_t      boot_addr_o,
  output logic       fetch_enable_o,
  output data_t      core_status_o
);
  addr_t boot_q;
  logic  fetch_q;
  data_t status_q;
  logic  rvalid_q;
  data_t rdata_q;
  data_t info;

  assign info = {8'b0, 4'(NumCs), 4'(NumPhys), 8'(BankKiB), 8'(NumBanks)};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      boot_q   <= BootReset;
      fetch_q  <= 1'b0;
      status_q <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= req_i.req;
      if (req_i.req) begin
        rdata_q <= '0;
        unique case (req_i.addr[11:2])
          10'd0: begin rdata_q <= boot_q;           if (req_i.we) boot_q   <= req_i.wdata;    end
          10'd1: begin rdata_q <= {31'b0, fetch_q}; if (req_i.we) fetch_q  <= req_i.wdata[0]; end
          10'd2: begin rdata_q <= status_q;         if (req_i.we) status_q <= req_i.wdata;    end
          10'd3: rdata_q <= {30'b0, bootmode_i};
          10'd4: rdata_q <= info;
          default: ;
        endcase
      end
    end
  end

  assign boot_addr_o    = boot_q;
  assign fetch_enable_o = fetch_q;
  assign core_status_o  = status_q;
  assign rsp_o.gnt      = 1'b1;
  assign rsp_o.rvalid   = rvalid_q;
  assign rsp_o.rdata    = rdata_q;
  assign rsp_o.err      = 1'b0;

endmodule
