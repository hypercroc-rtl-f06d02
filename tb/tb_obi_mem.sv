// tb_obi_mem: testbench memory behind an OBI subordinate port.
// Keeps Words 32-bit words indexed by address bits [.. :2] modulo Words.
// With stall_i set it withholds the grant on random cycles; the response
// always follows one cycle after the grant, as the SoC's subordinates do.
// Counts accepted requests.
module tb_obi_mem
  import croc_pkg::*;
#(
  parameter int unsigned Words = 1024
) (
  input  logic     clk_i,
  input  logic     stall_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output int       accepted_o
);
  data_t mem [Words];
  logic  gnt_q, rvalid_q;
  data_t rdata_q;
  int    acc_q;

  initial for (int i = 0; i < Words; i++) mem[i] = '0;

  always @(negedge clk_i) gnt_q <= stall_i ? 1'($urandom_range(0, 3) != 0) : 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      acc_q    <= 0;
    end else begin
      rvalid_q <= req_i.req && gnt_q;
      if (req_i.req && gnt_q) begin
        acc_q <= acc_q + 1;
        rdata_q <= mem[(req_i.addr >> 2) % Words];
        if (req_i.we) mem[(req_i.addr >> 2) % Words] <= req_i.wdata;
      end
    end
  end

  assign rsp_o      = '{gnt: gnt_q, rvalid: rvalid_q, rdata: rdata_q, err: 1'b0};
  assign accepted_o = acc_q;
endmodule
