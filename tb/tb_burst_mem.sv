// tb_burst_mem: testbench memory behind a burst port like the HyperBus
// controller's. Grants on random cycles when stall_i is set, answers reads
// in order after a random delay of 1..8 cycles, acknowledges writes one
// cycle after the grant. Checks the burst rules on every beat: all beats
// of a burst carry the same blen, addresses are consecutive words, and the
// burst has exactly blen+1 beats. Counts bursts and rule violations.
module tb_burst_mem
  import croc_pkg::*;
#(
  parameter int unsigned Words = 4096
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     stall_i,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  output int       bursts_o,
  output int       violations_o
);
  data_t mem [Words];
  logic  gnt_q;
  data_t rq_data [$];
  longint rq_time [$];
  longint cyc = 0;
  int    left = 0, bursts = 0, viol = 0;
  logic [BlenWidth-1:0] cur_blen;
  addr_t next_addr;
  logic  rvalid_q, ack_q;
  data_t rdata_q;

  initial for (int i = 0; i < Words; i++) mem[i] = '0;

  always @(negedge clk_i) gnt_q <= stall_i ? 1'($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk_i) begin
    cyc <= cyc + 1;
    rvalid_q <= 1'b0;
    ack_q    <= 1'b0;
    if (rst_ni) begin
      if (req_i.req && gnt_q) begin
        if (left == 0) begin
          bursts <= bursts + 1;
          left = int'(req_i.blen) + 1;
          cur_blen = req_i.blen;
        end else if (req_i.blen != cur_blen || req_i.addr != next_addr) begin
          viol <= viol + 1;
        end
        next_addr = req_i.addr + 4;
        left = left - 1;
        if (req_i.we) begin
          mem[(req_i.addr >> 2) % Words] <= req_i.wdata;
          ack_q <= 1'b1;
        end else begin
          rq_data.push_back(mem[(req_i.addr >> 2) % Words]);
          rq_time.push_back(cyc + longint'($urandom_range(1, 8)));
        end
      end
      if (rq_time.size() > 0 && rq_time[0] <= cyc) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rq_data.pop_front();
        void'(rq_time.pop_front());
      end
    end
  end

  assign rsp_o = '{gnt: gnt_q, rvalid: rvalid_q || ack_q, rdata: rdata_q, err: 1'b0};
  assign bursts_o = bursts;
  assign violations_o = viol;
endmodule
