// idma: one-dimensional DMA engine moving data between external memory
// (HyperBus), the on-chip SRAM banks and the user domain.
//
// Software writes source, destination and length (bytes, whole 32-bit
// words) into the configuration registers and starts the transfer:
//   0x00 SRC     rw  source byte address (word aligned)
//   0x04 DST     rw  destination byte address (word aligned)
//   0x08 LEN     rw  length in bytes (multiple of 4)
//   0x0C CTRL    wo  [0] start (ignored while busy)
//   0x10 STATUS  ro/w1c  [0] busy, [1] bus error seen, [2] done pending
//                (write 1 to [2] to clear it and the error flag)
//   0x14 DONE    ro  number of completed transfers
// irq_o follows STATUS[2].
//
// The engine has a read side and a write side that run concurrently and
// meet in a FifoDepth-word buffer. Each side has two OBI manager ports: one
// into the main crossbar (single-cycle access to SRAM and the user domain)
// and one straight to the HyperBus controller. A side uses the HyperBus port
// when its address lies in the HyperBus window [HyperBase, HyperEnd), chosen
// once per transfer. Both sides cut the transfer into bursts of at most
// BurstWords words and mark every beat with the burst's length (blen =
// beats-1), so the HyperBus controller can run each burst as one contiguous
// HyperBus transaction. The read side starts a burst only when the buffer
// has room for all of it (counting reads still in flight); the write side
// starts a burst only when the buffer already holds all of its data, so a
// HyperBus write burst never runs dry. Inside a burst each side issues one
// beat per cycle while granted and starts the next burst in the cycle of
// the previous burst's last beat, so once the buffer has filled, an SRAM to
// SRAM copy moves one 32-bit word per cycle.
//
// The paper gives the iDMA's role, its two attachments and the use of
// bursts; the register map, the burst length and the buffer depth are this
// design's choice. Configuration response one cycle after the grant.
//
// Lint tools may report rst_ni as used both asynchronously and
// synchronously: the flip-flops reset asynchronously, the synchronous use
// is only the disable-iff condition of the assertions at the end.
module idma
  import croc_pkg::*;
#(
  parameter int unsigned BurstWords = 16,
  parameter int unsigned FifoDepth  = 48   // three bursts: lets both sides stream
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // configuration port (subordinate)
  input  obi_req_t cfg_req_i,
  output obi_rsp_t cfg_rsp_o,
  // read side managers
  output obi_req_t xbar_rd_req_o,
  input  obi_rsp_t xbar_rd_rsp_i,
  output obi_req_t hyper_rd_req_o,
  input  obi_rsp_t hyper_rd_rsp_i,
  // write side managers
  output obi_req_t xbar_wr_req_o,
  input  obi_rsp_t xbar_wr_rsp_i,
  output obi_req_t hyper_wr_req_o,
  input  obi_rsp_t hyper_wr_rsp_i,
  output logic     busy_o,
  output logic     irq_o
);
  localparam int unsigned PtrW = $clog2(FifoDepth);
  localparam int unsigned CntW = $clog2(FifoDepth + 1);
  localparam int unsigned BW   = $clog2(BurstWords + 1);

  typedef logic [29:0] words_t;

  // ---------------- configuration ----------------
  addr_t  src_q, dst_q;
  data_t  len_q;
  logic   busy_q, err_q, done_q;
  data_t  ndone_q;
  logic   cfg_rvalid_q;
  data_t  cfg_rdata_q;
  logic   start;

  assign start = cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[4:2] == 3'd3 &&
                 cfg_req_i.wdata[0] && !busy_q && (len_q[31:2] != '0);

  // ---------------- buffer ----------------
  data_t           fifo_q [FifoDepth];
  logic [PtrW-1:0] wptr_q, rptr_q;
  logic [CntW-1:0] count_q;
  logic            push, pop;

  // ---------------- read side ----------------
  addr_t           rd_addr_q;
  words_t          rd_left_q;
  logic [BW-1:0]   rd_burst_q;     // beats left in current burst
  logic [BW-1:0]   rd_blen_q;      // length of current burst
  logic [CntW-1:0] rd_out_q;       // reads in flight
  logic            rd_hyper_q;
  obi_req_t        rd_req;
  obi_rsp_t        rd_rsp;
  logic [BW-1:0]   rd_n;
  logic            rd_start;

  // ---------------- write side ----------------
  addr_t           wr_addr_q;
  words_t          wr_left_q;
  logic [BW-1:0]   wr_burst_q;
  logic [BW-1:0]   wr_blen_q;
  words_t          wr_ack_q;       // write responses still expected
  logic            wr_hyper_q;
  obi_req_t        wr_req;
  obi_rsp_t        wr_rsp;
  logic [BW-1:0]   wr_n;
  logic            wr_start;

  function automatic logic is_hyper(addr_t a);
    return (a >= HyperBase) && (a < HyperEnd);
  endfunction

  function automatic logic [BW-1:0] burst_len(words_t left);
    return (left >= words_t'(BurstWords)) ? BW'(BurstWords) : BW'(left);
  endfunction

  // Burst starts. A new burst may start in the cycle where the last beat
  // of the previous one is granted, so back-to-back bursts leave no gap;
  // the remaining length, buffer room and buffer fill are then taken as
  // they will be after this cycle's beat (ignoring this cycle's other side,
  // which only makes the test conservative).
  logic   rd_gnt_now, wr_gnt_now;
  words_t rd_left_nx, wr_left_nx;
  assign rd_gnt_now = rd_req.req && rd_rsp.gnt;
  assign wr_gnt_now = wr_req.req && wr_rsp.gnt;
  assign rd_left_nx = rd_left_q - words_t'(rd_gnt_now);
  assign wr_left_nx = wr_left_q - words_t'(wr_gnt_now);
  assign rd_n     = burst_len(rd_left_nx);
  assign rd_start = busy_q && (rd_burst_q == '0 || (rd_burst_q == BW'(1) && rd_gnt_now)) &&
                    rd_left_nx != '0 &&
                    (CntW'(FifoDepth) - count_q - rd_out_q - CntW'(rd_gnt_now)) >= CntW'(rd_n);
  assign wr_n     = burst_len(wr_left_nx);
  assign wr_start = busy_q && (wr_burst_q == '0 || (wr_burst_q == BW'(1) && wr_gnt_now)) &&
                    wr_left_nx != '0 && (count_q - CntW'(wr_gnt_now)) >= CntW'(wr_n);

  // read request
  always_comb begin
    rd_req       = ObiReqIdle;
    rd_req.req   = (rd_burst_q != '0);
    rd_req.addr  = rd_addr_q;
    rd_req.be    = '1;
    rd_req.blen  = BlenWidth'(rd_blen_q - 1'b1);
    wr_req       = ObiReqIdle;
    wr_req.req   = (wr_burst_q != '0);
    wr_req.addr  = wr_addr_q;
    wr_req.we    = 1'b1;
    wr_req.be    = '1;
    wr_req.wdata = fifo_q[rptr_q];
    wr_req.blen  = BlenWidth'(wr_blen_q - 1'b1);
  end

  always_comb begin
    xbar_rd_req_o  = rd_req;
    hyper_rd_req_o = rd_req;
    xbar_rd_req_o.req  = rd_req.req && !rd_hyper_q;
    hyper_rd_req_o.req = rd_req.req &&  rd_hyper_q;
    rd_rsp = rd_hyper_q ? hyper_rd_rsp_i : xbar_rd_rsp_i;
    xbar_wr_req_o  = wr_req;
    hyper_wr_req_o = wr_req;
    xbar_wr_req_o.req  = wr_req.req && !wr_hyper_q;
    hyper_wr_req_o.req = wr_req.req &&  wr_hyper_q;
    wr_rsp = wr_hyper_q ? hyper_wr_rsp_i : xbar_wr_rsp_i;
  end

  assign push = rd_rsp.rvalid;
  assign pop  = wr_req.req && wr_rsp.gnt;

  always_ff @(posedge clk_i) begin
    if (push) fifo_q[wptr_q] <= rd_rsp.rdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q        <= '0;
      dst_q        <= '0;
      len_q        <= '0;
      busy_q       <= 1'b0;
      err_q        <= 1'b0;
      done_q       <= 1'b0;
      ndone_q      <= '0;
      cfg_rvalid_q <= 1'b0;
      cfg_rdata_q  <= '0;
      wptr_q       <= '0;
      rptr_q       <= '0;
      count_q      <= '0;
      rd_addr_q    <= '0;
      rd_left_q    <= '0;
      rd_burst_q   <= '0;
      rd_blen_q    <= '0;
      rd_out_q     <= '0;
      rd_hyper_q   <= 1'b0;
      wr_addr_q    <= '0;
      wr_left_q    <= '0;
      wr_burst_q   <= '0;
      wr_blen_q    <= '0;
      wr_ack_q     <= '0;
      wr_hyper_q   <= 1'b0;
    end else begin
      // configuration registers
      cfg_rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req) begin
        cfg_rdata_q <= '0;
        unique case (cfg_req_i.addr[4:2])
          3'd0: begin cfg_rdata_q <= src_q; if (cfg_req_i.we && !busy_q) src_q <= cfg_req_i.wdata; end
          3'd1: begin cfg_rdata_q <= dst_q; if (cfg_req_i.we && !busy_q) dst_q <= cfg_req_i.wdata; end
          3'd2: begin cfg_rdata_q <= len_q; if (cfg_req_i.we && !busy_q) len_q <= cfg_req_i.wdata; end
          3'd4: begin
            cfg_rdata_q <= {29'b0, done_q, err_q, busy_q};
            if (cfg_req_i.we && cfg_req_i.wdata[2]) begin
              done_q <= 1'b0;
              err_q  <= 1'b0;
            end
          end
          3'd5: cfg_rdata_q <= ndone_q;
          default: ;
        endcase
      end

      // transfer start
      if (start) begin
        busy_q     <= 1'b1;
        rd_addr_q  <= {src_q[31:2], 2'b00};
        wr_addr_q  <= {dst_q[31:2], 2'b00};
        rd_left_q  <= len_q[31:2];
        wr_left_q  <= len_q[31:2];
        wr_ack_q   <= len_q[31:2];
        rd_hyper_q <= is_hyper(src_q);
        wr_hyper_q <= is_hyper(dst_q);
      end

      // read side
      if (rd_gnt_now) begin
        rd_addr_q  <= rd_addr_q + 32'd4;
        rd_left_q  <= rd_left_nx;
        rd_burst_q <= rd_burst_q - 1'b1;
      end
      if (rd_start) begin
        rd_burst_q <= rd_n;
        rd_blen_q  <= rd_n;
      end
      rd_out_q <= rd_out_q + CntW'(rd_req.req && rd_rsp.gnt) - CntW'(rd_rsp.rvalid);
      if (rd_rsp.rvalid && rd_rsp.err) err_q <= 1'b1;

      // buffer
      if (push) wptr_q <= (wptr_q == PtrW'(FifoDepth - 1)) ? '0 : wptr_q + 1'b1;
      if (pop)  rptr_q <= (rptr_q == PtrW'(FifoDepth - 1)) ? '0 : rptr_q + 1'b1;
      count_q <= count_q + CntW'(push) - CntW'(pop);

      // write side
      if (pop) begin
        wr_addr_q  <= wr_addr_q + 32'd4;
        wr_left_q  <= wr_left_nx;
        wr_burst_q <= wr_burst_q - 1'b1;
      end
      if (wr_start) begin
        wr_burst_q <= wr_n;
        wr_blen_q  <= wr_n;
      end
      if (wr_rsp.rvalid) begin
        if (wr_rsp.err) err_q <= 1'b1;
        wr_ack_q <= wr_ack_q - 1'b1;
        if (busy_q && wr_ack_q == words_t'(1)) begin
          busy_q  <= 1'b0;
          done_q  <= 1'b1;
          ndone_q <= ndone_q + 32'd1;
        end
      end
    end
  end

  assign busy_o           = busy_q;
  assign irq_o            = done_q;
  assign cfg_rsp_o.gnt    = 1'b1;
  assign cfg_rsp_o.rvalid = cfg_rvalid_q;
  assign cfg_rsp_o.rdata  = cfg_rdata_q;
  assign cfg_rsp_o.err    = 1'b0;

  // The buffer never over- or underflows.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && !pop && count_q == CntW'(FifoDepth)))
    else $error("idma: buffer overflow");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop && count_q == '0))
    else $error("idma: buffer underflow");

endmodule
