// tb_idma: programs the iDMA through its configuration port and checks
// copies between all four combinations of crossbar and HyperBus ports
// (testbench memories stand in for both), with lengths that are and are
// not multiples of the burst length and with random stalls. Checks the
// copied data, the burst rules seen by the HyperBus-side memories, that
// a 1-word read burst is never longer than BurstWords, the status, done
// counter and interrupt, and, with stalls off, that an SRAM-to-SRAM copy
// moves one word per cycle once the buffer has filled (paper: one 32-bit
// word per cycle).
module tb_idma;
  import croc_pkg::*;
  logic clk = 0, rst_n = 0;
  obi_req_t cfg_req, xrd_req, xwr_req, hrd_req, hwr_req;
  obi_rsp_t cfg_rsp, xrd_rsp, xwr_rsp, hrd_rsp, hwr_rsp;
  logic busy, irq, stall;
  int acc_a, acc_b, bursts_c, bursts_d, viol_c, viol_d;
  int checks = 0, failures = 0;
  int max_burst = 0, beat_run = 0;

  always #5 clk = ~clk;

  idma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
            .xbar_rd_req_o(xrd_req), .xbar_rd_rsp_i(xrd_rsp),
            .hyper_rd_req_o(hrd_req), .hyper_rd_rsp_i(hrd_rsp),
            .xbar_wr_req_o(xwr_req), .xbar_wr_rsp_i(xwr_rsp),
            .hyper_wr_req_o(hwr_req), .hyper_wr_rsp_i(hwr_rsp),
            .busy_o(busy), .irq_o(irq));

  tb_obi_mem #(.Words(4096)) mem_a (.clk_i(clk), .stall_i(stall), .rst_ni(rst_n), .req_i(xrd_req),
                                    .rsp_o(xrd_rsp), .accepted_o(acc_a));
  tb_obi_mem #(.Words(4096)) mem_b (.clk_i(clk), .stall_i(stall), .rst_ni(rst_n), .req_i(xwr_req),
                                    .rsp_o(xwr_rsp), .accepted_o(acc_b));
  tb_burst_mem #(.Words(4096)) mem_c (.clk_i(clk), .rst_ni(rst_n), .stall_i(stall), .req_i(hrd_req),
                                      .rsp_o(hrd_rsp), .bursts_o(bursts_c), .violations_o(viol_c));
  tb_burst_mem #(.Words(4096)) mem_d (.clk_i(clk), .rst_ni(rst_n), .stall_i(stall), .req_i(hwr_req),
                                      .rsp_o(hwr_rsp), .bursts_o(bursts_d), .violations_o(viol_d));

  always @(posedge clk) if (hrd_req.req && int'(hrd_req.blen) + 1 > max_burst) max_burst <= int'(hrd_req.blen) + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cfg(input logic we, input int off, input data_t wd, output data_t rd);
    @(negedge clk);
    cfg_req = '{req: 1'b1, addr: IdmaBase + addr_t'(off), we: we, be: 4'hF, wdata: wd, blen: '0};
    @(negedge clk);
    cfg_req.req = 1'b0;
    rd = cfg_rsp.rdata;
  endtask

  // copy n words; src/dst choose the memory by their window
  task automatic run_copy(input addr_t src, input addr_t dst, input int n, output int cycles);
    data_t r;
    int t;
    cfg(1, 0, src, r);
    cfg(1, 4, dst, r);
    cfg(1, 8, 4 * n, r);
    cfg(1, 12, 1, r);
    t = 0;
    while (busy) begin @(negedge clk); t++; end
    cycles = t;
    check(irq, "done interrupt");
    cfg(0, 16, 0, r);
    check(r == 32'h4, $sformatf("status done, not busy, no error (%h)", r));
    cfg(1, 16, 4, r);
    check(!irq, "interrupt cleared");
  endtask

  function automatic data_t peek(input addr_t a);
    int i = int'((a >> 2) % 4096);
    if (a >= HyperBase) return mem_c.mem[i];
    return mem_a.mem[i];
  endfunction

  initial begin
    data_t r;
    int cyc, ndone = 0;
    cfg_req = ObiReqIdle;
    stall = 1'b1;
    for (int i = 0; i < 4096; i++) begin
      mem_a.mem[i] = $urandom;
      mem_c.mem[i] = $urandom;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // SRAM -> SRAM (crossbar both sides)
    run_copy(SramBase + 32'h100, SramBase + 32'h800, 37, cyc); ndone++;
    for (int i = 0; i < 37; i++)
      check(mem_b.mem[(32'h800 >> 2) + i] == mem_a.mem[(32'h100 >> 2) + i], "sram->sram data");
    // HyperBus -> SRAM
    run_copy(HyperBase + 32'h40, SramBase + 32'h2000, 100, cyc); ndone++;
    for (int i = 0; i < 100; i++)
      check(mem_b.mem[(32'h2000 >> 2) + i] == mem_c.mem[(32'h40 >> 2) + i], "hyper->sram data");
    // SRAM -> HyperBus
    run_copy(SramBase + 32'h1000, HyperBase + 32'h3000, 64, cyc); ndone++;
    for (int i = 0; i < 64; i++)
      check(mem_d.mem[(32'h3000 >> 2) + i] == mem_a.mem[(32'h1000 >> 2) + i], "sram->hyper data");
    // HyperBus -> HyperBus
    run_copy(HyperBase + 32'h400, HyperBase + 32'h1000, 5, cyc); ndone++;
    for (int i = 0; i < 5; i++)
      check(mem_d.mem[(32'h1000 >> 2) + i] == mem_c.mem[(32'h400 >> 2) + i], "hyper->hyper data");
    check(viol_c == 0 && viol_d == 0, "burst rules kept on the HyperBus ports");
    check(bursts_c == 7 + 1, $sformatf("read bursts %0d, want 8 (100 words -> 7, 5 words -> 1)", bursts_c));
    check(bursts_d == 4 + 1, $sformatf("write bursts %0d, want 5", bursts_d));
    check(max_burst == 16, "bursts are at most 16 words long");
    cfg(0, 20, 0, r);
    check(r == data_t'(ndone), "done counter");
    // throughput, no stalls
    stall = 1'b0;
    run_copy(SramBase + 32'h0, SramBase + 32'h4000, 512, cyc);
    $display("512-word SRAM copy took %0d cycles", cyc);
    check(cyc <= 512 + 24, $sformatf("one word per cycle after the buffer fills (%0d cycles)", cyc));
    for (int i = 0; i < 512; i++)
      check(mem_b.mem[((32'h4000 >> 2) + i) % 4096] == mem_a.mem[i], "throughput copy data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
