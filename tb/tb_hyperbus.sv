// tb_hyperbus: drives the controller's write and read burst ports like the
// iDMA does and attaches a HyperRAM model to chip selects 0 and 1 of each
// PHY and a device that takes writes without initial latency, as HyperFlash
// does, to chip select 2 (SoC clock 100 MHz, PHY clock 200 MHz).
// Checks: data written in bursts of 1..16 words reads back, with byte
// masks; the word split across the two PHYs (PHY 0 holds bits [15:0]);
// chip-select decoding; zero-latency writes to the flash-like device; the command/address word the device decoded; the
// configuration registers; and the sustained read bandwidth of a long
// stream of 16-word bursts against the paper's figure of one 32-bit word
// per 100 MHz cycle (at least 0.8 words per cycle is required here).
module tb_hyperbus;
  import croc_pkg::*;
  localparam int NP = 2, NC = 4, DevBits = 26;

  logic clk = 0, pclk = 0, rst_n = 0;
  obi_req_t cfg_req, rd_req, wr_req;
  obi_rsp_t cfg_rsp, rd_rsp, wr_rsp;
  logic [NP-1:0][NC-1:0] cs_n;
  logic [NP-1:0] ck, ck_n, reset_n, dq_oe, rwds, rwds_oe, rwds_in;
  logic [NP-1:0][7:0] dq, dq_in;
  logic [NP-1:0][2:0][7:0] dev_dq;
  logic [NP-1:0][2:0] dev_dq_oe, dev_rwds, dev_rwds_oe;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #2.5 pclk = ~pclk;

  hyperbus #(.NumPhys(NP), .NumCs(NC), .DevAddrBits(DevBits)) dut (
    .clk_i(clk), .rst_ni(rst_n), .phy_clk_i(pclk),
    .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp), .rd_req_i(rd_req), .rd_rsp_o(rd_rsp),
    .wr_req_i(wr_req), .wr_rsp_o(wr_rsp),
    .hyper_cs_no(cs_n), .hyper_ck_o(ck), .hyper_ck_no(ck_n), .hyper_reset_no(reset_n),
    .hyper_dq_o(dq), .hyper_dq_oe_o(dq_oe), .hyper_dq_i(dq_in),
    .hyper_rwds_o(rwds), .hyper_rwds_oe_o(rwds_oe), .hyper_rwds_i(rwds_in));

  for (genvar p = 0; p < NP; p++) begin : gen_p
    for (genvar c = 0; c < 3; c++) begin : gen_c
      tb_hyperram #(.Words(4096), .NoWriteLatency(c == 2)) i_ram (
        .cs_ni(cs_n[p][c]), .ck_i(ck[p]), .dq_i(dq[p]), .dq_o(dev_dq[p][c]),
        .dq_oe_o(dev_dq_oe[p][c]), .rwds_i(rwds_oe[p] ? rwds[p] : 1'b0),
        .rwds_o(dev_rwds[p][c]), .rwds_oe_o(dev_rwds_oe[p][c]));
    end
    assign dq_in[p]   = dev_dq_oe[p][0] ? dev_dq[p][0] : dev_dq_oe[p][1] ? dev_dq[p][1] :
                        dev_dq_oe[p][2] ? dev_dq[p][2] : 8'h00;
    assign rwds_in[p] = dev_rwds_oe[p][0] ? dev_rwds[p][0] : dev_rwds_oe[p][1] ? dev_rwds[p][1] :
                        dev_rwds_oe[p][2] ? dev_rwds[p][2] : 1'b0;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference memory, by word offset
  data_t ref_mem [int];

  task automatic write_burst(input int woff, input int n, input bit rand_be);
    for (int i = 0; i < n; i++) begin
      automatic data_t d = $urandom;
      automatic strb_t be = rand_be ? 4'($urandom) : 4'hF;
      automatic data_t old = ref_mem.exists(woff + i) ? ref_mem[woff + i] : '0;
      @(negedge clk);
      wr_req = '{req: 1'b1, addr: HyperBase + addr_t'(4 * (woff + i)), we: 1'b1, be: be,
                 wdata: d, blen: 8'(n - 1)};
      #1;
      while (!wr_rsp.gnt) begin @(negedge clk); #1; end
      for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
      ref_mem[woff + i] = old;
    end
    @(negedge clk);
    wr_req.req = 1'b0;
  endtask

  int rd_expect [$];
  int rd_got = 0;
  always @(posedge clk) begin
    if (rst_n && rd_rsp.rvalid) begin
      automatic int w = rd_expect.pop_front();
      automatic data_t exp = ref_mem.exists(w) ? ref_mem[w] : '0;
      rd_got <= rd_got + 1;
      checks++;
      if (rd_rsp.rdata !== exp) begin
        failures++;
        $display("FAIL: read word %0d got %h want %h", w, rd_rsp.rdata, exp);
      end
    end
  end

  task automatic read_burst(input int woff, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      rd_req = '{req: 1'b1, addr: HyperBase + addr_t'(4 * (woff + i)), we: 1'b0, be: 4'hF,
                 wdata: '0, blen: 8'(n - 1)};
      #1;
      while (!rd_rsp.gnt) begin @(negedge clk); #1; end
      rd_expect.push_back(woff + i);
    end
    @(negedge clk);
    rd_req.req = 1'b0;
  endtask

  task automatic cfg(input logic we, input int off, input data_t wd, output data_t rd);
    @(negedge clk);
    cfg_req = '{req: 1'b1, addr: HyperCfgBase + addr_t'(off), we: we, be: 4'hF, wdata: wd, blen: '0};
    @(negedge clk);
    cfg_req.req = 1'b0;
    rd = cfg_rsp.rdata;
  endtask

  initial begin
    data_t r;
    int total, t0, t1, n_expect;
    cfg_req = ObiReqIdle;
    rd_req = ObiReqIdle;
    wr_req = ObiReqIdle;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    cfg(1'b0, 0, '0, r);
    check(r == 6, "latency register reset value");
    cfg(1'b0, 4, '0, r);
    check(r == {24'b0, 4'(NC), 4'(NP)}, "info register");

    // single word, split across the PHYs
    write_burst(5, 1, 0);
    repeat (60) @(negedge clk);
    check(gen_p[0].gen_c[0].i_ram.mem[5] == ref_mem[5][15:0], "PHY 0 holds bits [15:0]");
    check(gen_p[1].gen_c[0].i_ram.mem[5] == ref_mem[5][31:16], "PHY 1 holds bits [31:16]");
    check(gen_p[0].gen_c[0].i_ram.n_writes == 1, "one write transaction");

    // bursts of every length, then with byte masks
    for (int n = 1; n <= 16; n++) write_burst(100 + 20 * n, n, 0);
    for (int n = 1; n <= 16; n++) read_burst(100 + 20 * n, n);
    write_burst(700, 16, 1);
    read_burst(700, 16);
    // second chip select: word offset 2^(DevBits+1-2) / NumPhys ... device 1
    write_burst((1 << (DevBits - 1)) + 3, 4, 0);
    read_burst((1 << (DevBits - 1)) + 3, 4);
    wait (rd_expect.size() == 0);
    repeat (40) @(negedge clk);
    check(gen_p[0].gen_c[1].i_ram.mem[3] == ref_mem[(1 << (DevBits - 1)) + 3][15:0],
          "chip select 1 addressed by the upper offset bits");
    check(gen_p[0].gen_c[1].i_ram.n_writes == 1 && gen_p[1].gen_c[1].i_ram.n_writes == 1,
          "chip select 1 used once on each PHY");
    check(gen_p[0].gen_c[0].i_ram.n_reads == 17, "one read transaction per burst");

    // chip select 2: writes without initial latency (HyperFlash-like device)
    cfg(1'b0, 8, '0, r);
    check(r == 0, "WRNOLAT reset value");
    cfg(1'b1, 8, 32'h4, r);
    cfg(1'b0, 8, '0, r);
    check(r == 32'h4, "WRNOLAT read back");
    repeat (10) @(negedge clk);
    write_burst((1 << DevBits) + 9, 8, 0);
    read_burst((1 << DevBits) + 9, 8);
    wait (rd_expect.size() == 0);
    repeat (40) @(negedge clk);
    for (int i = 0; i < 8; i++)
      check(gen_p[0].gen_c[2].i_ram.mem[9 + i] == ref_mem[(1 << DevBits) + 9 + i][15:0] &&
            gen_p[1].gen_c[2].i_ram.mem[9 + i] == ref_mem[(1 << DevBits) + 9 + i][31:16],
            "zero-latency write lands at the right half-words");
    // chip select 0 keeps its latency
    write_burst(40, 2, 0);
    read_burst(40, 2);
    wait (rd_expect.size() == 0);

    // sustained read bandwidth: 64 bursts of 16 words
    total = 64 * 16;
    for (int i = 0; i < total; i++) if (!ref_mem.exists(2000 + i)) ref_mem[2000 + i] = '0;
    @(negedge clk);
    t0 = $rtoi($time / 10);
    n_expect = rd_got + total;
    for (int b = 0; b < 64; b++) read_burst(2000 + 16 * b, 16);
    wait (rd_got == n_expect);
    t1 = $rtoi($time / 10);
    $display("read %0d words in %0d SoC cycles (%0.2f words/cycle)", total, t1 - t0,
             real'(total) / real'(t1 - t0));
    check(real'(total) / real'(t1 - t0) >= 0.8, "sustained read bandwidth near one word per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
