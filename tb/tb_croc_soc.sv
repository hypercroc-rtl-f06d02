// tb_croc_soc: end-to-end test of the whole SoC at its default parameters
// (four 8 KiB SRAM banks, two HyperBus PHYs with four chip selects each).
//
// The testbench plays the parts that are outside the RTL: the core's
// instruction and data ports, the debug module's manager port and the user
// domain (a manager port and a memory behind the subordinate window). A
// HyperRAM model sits on chip select 0 of each PHY. SoC clock 100 MHz,
// HyperBus PHY clock 200 MHz.
//
// The test: boot ROM fetch and boot address; software writes a block into
// SRAM bank 0; the iDMA copies it to external memory (split over both PHYs)
// and back into bank 2 while the core keeps using the crossbar; the iDMA
// copies into the user domain and the user-domain manager reads SRAM;
// the iDMA moves a block from external memory into the user domain and back
// (an accelerator's dataset ingress and egress); the
// peripherals (UART, GPIO, timer, CLINT) raise their outputs and
// interrupts; unmapped and HyperBus-window accesses from the core answer
// with errors. It measures the iDMA's bandwidth from HyperBus to SRAM and
// from SRAM to SRAM against the paper's one 32-bit word per cycle, and
// counts each mechanism (crossbar contention, HyperBus read and write
// bursts on both PHYs, error responses, each interrupt); one that never
// happened counts as a failure.
module tb_croc_soc;
  import croc_pkg::*;
  localparam int NP = 2, NC = 4;
  localparam int NMgr = 4;  // 0 core data, 1 user, 2 debug, 3 core instr

  logic clk = 0, pclk = 0, rst_n = 0;
  obi_req_t mreq [NMgr];
  obi_rsp_t mrsp [NMgr];
  obi_req_t dbg_sbr_req, user_sbr_req;
  obi_rsp_t dbg_sbr_rsp, user_sbr_rsp;
  addr_t boot_addr;
  logic fetch_en, irq_timer, irq_sw;
  data_t core_status;
  logic [14:0] irq_fast;
  logic [7:0] user_irqs;
  logic uart_rx, uart_tx;
  logic [31:0] gpio_in, gpio_out, gpio_oe;
  logic [NP-1:0][NC-1:0] cs_n;
  logic [NP-1:0] ck, ck_n, reset_n, dq_oe, rwds, rwds_oe, rwds_in;
  logic [NP-1:0][7:0] dq, dq_in, dev_dq;
  logic [NP-1:0] dev_dq_oe, dev_rwds, dev_rwds_oe;
  int user_acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #2.5 pclk = ~pclk;

  croc_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .rtc_tick_i(1'b1), .phy_clk_i(pclk), .bootmode_i(2'd1),
    .core_instr_req_i(mreq[3]), .core_instr_rsp_o(mrsp[3]),
    .core_data_req_i(mreq[0]), .core_data_rsp_o(mrsp[0]),
    .core_boot_addr_o(boot_addr), .core_fetch_en_o(fetch_en), .core_status_o(core_status),
    .core_irq_timer_o(irq_timer), .core_irq_sw_o(irq_sw), .core_irq_fast_o(irq_fast),
    .dbg_mgr_req_i(mreq[2]), .dbg_mgr_rsp_o(mrsp[2]),
    .dbg_sbr_req_o(dbg_sbr_req), .dbg_sbr_rsp_i(dbg_sbr_rsp),
    .user_mgr_req_i(mreq[1]), .user_mgr_rsp_o(mrsp[1]),
    .user_sbr_req_o(user_sbr_req), .user_sbr_rsp_i(user_sbr_rsp), .user_irqs_i(user_irqs),
    .uart_rx_i(uart_rx), .uart_tx_o(uart_tx),
    .gpio_i(gpio_in), .gpio_o(gpio_out), .gpio_oe_o(gpio_oe),
    .hyper_cs_no(cs_n), .hyper_ck_o(ck), .hyper_ck_no(ck_n), .hyper_reset_no(reset_n),
    .hyper_dq_o(dq), .hyper_dq_oe_o(dq_oe), .hyper_dq_i(dq_in),
    .hyper_rwds_o(rwds), .hyper_rwds_oe_o(rwds_oe), .hyper_rwds_i(rwds_in));

  // user-domain memory and a debug-window memory
  tb_obi_mem #(.Words(1024)) user_mem (.clk_i(clk), .stall_i(1'b0), .rst_ni(rst_n),
                                       .req_i(user_sbr_req), .rsp_o(user_sbr_rsp),
                                       .accepted_o(user_acc));
  int dbg_acc;
  tb_obi_mem #(.Words(64)) dbg_mem (.clk_i(clk), .stall_i(1'b0), .rst_ni(rst_n),
                                    .req_i(dbg_sbr_req), .rsp_o(dbg_sbr_rsp), .accepted_o(dbg_acc));

  for (genvar p = 0; p < NP; p++) begin : gen_p
    tb_hyperram #(.Words(8192)) i_ram (
      .cs_ni(cs_n[p][0]), .ck_i(ck[p]), .dq_i(dq[p]), .dq_o(dev_dq[p]),
      .dq_oe_o(dev_dq_oe[p]), .rwds_i(rwds_oe[p] ? rwds[p] : 1'b0),
      .rwds_o(dev_rwds[p]), .rwds_oe_o(dev_rwds_oe[p]));
    assign dq_in[p]   = dev_dq_oe[p] ? dev_dq[p] : 8'h00;
    assign rwds_in[p] = dev_rwds_oe[p] ? dev_rwds[p] : 1'b0;
  end

  // ---------------- mechanism counters ----------------
  int n_contention = 0, n_err = 0, n_hb_rd_burst = 0, n_hb_wr_burst = 0;
  int n_idma_irq = 0, n_timer_irq = 0, n_clint_irq = 0, n_uart_irq = 0, n_gpio_irq = 0;
  logic [14:0] irq_fast_q;
  logic irq_timer_q;
  always @(posedge clk) begin
    if (rst_n) begin
      // a manager waiting on the crossbar because another one is served
      // (the SRAM banks always grant, so a missing grant is arbitration)
      for (int m = 0; m < 6; m++)
        if (dut.mgr_req[m].req && !dut.mgr_rsp[m].gnt) n_contention++;
      for (int m = 0; m < NMgr; m++) if (mrsp[m].rvalid && mrsp[m].err) n_err++;
      if (dut.hyper_rd_req.req && dut.hyper_rd_rsp.gnt && dut.i_hyperbus.rd_first) n_hb_rd_burst++;
      if (dut.hyper_wr_req.req && dut.hyper_wr_rsp.gnt && dut.i_hyperbus.wr_first) n_hb_wr_burst++;
      irq_fast_q <= irq_fast;
      irq_timer_q <= irq_timer;
      if (irq_fast[3] && !irq_fast_q[3]) n_idma_irq++;
      if (irq_fast[2] && !irq_fast_q[2]) n_timer_irq++;
      if (irq_fast[0] && !irq_fast_q[0]) n_uart_irq++;
      if (irq_fast[1] && !irq_fast_q[1]) n_gpio_irq++;
      if (irq_timer && !irq_timer_q) n_clint_irq++;
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one OBI access on manager port m; waits for grant and response
  task automatic bus(input int m, input logic we, input addr_t a, input data_t wd,
                     output data_t rd, output logic err);
    int t = 0;
    @(negedge clk);
    mreq[m] = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: wd, blen: '0};
    #1;
    while (!mrsp[m].gnt && t < 1000) begin @(negedge clk); #1; t++; end
    @(posedge clk);
    @(negedge clk);
    mreq[m].req = 1'b0;
    check(mrsp[m].rvalid, "response one cycle after the grant");
    rd = mrsp[m].rdata;
    err = mrsp[m].err;
  endtask

  task automatic wr(input int m, input addr_t a, input data_t wd);
    data_t rd;
    logic e;
    bus(m, 1'b1, a, wd, rd, e);
    check(!e, $sformatf("write %h without error", a));
  endtask

  task automatic rd(input int m, input addr_t a, output data_t d);
    logic e;
    bus(m, 1'b0, a, '0, d, e);
    check(!e, $sformatf("read %h without error", a));
  endtask

  task automatic rd_chk(input int m, input addr_t a, input data_t exp, input string what);
    data_t d;
    rd(m, a, d);
    check(d == exp, $sformatf("%s: %h read %h want %h", what, a, d, exp));
  endtask

  // iDMA transfer programmed by the core; returns cycles from start to irq
  task automatic dma(input addr_t src, input addr_t dst, input int words, output int cycles);
    data_t d;
    int t = 0;
    wr(0, IdmaBase + 0, src);
    wr(0, IdmaBase + 4, dst);
    wr(0, IdmaBase + 8, 4 * words);
    wr(0, IdmaBase + 12, 1);
    while (!irq_fast[3] && t < 100000) begin @(negedge clk); t++; end
    cycles = t;
    check(irq_fast[3], "iDMA done interrupt");
    rd(0, IdmaBase + 16, d);
    check(d == 32'h4, $sformatf("iDMA status %h", d));
    wr(0, IdmaBase + 16, 4);
  endtask

  data_t pattern [512];

  initial begin
    data_t d;
    logic e;
    int cyc, n;
    for (int m = 0; m < NMgr; m++) mreq[m] = ObiReqIdle;
    uart_rx = 1'b1;
    gpio_in = '0;
    user_irqs = '0;
    for (int i = 0; i < 512; i++) pattern[i] = $urandom;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);

    // ---- boot ----
    check(boot_addr == SramBase && !fetch_en, "boot address and fetch enable after reset");
    rd_chk(3, BootromBase, 32'h0300_02B7, "boot ROM first instruction");
    rd_chk(0, SocRegsBase + 16, {8'd0, 4'd4, 4'd2, 8'd8, 8'd4}, "SoC info word");
    rd_chk(0, SocRegsBase + 12, 1, "boot mode pins");
    wr(2, SocRegsBase + 4, 1);                 // debug module starts the core
    check(fetch_en, "fetch enable from the debug port");
    wr(0, DebugBase + 32'h10, 32'h1234);       // core reaches the debug window
    check(dbg_acc == 1, "debug window forwarded");

    // ---- software fills SRAM bank 0 ----
    for (int i = 0; i < 512; i++) wr(0, SramBase + addr_t'(4 * i), pattern[i]);
    rd_chk(0, SramBase + 4 * 77, pattern[77], "SRAM bank 0");

    // ---- SRAM -> HyperBus ----
    dma(SramBase, HyperBase + 32'h100, 512, cyc);
    $display("SRAM -> HyperBus, 512 words: %0d cycles", cyc);
    repeat (100) @(negedge clk);
    check(gen_p[0].i_ram.mem[32'h100 / 4 + 5] == pattern[5][15:0], "PHY 0 holds bits [15:0]");
    check(gen_p[1].i_ram.mem[32'h100 / 4 + 5] == pattern[5][31:16], "PHY 1 holds bits [31:16]");
    check(gen_p[0].i_ram.n_writes == 32 && gen_p[1].i_ram.n_writes == 32,
          "32 write bursts of 16 words on each PHY");

    // ---- HyperBus -> SRAM bank 2 ----
    dma(HyperBase + 32'h100, SramBase + 32'h4000, 512, cyc);
    $display("HyperBus -> SRAM, 512 words: %0d cycles (%0.2f words/cycle)", cyc, 512.0 / real'(cyc));
    check(512.0 / real'(cyc) >= 0.75, "HyperBus to SRAM close to one word per cycle");
    for (int i = 0; i < 512; i += 7) rd_chk(0, SramBase + 32'h4000 + addr_t'(4 * i), pattern[i], "copy back");
    rd_chk(0, SramBase + 32'h4000 + 4 * 511, pattern[511], "copy back, last word");
    check(gen_p[0].i_ram.n_reads == 32, "32 read bursts");

    // ---- SRAM -> SRAM throughput ----
    dma(SramBase, SramBase + 32'h2000, 512, cyc);
    $display("SRAM -> SRAM, 512 words: %0d cycles", cyc);
    check(cyc <= 512 + 30, "SRAM to SRAM one word per cycle");
    rd_chk(0, SramBase + 32'h2000 + 4 * 300, pattern[300], "SRAM copy");

    // ---- contended copy: the user-domain manager writes bank 3 meanwhile ----
    fork
      dma(SramBase, SramBase + 32'h6000, 256, cyc);
      begin
        repeat (20) @(negedge clk);
        for (int i = 0; i < 100; i++) wr(1, SramBase + 32'h7F00 + addr_t'(4 * (i % 64)), i);
      end
    join
    $display("SRAM -> SRAM with contention, 256 words: %0d cycles", cyc);
    rd_chk(0, SramBase + 32'h6000 + 4 * 255, pattern[255], "contended copy");
    rd_chk(0, SramBase + 32'h7F00 + 4 * 35, 99, "user-domain writes");

    // ---- iDMA into the user domain; user manager reads SRAM ----
    dma(SramBase + 32'h40, UserBase + 32'h80, 32, cyc);
    check(user_mem.mem[32'h80 / 4 + 3] == pattern[16 + 3], "iDMA wrote the user domain");
    rd_chk(1, SramBase + 4 * 200, pattern[200], "user-domain manager reads SRAM");
    rd_chk(0, UserBase + 32'h80 + 4, pattern[17], "core reads the user domain");
    // ---- accelerator dataset path: HyperBus -> user domain -> HyperBus ----
    dma(HyperBase + 32'h100 + 4 * 64, UserBase + 32'h400, 64, cyc);
    for (int i = 0; i < 64; i += 9)
      check(user_mem.mem[32'h400 / 4 + i] == pattern[64 + i], "HyperBus to user domain");
    dma(UserBase + 32'h400, HyperBase + 32'h4000, 64, cyc);
    repeat (100) @(negedge clk);
    for (int i = 0; i < 64; i += 9)
      check(gen_p[0].i_ram.mem[32'h4000 / 4 + i] == pattern[64 + i][15:0] &&
            gen_p[1].i_ram.mem[32'h4000 / 4 + i] == pattern[64 + i][31:16],
            "user domain to HyperBus");
    user_irqs = 8'h05;
    @(negedge clk);
    check(irq_fast[11:4] == 8'h05, "user interrupts forwarded");

    // ---- HyperBus configuration ----
    rd_chk(0, HyperCfgBase + 0, 6, "HyperBus latency register");
    rd_chk(0, HyperCfgBase + 4, {24'b0, 4'd4, 4'd2}, "HyperBus info register");

    // ---- errors ----
    bus(0, 1'b0, HyperBase, '0, d, e);
    check(e, "HyperBus window is not on the crossbar");
    bus(0, 1'b0, 32'h0400_0000, '0, d, e);
    check(e, "unmapped peripheral address");

    // ---- peripherals ----
    wr(0, GpioBase + 0, 32'hFF);
    wr(0, GpioBase + 4, 32'h5A);
    check(gpio_out[7:0] == 8'h5A && gpio_oe == 32'hFF, "GPIO outputs");
    wr(0, GpioBase + 32'h14, 32'h100);
    gpio_in[8] = 1'b1;
    repeat (4) @(negedge clk);
    check(irq_fast[1], "GPIO interrupt");
    wr(0, TimerBase + 4, 20);
    wr(0, TimerBase + 8, 1);
    repeat (30) @(negedge clk);
    check(irq_fast[2], "timer interrupt");
    rd(0, ClintBase + 32'hBFF8, d);
    wr(0, ClintBase + 32'h4004, 0);
    wr(0, ClintBase + 32'h4000, d + 50);
    check(!irq_timer, "CLINT timer not yet");
    repeat (60) @(negedge clk);
    check(irq_timer, "CLINT timer interrupt");
    wr(0, ClintBase, 1);
    check(irq_sw, "CLINT software interrupt");
    // UART: send 0xA7 and decode it from the pin, then receive a byte
    wr(0, UartBase + 8, 16);
    wr(0, UartBase + 0, 32'hA7);
    n = 0;
    while (uart_tx && n < 100) begin @(negedge clk); n++; end
    repeat (8) @(negedge clk);
    begin
      logic [7:0] b;
      for (int i = 0; i < 8; i++) begin repeat (16) @(negedge clk); b[i] = uart_tx; end
      check(b == 8'hA7, $sformatf("UART sent %h", b));
    end
    begin
      logic [9:0] f = {1'b1, 8'h3C, 1'b0};
      for (int i = 0; i < 10; i++) begin uart_rx = f[i]; repeat (16) @(negedge clk); end
    end
    repeat (4) @(negedge clk);
    check(irq_fast[0], "UART receive interrupt");
    rd_chk(0, UartBase, 32'h3C, "UART received byte");

    // ---- mechanisms ----
    $display("contention %0d, errors %0d, HyperBus read bursts %0d, write bursts %0d",
             n_contention, n_err, n_hb_rd_burst, n_hb_wr_burst);
    $display("interrupts: idma %0d timer %0d clint %0d uart %0d gpio %0d",
             n_idma_irq, n_timer_irq, n_clint_irq, n_uart_irq, n_gpio_irq);
    check(n_contention > 0, "crossbar contention happened");
    check(n_err == 2, "two error responses");
    check(n_hb_rd_burst == 36 && n_hb_wr_burst == 36, "HyperBus bursts counted on the ports");
    check(n_idma_irq == 7, "seven iDMA completions");
    check(n_timer_irq > 0 && n_clint_irq > 0 && n_uart_irq > 0 && n_gpio_irq > 0,
          "every peripheral interrupt happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
