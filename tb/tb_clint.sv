// tb_clint: checks msip, mtime counting on ticks, mtimecmp and the timer
// interrupt threshold.
module tb_clint;
  import croc_pkg::*;
  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic bus(input logic we, input addr_t a, input data_t wd, output data_t rd);
    @(negedge clk);
    req = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: wd, blen: '0};
    check(rsp.gnt, "grant");
    @(negedge clk);
    req.req = 1'b0;
    check(rsp.rvalid, "response one cycle after the grant");
    rd = rsp.rdata;
  endtask

  task automatic wr(input addr_t a, input data_t wd);
    data_t rd;
    bus(1'b1, a, wd, rd);
  endtask

  task automatic rd_chk(input addr_t a, input data_t exp, input string what);
    data_t rd;
    bus(1'b0, a, '0, rd);
    check(rd == exp, $sformatf("%s: got %h want %h", what, rd, exp));
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  logic tick, tirq, sirq;
  clint dut (.clk_i(clk), .rst_ni(rst_n), .tick_i(tick), .req_i(req), .rsp_o(rsp),
             .timer_irq_o(tirq), .sw_irq_o(sirq));

  initial begin
    data_t t0, t1;
    req = ObiReqIdle;
    tick = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!tirq && !sirq, "no interrupt after reset");
    wr(ClintBase + 32'h0, 1);
    check(sirq, "msip sets the software interrupt");
    rd_chk(ClintBase + 32'h0, 1, "msip readback");
    wr(ClintBase + 32'h0, 0);
    check(!sirq, "msip cleared");
    rd_chk(ClintBase + 32'hBFF8, 0, "mtime frozen without ticks");
    tick = 1;
    bus(1'b0, ClintBase + 32'hBFF8, '0, t0);
    repeat (10) @(negedge clk);
    bus(1'b0, ClintBase + 32'hBFF8, '0, t1);
    check(t1 - t0 == 12, $sformatf("mtime advanced %0d, want 12", t1 - t0));
    tick = 0;
    wr(ClintBase + 32'hBFF8, 32'hFFFF_FFF0);
    wr(ClintBase + 32'hBFFC, 32'h0000_0001);
    rd_chk(ClintBase + 32'hBFFC, 1, "mtime high");
    wr(ClintBase + 32'h4004, 32'h2);
    wr(ClintBase + 32'h4000, 32'h5);
    rd_chk(ClintBase + 32'h4000, 5, "mtimecmp low");
    check(!tirq, "mtime below mtimecmp");
    tick = 1;
    repeat (20) @(negedge clk);
    check(!tirq, "still below after 20 ticks (needs 21)");
    repeat (2) @(negedge clk);
    check(tirq, "interrupt once mtime reaches mtimecmp");
    finish_tb();
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
