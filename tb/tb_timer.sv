// tb_timer: checks counting with and without prescaler, the compare match
// interrupt, clear-on-match and the write-one-to-clear status.
module tb_timer;
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

  logic irq;
  timer dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .irq_o(irq));

  initial begin
    data_t c0, c1;
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_chk(TimerBase + 0, 0, "count reset");
    wr(TimerBase + 8, 1);                       // enable, prescaler 0
    bus(1'b0, TimerBase + 0, '0, c0);
    repeat (8) @(negedge clk);
    bus(1'b0, TimerBase + 0, '0, c1);
    check(c1 - c0 == 10, $sformatf("counted %0d in 10 cycles", c1 - c0));
    wr(TimerBase + 8, 0);
    wr(TimerBase + 0, 0);
    wr(TimerBase + 12, 3);                      // advance every 4 cycles
    wr(TimerBase + 4, 5);
    wr(TimerBase + 8, 3);                       // enable + clear on match
    // match when count==5 is seen at an advance: 6 advances = 24 cycles
    repeat (20) @(negedge clk);
    check(!irq, "no match before 6 advances");
    repeat (6) @(negedge clk);
    check(irq, "match interrupt");
    rd_chk(TimerBase + 16, 1, "status pending");
    wr(TimerBase + 16, 1);
    check(!irq, "status cleared");
    bus(1'b0, TimerBase + 0, '0, c0);
    check(c0 < 5, $sformatf("counter restarted after the match (%0d)", c0));
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
