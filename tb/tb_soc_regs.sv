// tb_soc_regs: checks reset values, read/write registers, the read-only
// boot-mode and information words and the outputs they drive.
module tb_soc_regs;
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

  logic [1:0] bootmode;
  addr_t boot_addr;
  logic  fetch;
  data_t status;
  soc_regs dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .bootmode_i(bootmode),
                .boot_addr_o(boot_addr), .fetch_enable_o(fetch), .core_status_o(status));

  initial begin
    req = ObiReqIdle;
    bootmode = 2'd2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_chk(SocRegsBase + 0, 32'h1000_0000, "boot address reset");
    check(boot_addr == 32'h1000_0000 && !fetch, "outputs after reset");
    wr(SocRegsBase + 0, 32'h1000_0400);
    check(boot_addr == 32'h1000_0400, "boot address output");
    wr(SocRegsBase + 4, 1);
    check(fetch, "fetch enable output");
    wr(SocRegsBase + 8, 32'hCAFE_0001);
    check(status == 32'hCAFE_0001, "core status output");
    rd_chk(SocRegsBase + 8, 32'hCAFE_0001, "core status readback");
    rd_chk(SocRegsBase + 12, 2, "boot mode");
    rd_chk(SocRegsBase + 16, {8'd0, 4'd4, 4'd2, 8'd8, 8'd4}, "info word");
    wr(SocRegsBase + 16, 0);
    rd_chk(SocRegsBase + 16, {8'd0, 4'd4, 4'd2, 8'd8, 8'd4}, "info is read-only");
    rd_chk(SocRegsBase + 32, 0, "unmapped offset");
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
