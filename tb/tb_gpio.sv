// tb_gpio: checks direction and output registers, set/clear, synchronised
// inputs and the rising-edge interrupt with its enable and clear.
module tb_gpio;
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

  logic [31:0] pins_in, pins_out, pins_oe;
  logic irq;
  gpio dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .gpio_i(pins_in),
            .gpio_o(pins_out), .gpio_oe_o(pins_oe), .irq_o(irq));

  initial begin
    req = ObiReqIdle;
    pins_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(GpioBase + 32'h00, 32'h0000_FFFF);
    check(pins_oe == 32'h0000_FFFF, "direction");
    wr(GpioBase + 32'h04, 32'h0000_1234);
    check(pins_out == 32'h0000_1234, "output");
    wr(GpioBase + 32'h0C, 32'h0000_8001);
    check(pins_out == 32'h0000_9235, "set");
    wr(GpioBase + 32'h10, 32'h0000_0204);
    check(pins_out == 32'h0000_9031, "clear");
    rd_chk(GpioBase + 32'h04, 32'h0000_9031, "output readback");
    pins_in = 32'hA5A5_0000;
    repeat (3) @(negedge clk);
    rd_chk(GpioBase + 32'h08, 32'hA5A5_0000, "input");
    check(!irq, "no interrupt while disabled");
    wr(GpioBase + 32'h14, 32'h0002_0000);
    check(!irq, "edges of pins that are not enabled are ignored");
    pins_in[17] = 1'b1;
    repeat (4) @(negedge clk);
    check(irq, "rising edge on pin 17 raises the interrupt");
    rd_chk(GpioBase + 32'h18, 32'hA5A7_0000, "pending edges");
    wr(GpioBase + 32'h18, 32'h0002_0000);
    check(!irq, "cleared");
    pins_in[17] = 1'b0;
    repeat (4) @(negedge clk);
    check(!irq, "falling edge does not interrupt");
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
