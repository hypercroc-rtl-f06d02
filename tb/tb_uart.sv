// tb_uart: sends bytes through the transmitter with a short bit period,
// decodes the line in the testbench and checks the bit timing; feeds bytes
// generated by the testbench into the receiver and checks data, the
// interrupt and the overrun flag.
module tb_uart;
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

  localparam int Div = 16;
  logic rx, tx, irq;
  uart #(.DivReset(868)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
                              .rx_i(rx), .tx_o(tx), .irq_o(irq));

  task automatic send_line(input logic [7:0] b);
    logic [9:0] frame = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = frame[i];
      repeat (Div) @(negedge clk);
    end
  endtask

  initial begin
    logic [7:0] got;
    int t_start, t_end;
    req = ObiReqIdle;
    rx = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_chk(UartBase + 8, 868, "divider reset value");
    wr(UartBase + 8, Div);
    for (int k = 0; k < 4; k++) begin
      automatic logic [7:0] b = 8'($urandom);
      wr(UartBase + 0, {24'b0, b});
      rd_chk(UartBase + 4, 1, "tx busy");
      // decode the frame from the line
      t_start = 0;
      while (tx) begin @(negedge clk); t_start++; end
      check(t_start <= 2, "start bit follows the write");
      repeat (Div / 2) @(negedge clk);
      check(!tx, "start bit still low in its middle");
      for (int i = 0; i < 8; i++) begin
        repeat (Div) @(negedge clk);
        got[i] = tx;
      end
      repeat (Div) @(negedge clk);
      check(tx, "stop bit");
      check(got == b, $sformatf("tx byte %h want %h", got, b));
      t_end = 0;
      while (dut.tx_busy) begin @(negedge clk); t_end++; end
      check(t_end <= Div / 2 + 1, "frame is 10 bit periods long");
    end
    for (int k = 0; k < 3; k++) begin
      automatic logic [7:0] b = 8'($urandom);
      send_line(b);
      repeat (4) @(negedge clk);
      check(irq, "rx interrupt");
      rd_chk(UartBase + 4, 2, "rx valid, no overrun");
      rd_chk(UartBase + 0, {24'b0, b}, "rx byte");
      check(!irq, "rx interrupt cleared by reading");
    end
    send_line(8'h11);
    send_line(8'h22);
    repeat (4) @(negedge clk);
    rd_chk(UartBase + 4, 6, "overrun flagged");
    rd_chk(UartBase + 0, 32'h22, "newest byte kept");
    finish_tb();
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
