// tb_bootrom: reads the boot ROM and compares it with the RV32I encodings
// of the loader, assembled by hand from the instruction formats:
// lui x5,0x3000 / lw x6,0(x5) / jalr x0,0(x6) / jal x0,0.
module tb_bootrom;
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

  bootrom dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  function automatic data_t enc_u(input int rd, input int imm20, input int op);
    return data_t'((imm20 << 12) | (rd << 7) | op);
  endfunction
  function automatic data_t enc_i(input int rd, input int f3, input int rs1, input int imm, input int op);
    return data_t'((imm << 20) | (rs1 << 15) | (f3 << 12) | (rd << 7) | op);
  endfunction

  initial begin
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_chk(BootromBase + 0,  enc_u(5, 32'h03000, 7'h37), "lui");
    rd_chk(BootromBase + 4,  enc_i(6, 2, 5, 0, 7'h03), "lw");
    rd_chk(BootromBase + 8,  enc_i(0, 0, 6, 0, 7'h67), "jalr");
    rd_chk(BootromBase + 12, 32'h0000_006F, "jal");
    rd_chk(BootromBase + 16, 32'h0, "past the program");
    wr(BootromBase + 0, 32'hDEAD_BEEF);
    rd_chk(BootromBase + 0,  enc_u(5, 32'h03000, 7'h37), "write ignored");
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
