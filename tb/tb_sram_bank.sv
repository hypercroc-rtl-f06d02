// tb_sram_bank: self-checking test of one SRAM bank.
// Writes a pattern over a reduced bank with random byte enables, keeps a
// reference copy, and reads every word back; checks that the bank always
// grants and that every response comes exactly one cycle after its request.
module tb_sram_bank;
  import croc_pkg::*;
  localparam int unsigned N = 256;
  logic clk = 0, rst_n = 0;
  obi_req_t req;
  obi_rsp_t rsp;
  int checks = 0, failures = 0;
  data_t ref_mem [N];

  sram_bank #(.NumWords(N)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic access(input logic we, input int idx, input strb_t be, input data_t wd,
                        output data_t rd);
    @(negedge clk);
    req = '{req: 1'b1, addr: SramBase + addr_t'(idx * 4), we: we, be: be, wdata: wd, blen: '0};
    check(rsp.gnt == 1'b1, "bank must grant at once");
    @(negedge clk);
    req.req = 1'b0;
    check(rsp.rvalid == 1'b1, "rvalid one cycle after the grant");
    rd = rsp.rdata;
    @(negedge clk);
    check(rsp.rvalid == 1'b0, "rvalid only for one cycle");
  endtask

  initial begin
    data_t rd, wd;
    strb_t be;
    req = ObiReqIdle;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      wd = $urandom;
      access(1'b1, i, 4'hF, wd, rd);
      ref_mem[i] = wd;
    end
    for (int k = 0; k < 200; k++) begin
      automatic int i = $urandom_range(0, N - 1);
      wd = $urandom;
      be = 4'($urandom);
      access(1'b1, i, be, wd, rd);
      for (int b = 0; b < 4; b++) if (be[b]) ref_mem[i][8*b +: 8] = wd[8*b +: 8];
    end
    for (int i = 0; i < N; i++) begin
      access(1'b0, i, 4'hF, '0, rd);
      check(rd == ref_mem[i], $sformatf("word %0d: got %h want %h", i, rd, ref_mem[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
