// tb_obi_demux: one manager issues random reads and writes to three
// stalling subordinates and to unmapped addresses; a reference model
// predicts the read data. Checks routing, error responses, that the grant
// follows the addressed subordinate and the one-cycle response.
module tb_obi_demux;
  import croc_pkg::*;
  localparam int NS = 3, OPS = 400;
  localparam addr_rule_t [NS-1:0] Rules = '{
    '{start_addr: 32'h0300_A000, end_addr: 32'h0300_B000},
    '{start_addr: 32'h0300_2000, end_addr: 32'h0300_3000},
    '{start_addr: 32'h0200_0000, end_addr: 32'h0200_4000}};
  localparam addr_t Bases [NS] = '{32'h0200_0000, 32'h0300_2000, 32'h0300_A000};

  logic clk = 0, rst_n = 0;
  obi_req_t mreq;
  obi_rsp_t mrsp;
  obi_req_t [NS-1:0] sreq;
  obi_rsp_t [NS-1:0] srsp;
  int acc [NS];
  int checks = 0, failures = 0;
  logic gnt_q, rv_q, err_q;
  data_t rd_q;
  data_t refm [NS][128];

  always #5 clk = ~clk;

  obi_demux #(.NumSbr(NS), .Rules(Rules)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mgr_req_i(mreq), .mgr_rsp_o(mrsp),
    .sbr_req_o(sreq), .sbr_rsp_i(srsp));

  for (genvar s = 0; s < NS; s++) begin : gen_s
    tb_obi_mem #(.Words(128)) i_mem (.clk_i(clk), .stall_i(1'b1), .rst_ni(rst_n), .req_i(sreq[s]),
                                     .rsp_o(srsp[s]), .accepted_o(acc[s]));
  end

  always_ff @(posedge clk) begin
    gnt_q <= mreq.req && mrsp.gnt;
    rv_q  <= mrsp.rvalid;
    err_q <= mrsp.err;
    rd_q  <= mrsp.rdata;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int n_err = 0;
    mreq = ObiReqIdle;
    for (int s = 0; s < NS; s++) for (int i = 0; i < 128; i++) refm[s][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < OPS; k++) begin
      automatic int s = $urandom_range(0, NS);
      automatic int w = $urandom_range(0, 127);
      automatic logic we = 1'($urandom);
      automatic data_t wd = $urandom;
      automatic int waited = 0;
      automatic addr_t a = (s == NS) ? 32'h0300_5000 + addr_t'(4 * w) : Bases[s] + addr_t'(4 * w);
      @(negedge clk);
      mreq = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: wd, blen: '0};
      #1;
      if (s < NS) check(mrsp.gnt == srsp[s].gnt, "grant comes from the addressed subordinate");
      do begin @(negedge clk); waited++; end while (!gnt_q && waited < 100);
      mreq.req = 1'b0;
      @(negedge clk);
      check(rv_q, "response one cycle after grant");
      if (s == NS) begin
        check(err_q, "unmapped address answers with an error");
        n_err++;
      end else begin
        check(!err_q, "no error");
        if (we) refm[s][w] = wd;
        else check(rd_q == refm[s][w], $sformatf("s%0d w%0d read %h want %h", s, w, rd_q, refm[s][w]));
      end
    end
    for (int i = 0; i < 128; i++) begin
      check(gen_s[0].i_mem.mem[(Bases[0] / 4 + i) % 128] == refm[0][i], "memory 0 content");
      check(gen_s[1].i_mem.mem[(Bases[1] / 4 + i) % 128] == refm[1][i], "memory 1 content");
      check(gen_s[2].i_mem.mem[(Bases[2] / 4 + i) % 128] == refm[2][i], "memory 2 content");
    end
    check(n_err > 0, "unmapped accesses were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
