// tb_obi_xbar: three managers issue random reads and writes at the same
// time to three stalling subordinates and to unmapped addresses. Each
// manager owns every third word, so a per-manager reference model predicts
// all read data. Checks data, routing (each subordinate's own memory is
// inspected), error responses for unmapped addresses, the one-cycle
// response timing, and that contending managers are all served.
module tb_obi_xbar;
  import croc_pkg::*;
  localparam int NM = 3, NS = 3, OPS = 300;
  localparam addr_rule_t [NS-1:0] Rules = '{
    '{start_addr: 32'h0000_8000, end_addr: 32'h0000_9000},
    '{start_addr: 32'h0000_2000, end_addr: 32'h0000_3000},
    '{start_addr: 32'h0000_1000, end_addr: 32'h0000_2000}};
  localparam addr_t Bases [NS] = '{32'h1000, 32'h2000, 32'h8000};

  logic clk = 0, rst_n = 0;
  obi_req_t [NM-1:0] mreq;
  obi_rsp_t [NM-1:0] mrsp;
  obi_req_t [NS-1:0] sreq;
  obi_rsp_t [NS-1:0] srsp;
  int acc [NS];
  int checks = 0, failures = 0;
  logic [NM-1:0] gnt_q, rv_q, err_q;
  data_t rd_q [NM];
  int done_cnt = 0;
  int conflicts = 0;

  always #5 clk = ~clk;

  obi_xbar #(.NumMgr(NM), .NumSbr(NS), .Rules(Rules)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mgr_req_i(mreq), .mgr_rsp_o(mrsp),
    .sbr_req_o(sreq), .sbr_rsp_i(srsp));

  for (genvar s = 0; s < NS; s++) begin : gen_s
    tb_obi_mem #(.Words(1024)) i_mem (.clk_i(clk), .stall_i(1'b1), .rst_ni(rst_n), .req_i(sreq[s]),
                                      .rsp_o(srsp[s]), .accepted_o(acc[s]));
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < NM; m++) begin
      gnt_q[m] <= mreq[m].req && mrsp[m].gnt;
      rv_q[m]  <= mrsp[m].rvalid;
      err_q[m] <= mrsp[m].err;
      rd_q[m]  <= mrsp[m].rdata;
    end
    // two managers asking for the same subordinate in the same cycle
    for (int a = 0; a < NM; a++) for (int b = a + 1; b < NM; b++)
      if (mreq[a].req && mreq[b].req && mreq[a].addr[15:12] == mreq[b].addr[15:12]) conflicts <= conflicts + 1;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  for (genvar m = 0; m < NM; m++) begin : gen_m
    data_t refm [NS][64];
    initial begin
      mreq[m] = ObiReqIdle;
      for (int s = 0; s < NS; s++) for (int i = 0; i < 64; i++) refm[s][i] = '0;
      wait (rst_n);
      for (int k = 0; k < OPS; k++) begin
        automatic int s = $urandom_range(0, NS);          // NS means unmapped
        automatic int w = 3 * $urandom_range(0, 63) + m;  // word owned by this manager
        automatic logic we = 1'($urandom);
        automatic data_t wd = $urandom;
        automatic int waited = 0;
        automatic addr_t a = (s == NS) ? 32'h0000_5000 + addr_t'(4 * w) : Bases[s] + addr_t'(4 * w);
        @(negedge clk);
        mreq[m] = '{req: 1'b1, addr: a, we: we, be: 4'hF, wdata: wd, blen: '0};
        do begin @(negedge clk); waited++; end while (!gnt_q[m] && waited < 100);
        mreq[m].req = 1'b0;
        @(negedge clk);
        check(rv_q[m], $sformatf("m%0d response one cycle after grant", m));
        if (s == NS) check(err_q[m], "unmapped address answers with an error");
        else begin
          check(!err_q[m], "mapped address answers without error");
          if (we) refm[s][w / 3] = wd;
          else check(rd_q[m] == refm[s][w / 3],
                     $sformatf("m%0d s%0d w%0d read %h want %h", m, s, w, rd_q[m], refm[s][w / 3]));
        end
      end
      // routing: the subordinate's own memory holds what this manager wrote
      for (int s = 0; s < NS; s++) for (int i = 0; i < 64; i++)
        check(
              ((s == 0) ? gen_s[0].i_mem.mem[(Bases[s] / 4 + 3 * i + m) % 1024] :
               (s == 1) ? gen_s[1].i_mem.mem[(Bases[s] / 4 + 3 * i + m) % 1024] :
                          gen_s[2].i_mem.mem[(Bases[s] / 4 + 3 * i + m) % 1024]) == refm[s][i],
              "subordinate memory content");
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_cnt == NM);
    check(conflicts > 20, $sformatf("contention happened (%0d)", conflicts));
    $display("accepted per subordinate: %0d %0d %0d, conflicts %0d", acc[0], acc[1], acc[2], conflicts);
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
