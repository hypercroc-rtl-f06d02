// tb_cdc_fifo: pushes a random stream from a 10 ns clock domain into a
// 5 ns clock domain and another stream back, with random valid and ready,
// and checks that every word arrives once, in order; also checks that the
// source sees the FIFO full after Depth words when the destination stops
// reading.
module tb_cdc_fifo;
  localparam int W = 20, D = 8, N = 500;
  logic sclk = 0, dclk = 0, rst_n = 0;
  logic s_valid, s_ready, d_valid, d_ready;
  logic [W-1:0] s_data, d_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int sent = 0, recvd = 0;
  bit stop_rd = 0;

  always #5 sclk = ~sclk;
  always #2.5 dclk = ~dclk;

  cdc_fifo #(.Width(W), .Depth(D)) dut (
    .src_clk_i(sclk), .src_rst_ni(rst_n), .src_valid_i(s_valid), .src_ready_o(s_ready),
    .src_data_i(s_data),
    .dst_clk_i(dclk), .dst_rst_ni(rst_n), .dst_valid_o(d_valid), .dst_ready_i(d_ready),
    .dst_data_o(d_data));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // source
  always @(posedge sclk) begin
    if (rst_n) begin
      if (s_valid && s_ready) begin
        q.push_back(s_data);
        sent++;
      end
    end
  end
  always @(negedge sclk) begin
    if (rst_n && sent < N && !(s_valid && !s_ready)) begin
      s_valid <= 1'($urandom_range(0, 3) != 0);
      s_data  <= W'($urandom);
    end
    if (sent >= N) s_valid <= 1'b0;
  end

  // destination
  always @(posedge dclk) begin
    if (rst_n && d_valid && d_ready) begin
      check(q.size() > 0 && d_data == q[0], "word arrives in order");
      if (q.size() > 0) void'(q.pop_front());
      recvd++;
    end
  end
  always @(negedge dclk) d_ready <= !stop_rd && 1'($urandom_range(0, 2) != 0);

  initial begin
    s_valid = 0;
    s_data = '0;
    d_ready = 0;
    repeat (3) @(negedge sclk);
    rst_n = 1;
    wait (recvd == N);
    check(q.size() == 0, "nothing left over");
    // fill test
    stop_rd = 1;
    repeat (5) @(negedge sclk);
    begin
      int pushed = 0;
      for (int i = 0; i < 2 * D; i++) begin
        @(negedge sclk);
        if (s_ready) begin
          force s_valid = 1'b1;
          pushed++;
        end
      end
      release s_valid;
    end
    @(negedge sclk);
    check(!s_ready, "full after Depth words");
    check(sent == N + D, $sformatf("accepted exactly Depth words (%0d)", sent - N));
    stop_rd = 0;
    wait (recvd == N + D);
    check(q.size() == 0, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge sclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
