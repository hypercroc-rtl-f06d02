// tb_hyperbus_phy: drives the PHY's controller side cycle by cycle (one
// HyperBus write and one read of four half-words) with a HyperRAM model on
// the pads. Checks that the device decodes the command/address word and
// stores the data with the byte mask applied, that the read returns the
// half-words in order through rx_valid/rx_data, that CK only toggles while
// enabled and that CK# is its complement.
module tb_hyperbus_phy;
  logic clk = 0, rst_n = 0;
  logic [3:0] cs;
  logic ck_en, dq_oe, rwds_oe, rx_valid;
  logic [15:0] tx, rx;
  logic [1:0] txm;
  logic [3:0] cs_n;
  logic ck, ck_n, reset_n, dq_oe_p, rwds_p, rwds_oe_p;
  logic [7:0] dq_p, dev_dq;
  logic dev_dq_oe, dev_rwds, dev_rwds_oe;
  int checks = 0, failures = 0;
  int ck_edges = 0;
  logic [15:0] rx_seen [$];

  always #2.5 clk = ~clk;

  hyperbus_phy #(.NumCs(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cs_i(cs), .ck_en_i(ck_en), .dq_oe_i(dq_oe), .tx_data_i(tx),
    .rwds_oe_i(rwds_oe), .tx_rwds_i(txm), .rx_valid_o(rx_valid), .rx_data_o(rx),
    .hyper_cs_no(cs_n), .hyper_ck_o(ck), .hyper_ck_no(ck_n), .hyper_reset_no(reset_n),
    .hyper_dq_o(dq_p), .hyper_dq_oe_o(dq_oe_p), .hyper_dq_i(dev_dq_oe ? dev_dq : 8'h00),
    .hyper_rwds_o(rwds_p), .hyper_rwds_oe_o(rwds_oe_p),
    .hyper_rwds_i(dev_rwds_oe ? dev_rwds : 1'b0));

  tb_hyperram #(.Words(256), .Latency(6)) dev (
    .cs_ni(cs_n[2]), .ck_i(ck), .dq_i(dq_p), .dq_o(dev_dq), .dq_oe_o(dev_dq_oe),
    .rwds_i(rwds_oe_p ? rwds_p : 1'b0), .rwds_o(dev_rwds), .rwds_oe_o(dev_rwds_oe));

  always @(posedge ck) ck_edges++;
  always @(posedge clk) if (rst_n && rx_valid) rx_seen.push_back(rx);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cyc(input logic [15:0] d, input logic oe, input logic roe, input logic [1:0] m);
    tx = d; dq_oe = oe; rwds_oe = roe; txm = m;
    @(posedge clk); #0.1;
  endtask

  // CA word: read flag, memory space, linear burst, half-word address
  function automatic logic [47:0] ca_word(input logic rd, input logic [31:0] hw);
    return {rd, 1'b0, 1'b1, hw[31:3], 13'b0, hw[2:0]};
  endfunction

  initial begin
    logic [47:0] ca;
    int e0;
    cs = '0; ck_en = 0; dq_oe = 0; rwds_oe = 0; tx = '0; txm = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #0.1;
    check(ck_edges == 0 && cs_n == 4'hF, "idle: no clock, no chip select");
    check(ck_n == ~ck && reset_n, "CK# and reset");
    // write 4 half-words at half-word address 0x13, second byte of word 1 masked
    ca = ca_word(1'b0, 32'h13);
    cs = 4'b0100; ck_en = 1;
    cyc(ca[47:32], 1, 0, 0);
    cyc(ca[31:16], 1, 0, 0);
    cyc(ca[15:0], 1, 0, 0);
    repeat (12) cyc(16'h0, 0, 0, 0);
    cyc(16'hA1B2, 1, 1, 2'b00);
    cyc(16'hC3D4, 1, 1, 2'b01);
    cyc(16'hE5F6, 1, 1, 2'b00);
    cyc(16'h0718, 1, 1, 2'b00);
    ck_en = 0; dq_oe = 0; rwds_oe = 0;
    cyc(16'h0, 0, 0, 0);
    cs = '0;
    repeat (4) cyc(16'h0, 0, 0, 0);
    check(ck_edges == 3 + 12 + 4, $sformatf("CK ran for %0d cycles, want 19", ck_edges));
    check(dev.n_writes == 1, "one write seen by the device");
    check(dev.mem[8'h13] == 16'hA1B2, "half-word 0");
    check(dev.mem[8'h14] == 16'hC300, "half-word 1, low byte masked");
    check(dev.mem[8'h15] == 16'hE5F6, "half-word 2");
    check(dev.mem[8'h16] == 16'h0718, "half-word 3");
    // read them back
    ca = ca_word(1'b1, 32'h13);
    cs = 4'b0100; ck_en = 1;
    cyc(ca[47:32], 1, 0, 0);
    cyc(ca[31:16], 1, 0, 0);
    cyc(ca[15:0], 1, 0, 0);
    e0 = 0;
    while (rx_seen.size() < 4 && e0 < 40) begin cyc(16'h0, 0, 0, 0); e0++; end
    ck_en = 0;
    cyc(16'h0, 0, 0, 0);
    cs = '0;
    repeat (4) cyc(16'h0, 0, 0, 0);
    check(rx_seen.size() >= 4, "four half-words received");
    if (rx_seen.size() >= 4) begin
      check(rx_seen[0] == 16'hA1B2, $sformatf("rx 0 %h", rx_seen[0]));
      check(rx_seen[1] == 16'hC300, $sformatf("rx 1 %h", rx_seen[1]));
      check(rx_seen[2] == 16'hE5F6, $sformatf("rx 2 %h", rx_seen[2]));
      check(rx_seen[3] == 16'h0718, $sformatf("rx 3 %h", rx_seen[3]));
    end
    check(e0 >= 12 && e0 <= 12 + 4 + 4, $sformatf("first data after the initial latency (%0d)", e0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
