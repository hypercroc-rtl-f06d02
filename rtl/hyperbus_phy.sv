// hyperbus_phy: behavioural model of the hardened HyperBus PHY macro.
//
// In silicon this is a hard macro (the paper ships it hardened so that the
// DDR signalling and its timing stay inside it); this file models its
// behaviour for simulation and is not meant for synthesis. It turns a
// synchronous, one-word-per-clock controller interface into HyperBus pad
// signalling for one bus with NumCs chip selects.
//
// Transmit: in each PHY clock cycle the controller presents a 16-bit word
// (tx_data_i) and a byte mask (tx_rwds_i). The PHY puts tx_data_i[15:8] on
// DQ while CK is high and tx_data_i[7:0] while CK is low, one clock cycle
// later, so the memory samples both bytes at the centre of the bytes when it
// delays its sampling by a quarter period. Outputs are retimed on the
// falling PHY clock edge so that CK, CS# and the data change without
// glitches. CK runs while ck_en_i is set; CK# is its complement.
//
// Receive: the memory drives DQ edge-aligned with RWDS. The PHY samples DQ
// a quarter period (QuarterDelay, in ns) after each RWDS edge, the
// delay a real PHY obtains with a delay line, and hands each completed
// 16-bit word to the controller with rx_valid_o for one clock cycle.
//
// The capture processes on the RWDS edges use blocking assignments and a
// delay on purpose: they model the macro's delay line and its hand-over of
// a finished half-word within one time step, which lint tools report as
// blocking assignments in sequential logic. This file is simulation-only.
module hyperbus_phy #(
  parameter int unsigned NumCs        = 4,
  parameter realtime     QuarterDelay = 1.25  // quarter of the 200 MHz period, in ns
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // controller side
  input  logic [NumCs-1:0] cs_i,        // one-hot chip select, active high
  input  logic             ck_en_i,
  input  logic             dq_oe_i,
  input  logic [15:0]      tx_data_i,
  input  logic             rwds_oe_i,
  input  logic [1:0]       tx_rwds_i,   // [1] first byte, [0] second byte
  output logic             rx_valid_o,
  output logic [15:0]      rx_data_o,
  // pad side
  output logic [NumCs-1:0] hyper_cs_no,
  output logic             hyper_ck_o,
  output logic             hyper_ck_no,
  output logic             hyper_reset_no,
  output logic [7:0]       hyper_dq_o,
  output logic             hyper_dq_oe_o,
  input  logic [7:0]       hyper_dq_i,
  output logic             hyper_rwds_o,
  output logic             hyper_rwds_oe_o,
  input  logic             hyper_rwds_i
);
  logic [NumCs-1:0] cs_q;
  logic             ck_en_q;
  logic [7:0]       hi_q, lo_q, lo_d;
  logic             oe_q, oe_d, rwds_oe_q, rwds_oe_d;
  logic             rwds_hi_q, rwds_lo_q, rwds_lo_d;

  // ---------------- transmit ----------------
  always_ff @(negedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cs_q      <= '0;
      ck_en_q   <= 1'b0;
      hi_q      <= '0;
      lo_q      <= '0;
      lo_d      <= '0;
      oe_q      <= 1'b0;
      oe_d      <= 1'b0;
      rwds_oe_q <= 1'b0;
      rwds_oe_d <= 1'b0;
      rwds_hi_q <= 1'b0;
      rwds_lo_q <= 1'b0;
      rwds_lo_d <= 1'b0;
    end else begin
      cs_q      <= cs_i;
      ck_en_q   <= ck_en_i;
      hi_q      <= tx_data_i[15:8];
      lo_q      <= tx_data_i[7:0];
      lo_d      <= lo_q;
      oe_q      <= dq_oe_i;
      oe_d      <= oe_q;
      rwds_oe_q <= rwds_oe_i;
      rwds_oe_d <= rwds_oe_q;
      rwds_hi_q <= tx_rwds_i[1];
      rwds_lo_q <= tx_rwds_i[0];
      rwds_lo_d <= rwds_lo_q;
    end
  end

  assign hyper_cs_no     = ~cs_q;
  assign hyper_ck_o      = clk_i & ck_en_q;
  assign hyper_ck_no     = ~(clk_i & ck_en_q);
  assign hyper_reset_no  = rst_ni;
  assign hyper_dq_o      = clk_i ? hi_q : lo_d;
  assign hyper_dq_oe_o   = clk_i ? oe_q : oe_d;
  assign hyper_rwds_o    = clk_i ? rwds_hi_q : rwds_lo_d;
  assign hyper_rwds_oe_o = clk_i ? rwds_oe_q : rwds_oe_d;

  // ---------------- receive ----------------
  logic [7:0]  rx_hi;
  logic [15:0] rx_word;
  logic        rx_flag;
  logic        listen;

  assign listen = !rwds_oe_q && (cs_q != '0);

  initial begin
    rx_hi   = '0;
    rx_word = '0;
    rx_flag = 1'b0;
  end

  always @(posedge hyper_rwds_i) begin
    if (listen) begin
      #(QuarterDelay);
      rx_hi = hyper_dq_i;
    end
  end

  always @(negedge hyper_rwds_i) begin
    if (listen) begin
      #(QuarterDelay);
      rx_word = {rx_hi, hyper_dq_i};
      rx_flag = 1'b1;
    end
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_valid_o <= 1'b0;
      rx_data_o  <= '0;
    end else if (rx_flag) begin
      rx_valid_o <= 1'b1;
      rx_data_o  <= rx_word;
      rx_flag = 1'b0;
    end else begin
      rx_valid_o <= 1'b0;
    end
  end

endmodule
