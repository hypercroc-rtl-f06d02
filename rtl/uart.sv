// uart: 8N1 serial port with a programmable bit period.
//
// The paper only names the block; this small register interface is this
// design's own:
//   0x00 DATA   write: send a byte (ignored while TX is busy)
//               read:  received byte, clears RX-valid
//   0x04 STATUS [0] TX busy, [1] RX valid, [2] RX overrun (cleared by
//               reading DATA)
//   0x08 DIV    clocks per bit (reset 868: 115200 baud at 100 MHz)
// The transmitter sends a start bit, eight data bits LSB first and one stop
// bit, each DIV clocks long. The receiver synchronises rx_i with two flops,
// waits for a falling edge, and samples each bit in its middle. irq_o is
// high while a received byte waits to be read. Response one cycle after the
// grant.
module uart
  import croc_pkg::*;
#(
  parameter int unsigned DivReset = 868
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o,
  input  logic     rx_i,
  output logic     tx_o,
  output logic     irq_o
);
  logic [15:0] div_q;
  // transmitter
  logic [9:0]  tx_shift_q;
  logic [3:0]  tx_bits_q;
  logic [15:0] tx_cnt_q;
  logic        tx_busy;
  // receiver
  logic [1:0]  rx_sync_q;
  logic        rx_busy_q;
  logic [3:0]  rx_bits_q;
  logic [15:0] rx_cnt_q;
  logic [7:0]  rx_shift_q, rx_data_q;
  logic        rx_valid_q, rx_ovr_q;
  // bus
  logic        rvalid_q;
  data_t       rdata_q;
  logic        wr_data, rd_data;

  assign tx_busy = (tx_bits_q != 4'd0);
  assign wr_data = req_i.req && req_i.we && (req_i.addr[3:2] == 2'd0);
  assign rd_data = req_i.req && !req_i.we && (req_i.addr[3:2] == 2'd0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q      <= 16'(DivReset);
      tx_shift_q <= '1;
      tx_bits_q  <= '0;
      tx_cnt_q   <= '0;
      rx_sync_q  <= 2'b11;
      rx_busy_q  <= 1'b0;
      rx_bits_q  <= '0;
      rx_cnt_q   <= '0;
      rx_shift_q <= '0;
      rx_data_q  <= '0;
      rx_valid_q <= 1'b0;
      rx_ovr_q   <= 1'b0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      // ---------------- bus ----------------
      rvalid_q <= req_i.req;
      if (req_i.req) begin
        unique case (req_i.addr[3:2])
          2'd0: rdata_q <= {24'b0, rx_data_q};
          2'd1: rdata_q <= {29'b0, rx_ovr_q, rx_valid_q, tx_busy};
          2'd2: rdata_q <= {16'b0, div_q};
          default: rdata_q <= '0;
        endcase
        if (req_i.we && req_i.addr[3:2] == 2'd2) div_q <= req_i.wdata[15:0];
      end
      // ---------------- transmitter ----------------
      if (!tx_busy) begin
        if (wr_data) begin
          tx_shift_q <= {1'b1, req_i.wdata[7:0], 1'b0};
          tx_bits_q  <= 4'd10;
          tx_cnt_q   <= div_q - 16'd1;
        end
      end else if (tx_cnt_q != 16'd0) begin
        tx_cnt_q <= tx_cnt_q - 16'd1;
      end else begin
        tx_shift_q <= {1'b1, tx_shift_q[9:1]};
        tx_bits_q  <= tx_bits_q - 4'd1;
        tx_cnt_q   <= div_q - 16'd1;
      end
      // ---------------- receiver ----------------
      rx_sync_q <= {rx_sync_q[0], rx_i};
      if (rd_data) begin
        rx_valid_q <= 1'b0;
        rx_ovr_q   <= 1'b0;
      end
      if (!rx_busy_q) begin
        if (!rx_sync_q[1]) begin              // start bit seen
          rx_busy_q <= 1'b1;
          rx_bits_q <= 4'd9;                  // 8 data + stop
          rx_cnt_q  <= div_q + (div_q >> 1) - 16'd2;  // middle of bit 0
        end
      end else if (rx_cnt_q != 16'd0) begin
        rx_cnt_q <= rx_cnt_q - 16'd1;
      end else if (rx_bits_q != 4'd1) begin
        rx_shift_q <= {rx_sync_q[1], rx_shift_q[7:1]};
        rx_bits_q  <= rx_bits_q - 4'd1;
        rx_cnt_q   <= div_q - 16'd1;
      end else begin                          // stop bit
        rx_busy_q <= 1'b0;
        if (rx_sync_q[1]) begin
          rx_data_q  <= rx_shift_q;
          rx_valid_q <= 1'b1;
          if (rx_valid_q && !rd_data) rx_ovr_q <= 1'b1;
        end
      end
    end
  end

  assign tx_o         = tx_busy ? tx_shift_q[0] : 1'b1;
  assign irq_o        = rx_valid_q;
  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;
  assign rsp_o.err    = 1'b0;

endmodule
