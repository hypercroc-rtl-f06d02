// tb_hyperram: behavioural HyperRAM device for testbenches.
//
// One device on one chip select. After CS# falls it takes the 48-bit
// command/address word from the first three CK cycles (both edges), then
// waits 2 x Latency CK cycles (fixed double initial latency) and moves one
// 16-bit half-word per CK cycle at consecutive addresses until CS# rises.
// DQ and RWDS are sampled a quarter period after each CK edge. For writes a
// byte whose RWDS is high is masked. For reads the device drives the upper
// byte with RWDS high while CK is high and the lower byte with RWDS low
// while CK is low, edge-aligned as real devices do. The array holds Words
// half-words (the address wraps). Counts transactions. With NoWriteLatency
// set it behaves like a HyperFlash device on writes: the data follows the
// command/address word without any initial latency.
module tb_hyperram #(
  parameter int unsigned Words   = 4096,
  parameter int unsigned Latency = 6,
  parameter realtime     Quarter = 1.25,
  parameter bit          NoWriteLatency = 1'b0
) (
  input  logic       cs_ni,
  input  logic       ck_i,
  input  logic [7:0] dq_i,
  output logic [7:0] dq_o,
  output logic       dq_oe_o,
  input  logic       rwds_i,
  output logic       rwds_o,
  output logic       rwds_oe_o
);
  logic [15:0] mem [Words];
  int n_reads = 0, n_writes = 0, n_words = 0;

  initial begin
    for (int i = 0; i < Words; i++) mem[i] = '0;
    dq_o = '0;
    dq_oe_o = 1'b0;
    rwds_o = 1'b0;
    rwds_oe_o = 1'b0;
  end

  initial begin
    logic [47:0] ca;
    logic [31:0] addr;
    logic [7:0] hi, lo;
    logic m_hi, m_lo;
    forever begin
      @(negedge cs_ni);
      for (int i = 0; i < 3; i++) begin
        @(posedge ck_i); #(Quarter); ca[47 - 16 * i -: 8] = dq_i;
        @(negedge ck_i); #(Quarter); ca[39 - 16 * i -: 8] = dq_i;
      end
      addr = {ca[44:16], ca[2:0]};
      if (ca[47] || !NoWriteLatency) repeat (2 * Latency) @(posedge ck_i or posedge cs_ni);
      if (ca[47]) begin
        n_reads++;
        forever begin
          if (cs_ni) break;
          @(posedge ck_i or posedge cs_ni);
          if (cs_ni) break;
          dq_oe_o = 1'b1;
          rwds_oe_o = 1'b1;
          dq_o = mem[addr % Words][15:8];
          rwds_o = 1'b1;
          @(negedge ck_i);
          dq_o = mem[addr % Words][7:0];
          rwds_o = 1'b0;
          addr++;
          n_words++;
        end
        dq_oe_o = 1'b0;
        rwds_oe_o = 1'b0;
      end else begin
        n_writes++;
        forever begin
          if (cs_ni) break;
          @(posedge ck_i or posedge cs_ni);
          if (cs_ni) break;
          #(Quarter); hi = dq_i; m_hi = rwds_i;
          @(negedge ck_i); #(Quarter); lo = dq_i; m_lo = rwds_i;
          if (!m_hi) mem[addr % Words][15:8] = hi;
          if (!m_lo) mem[addr % Words][7:0] = lo;
          addr++;
          n_words++;
        end
      end
    end
  end
endmodule
