// cdc_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Carries data from the source clock domain to the destination clock domain
// (here between the SoC clock and the HyperBus PHY clock, which the paper
// puts in their own domain). The storage is written in the source domain
// and read combinationally in the destination domain. Each side keeps a
// binary pointer one bit wider than the address and publishes it in Gray
// code; the other side synchronises it with two flops. The source is full
// when the pointers differ in exactly the two top bits, the destination is
// empty when they are equal. Valid/ready handshake on both sides: a word
// moves when valid && ready. Depth must be a power of two. A word written
// becomes visible to the destination three destination edges later.
module cdc_fifo #(
  parameter int unsigned Width = 32,
  parameter int unsigned Depth = 16
) (
  input  logic             src_clk_i,
  input  logic             src_rst_ni,
  input  logic             src_valid_i,
  output logic             src_ready_o,
  input  logic [Width-1:0] src_data_i,
  input  logic             dst_clk_i,
  input  logic             dst_rst_ni,
  output logic             dst_valid_o,
  input  logic             dst_ready_i,
  output logic [Width-1:0] dst_data_o
);
  localparam int unsigned AW = $clog2(Depth);

  typedef logic [AW:0] ptr_t;

  logic [Width-1:0] mem [Depth];
  ptr_t wbin_q, wgray_q, rbin_q, rgray_q;
  ptr_t rgray_s1_q, rgray_s2_q, wgray_s1_q, wgray_s2_q;
  ptr_t wbin_d, rbin_d;

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- source side ----------------
  assign src_ready_o = (wgray_q != {~rgray_s2_q[AW:AW-1], rgray_s2_q[AW-2:0]});
  assign wbin_d      = wbin_q + ptr_t'(src_valid_i && src_ready_o);

  always_ff @(posedge src_clk_i) begin
    if (src_valid_i && src_ready_o) mem[wbin_q[AW-1:0]] <= src_data_i;
  end

  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni) begin
      wbin_q     <= '0;
      wgray_q    <= '0;
      rgray_s1_q <= '0;
      rgray_s2_q <= '0;
    end else begin
      wbin_q     <= wbin_d;
      wgray_q    <= bin2gray(wbin_d);
      rgray_s1_q <= rgray_q;
      rgray_s2_q <= rgray_s1_q;
    end
  end

  // ---------------- destination side ----------------
  assign dst_valid_o = (rgray_q != wgray_s2_q);
  assign dst_data_o  = mem[rbin_q[AW-1:0]];
  assign rbin_d      = rbin_q + ptr_t'(dst_valid_o && dst_ready_i);

  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) begin
      rbin_q     <= '0;
      rgray_q    <= '0;
      wgray_s1_q <= '0;
      wgray_s2_q <= '0;
    end else begin
      rbin_q     <= rbin_d;
      rgray_q    <= bin2gray(rbin_d);
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
    end
  end

endmodule
