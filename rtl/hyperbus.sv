// hyperbus: HyperBus memory controller with one or two PHYs.
//
// The controller gives the iDMA a path to off-chip HyperRAM / HyperFlash.
// It has two OBI subordinate ports with burst support (a read port and a
// write port, one for each side of the iDMA), a configuration port, and
// drives NumPhys PHYs, each with NumCs chip selects (four devices per PHY).
// The PHYs and the controller's transaction engine run in their own clock
// domain (phy_clk_i, up to 200 MHz); the OBI ports run on the SoC clock.
//
// SoC clock side. A burst is recognised by its first beat, which carries
// the number of beats minus one in blen.
//  * Read port: the first beat is granted when the command FIFO has room
//    and the read-data buffer can take the whole burst (words granted but
//    not yet returned are counted); a read command is then queued and the
//    remaining beats are granted one per cycle. Read data comes back in
//    order through a dual-clock FIFO, one word per cycle at most.
//  * Write port: every beat is granted while the write-data FIFO has room;
//    the write command is queued together with the last beat, so the PHY
//    side never starts a write before all of its data has crossed over.
//    Writes are posted: each beat is acknowledged one cycle after its
//    grant.
//  When both ports want to queue a command in the same cycle, the write
//  command goes first.
//
// PHY clock side. A small state machine takes one command at a time:
//  CA   three cycles of the 48-bit command/address word, 16 bits per cycle
//       (read/write, memory space, linear burst, half-word address);
//  LAT  for writes, 2 x LATENCY clock cycles of fixed initial latency,
//       skipped for chip selects marked in WRNOLAT (HyperFlash devices
//       take write data right after the command/address word);
//  WR   the data, 16 bits per PHY per cycle, RWDS masking bytes whose
//       byte enable is clear;
//  RD   waits for the words the PHYs receive (the memory paces reads);
//  GAP  one cycle with CK stopped and the chip select still held, so CS#
//       rises only after the last CK edge; then IDLE, where every chip
//       select is released for at least one cycle.
// With two PHYs each 32-bit word is split: PHY 0 stores bits [15:0] and
// PHY 1 bits [31:16] at the same half-word address, so one word moves per
// PHY clock cycle; this doubles both capacity and bandwidth. With one PHY a
// word takes two cycles (low half-word first, little-endian).
//
// Address decoding: the byte offset into the HyperBus window is converted
// to a per-PHY byte offset (divided by NumPhys); its bits above
// DevAddrBits select the chip select, the bits below give the device's
// half-word address.
//
// Configuration registers (SoC clock, response one cycle after the grant):
//   0x00 LATENCY rw [3:0] initial latency in clocks (reset LatencyReset);
//                change it only while the controller is idle
//   0x04 INFO    ro [3:0] NumPhys, [7:4] NumCs
//   0x08 WRNOLAT rw [NumCs-1:0] one bit per chip select: writes to this
//                device have no initial latency (HyperFlash); reset 0.
//                Reads are paced by the device, so both kinds read alike.
//
// Following the paper: separate PHY clock domain, OBI with bursts to the
// iDMA, four devices per PHY, a dual-PHY configuration doubling capacity
// and bandwidth. This design's own choices: the port and FIFO structure,
// posted writes, the fixed double latency, the word split across PHYs and
// the address layout.
//
// Lint tools may report the resets (rst_ni and the synchronised PHY-domain
// reset) as used both asynchronously and synchronously: the synchronous
// use is only the disable-iff condition of the handshake assertions below.
module hyperbus
  import croc_pkg::*;
#(
  parameter int unsigned NumPhys      = 2,
  parameter int unsigned NumCs        = 4,
  parameter int unsigned DevAddrBits  = 26,      // 64 MiB per device
  parameter int unsigned FifoDepth    = 32,      // words; at least 2 x longest burst
  parameter int unsigned LatencyReset = 6,
  parameter addr_t       BaseAddr     = HyperBase
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         phy_clk_i,
  // configuration port
  input  obi_req_t                     cfg_req_i,
  output obi_rsp_t                     cfg_rsp_o,
  // burst ports
  input  obi_req_t                     rd_req_i,
  output obi_rsp_t                     rd_rsp_o,
  input  obi_req_t                     wr_req_i,
  output obi_rsp_t                     wr_rsp_o,
  // pads, one set per PHY
  output logic [NumPhys-1:0][NumCs-1:0] hyper_cs_no,
  output logic [NumPhys-1:0]           hyper_ck_o,
  output logic [NumPhys-1:0]           hyper_ck_no,
  output logic [NumPhys-1:0]           hyper_reset_no,
  output logic [NumPhys-1:0][7:0]      hyper_dq_o,
  output logic [NumPhys-1:0]           hyper_dq_oe_o,
  input  logic [NumPhys-1:0][7:0]      hyper_dq_i,
  output logic [NumPhys-1:0]           hyper_rwds_o,
  output logic [NumPhys-1:0]           hyper_rwds_oe_o,
  input  logic [NumPhys-1:0]           hyper_rwds_i
);
  localparam int unsigned CntW    = $clog2(FifoDepth + 1);
  localparam int unsigned CsW     = (NumCs > 1) ? $clog2(NumCs) : 1;
  localparam int unsigned HwShift = (NumPhys == 2) ? 0 : 1;  // word -> per-PHY half-word

  typedef struct packed {
    logic                 we;
    logic [29:0]          woff;   // word offset into the window
    logic [BlenWidth-1:0] blen;
  } cmd_t;

  typedef struct packed {
    strb_t be;
    data_t data;
  } wbeat_t;

  // =====================================================================
  // SoC clock domain
  // =====================================================================
  logic [3:0] lat_q;
  logic [NumCs-1:0] nolat_q;
  logic       cfg_rvalid_q;
  data_t      cfg_rdata_q;

  cmd_t   cmd_in;
  logic   cmd_push, cmd_ready;
  logic   wd_push, wd_ready;
  logic   rd_pop, rd_valid;
  data_t  rd_data;

  logic [BlenWidth-1:0] rd_left_q, wr_left_q;
  logic [CntW-1:0]      rd_out_q;
  logic [29:0]          wr_woff_q;
  logic [BlenWidth-1:0] wr_blen_q;
  logic                 wr_ack_q;
  logic                 rd_first, rd_gnt, wr_first, wr_last, wr_gnt, wr_cmd;

  function automatic logic [29:0] woff_of(addr_t a);
    addr_t off;
    off = a - BaseAddr;
    return off[31:2];
  endfunction

  // write port
  assign wr_first = (wr_left_q == '0);
  assign wr_last  = wr_first ? (wr_req_i.blen == '0) : (wr_left_q == BlenWidth'(1));
  assign wr_gnt   = wr_req_i.req && wd_ready && (!wr_last || cmd_ready);
  assign wr_cmd   = wr_gnt && wr_last;
  assign wd_push  = wr_gnt;

  // read port
  assign rd_first = (rd_left_q == '0);
  assign rd_gnt   = rd_req_i.req && (!rd_first ||
                    (cmd_ready && !wr_cmd &&
                     (CntW'(rd_out_q) + CntW'(rd_req_i.blen) + 1'b1) <= CntW'(FifoDepth)));

  always_comb begin
    cmd_in   = '0;
    cmd_push = 1'b0;
    if (wr_cmd) begin
      cmd_push    = 1'b1;
      cmd_in.we   = 1'b1;
      cmd_in.woff = wr_first ? woff_of(wr_req_i.addr) : wr_woff_q;
      cmd_in.blen = wr_first ? wr_req_i.blen : wr_blen_q;
    end else if (rd_gnt && rd_first) begin
      cmd_push    = 1'b1;
      cmd_in.we   = 1'b0;
      cmd_in.woff = woff_of(rd_req_i.addr);
      cmd_in.blen = rd_req_i.blen;
    end
  end

  assign rd_pop = rd_valid && (rd_out_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lat_q        <= 4'(LatencyReset);
      nolat_q      <= '0;
      cfg_rvalid_q <= 1'b0;
      cfg_rdata_q  <= '0;
      rd_left_q    <= '0;
      wr_left_q    <= '0;
      rd_out_q     <= '0;
      wr_woff_q    <= '0;
      wr_blen_q    <= '0;
      wr_ack_q     <= 1'b0;
    end else begin
      cfg_rvalid_q <= cfg_req_i.req;
      if (cfg_req_i.req) begin
        unique case (cfg_req_i.addr[3:2])
          2'd0: begin
            cfg_rdata_q <= {28'b0, lat_q};
            if (cfg_req_i.we) lat_q <= cfg_req_i.wdata[3:0];
          end
          2'd1:    cfg_rdata_q <= {24'b0, 4'(NumCs), 4'(NumPhys)};
          2'd2: begin
            cfg_rdata_q <= data_t'(nolat_q);
            if (cfg_req_i.we) nolat_q <= cfg_req_i.wdata[NumCs-1:0];
          end
          default: cfg_rdata_q <= '0;
        endcase
      end
      // read port
      if (rd_gnt) rd_left_q <= rd_first ? rd_req_i.blen : rd_left_q - 1'b1;
      rd_out_q <= rd_out_q + CntW'(rd_gnt) - CntW'(rd_pop);
      // write port
      if (wr_gnt) begin
        wr_left_q <= wr_first ? wr_req_i.blen : wr_left_q - 1'b1;
        if (wr_first) begin
          wr_woff_q <= woff_of(wr_req_i.addr);
          wr_blen_q <= wr_req_i.blen;
        end
      end
      wr_ack_q <= wr_gnt;
    end
  end

  assign cfg_rsp_o = '{gnt: 1'b1, rvalid: cfg_rvalid_q, rdata: cfg_rdata_q, err: 1'b0};
  assign rd_rsp_o  = '{gnt: rd_gnt, rvalid: rd_pop, rdata: rd_data, err: 1'b0};
  assign wr_rsp_o  = '{gnt: wr_gnt, rvalid: wr_ack_q, rdata: '0, err: 1'b0};

  // =====================================================================
  // Clock domain crossing
  // =====================================================================
  logic   prst_q1, prst_n;
  cmd_t   cmd_out;
  logic   cmd_valid, cmd_pop;
  wbeat_t wd_out;
  logic   wd_valid, wd_pop;
  logic   rx_push, rx_ready;
  data_t  rx_word;
  logic [3:0] lat_s1_q, lat_s2_q;

  // reset synchroniser for the PHY domain (asynchronous assert)
  always_ff @(posedge phy_clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prst_q1 <= 1'b0;
      prst_n  <= 1'b0;
    end else begin
      prst_q1 <= 1'b1;
      prst_n  <= prst_q1;
    end
  end

  // the latency settings are quasi-static: two-flop synchronisers
  logic [NumCs-1:0] nolat_s1_q, nolat_s2_q;
  always_ff @(posedge phy_clk_i or negedge prst_n) begin
    if (!prst_n) begin
      lat_s1_q   <= 4'(LatencyReset);
      lat_s2_q   <= 4'(LatencyReset);
      nolat_s1_q <= '0;
      nolat_s2_q <= '0;
    end else begin
      lat_s1_q   <= lat_q;
      lat_s2_q   <= lat_s1_q;
      nolat_s1_q <= nolat_q;
      nolat_s2_q <= nolat_s1_q;
    end
  end

  cdc_fifo #(.Width($bits(cmd_t)), .Depth(4)) i_cmd_fifo (
    .src_clk_i(clk_i), .src_rst_ni(rst_ni), .src_valid_i(cmd_push), .src_ready_o(cmd_ready),
    .src_data_i(cmd_in),
    .dst_clk_i(phy_clk_i), .dst_rst_ni(prst_n), .dst_valid_o(cmd_valid), .dst_ready_i(cmd_pop),
    .dst_data_o(cmd_out)
  );

  cdc_fifo #(.Width($bits(wbeat_t)), .Depth(FifoDepth)) i_wdata_fifo (
    .src_clk_i(clk_i), .src_rst_ni(rst_ni), .src_valid_i(wd_push), .src_ready_o(wd_ready),
    .src_data_i({wr_req_i.be, wr_req_i.wdata}),
    .dst_clk_i(phy_clk_i), .dst_rst_ni(prst_n), .dst_valid_o(wd_valid), .dst_ready_i(wd_pop),
    .dst_data_o(wd_out)
  );

  cdc_fifo #(.Width(DataWidth), .Depth(FifoDepth)) i_rdata_fifo (
    .src_clk_i(phy_clk_i), .src_rst_ni(prst_n), .src_valid_i(rx_push), .src_ready_o(rx_ready),
    .src_data_i(rx_word),
    .dst_clk_i(clk_i), .dst_rst_ni(rst_ni), .dst_valid_o(rd_valid), .dst_ready_i(rd_pop),
    .dst_data_o(rd_data)
  );

  // =====================================================================
  // PHY clock domain: transaction engine
  // =====================================================================
  typedef enum logic [2:0] {StIdle, StCa, StLat, StWr, StRd, StGap} state_e;

  state_e      state_q;
  hyper_ca_t   ca_q;
  logic [CsW-1:0] cs_q;
  logic        we_q;
  logic [5:0]  cnt_q;        // CA / latency cycle counter
  logic [BlenWidth+1:0] beats_q; // PHY data cycles left (16 bits per PHY each)
  logic        half_q;       // single PHY: second half-word of the word
  logic [15:0] rx_lo_q;

  // decode of the popped command
  logic [31:0] phy_byte;
  logic [31:0] hw_addr;
  logic [CsW-1:0] cs_sel;

  always_comb begin
    phy_byte = {cmd_out.woff, 2'b00} >> (NumPhys - 1);
    hw_addr  = 32'(phy_byte[DevAddrBits-1:1]);
    cs_sel   = CsW'(phy_byte >> DevAddrBits);
  end

  // PHY controls
  logic [NumCs-1:0] phy_cs;
  logic             phy_ck_en, phy_dq_oe, phy_rwds_oe;
  logic [NumPhys-1:0][15:0] phy_tx;
  logic [NumPhys-1:0][1:0]  phy_rwds;
  logic [NumPhys-1:0]       phy_rx_valid;
  logic [NumPhys-1:0][15:0] phy_rx;

  always_comb begin
    phy_cs      = '0;
    phy_ck_en   = 1'b0;
    phy_dq_oe   = 1'b0;
    phy_rwds_oe = 1'b0;
    phy_tx      = '0;
    phy_rwds    = '0;
    wd_pop      = 1'b0;
    cmd_pop     = (state_q == StIdle) && cmd_valid;
    rx_push     = 1'b0;
    rx_word     = '0;
    if (state_q != StIdle) phy_cs[cs_q] = 1'b1;
    if (state_q inside {StCa, StLat, StWr, StRd}) phy_ck_en = 1'b1;
    unique case (state_q)
      StCa: begin
        phy_dq_oe = 1'b1;
        for (int p = 0; p < NumPhys; p++) begin
          unique case (cnt_q[1:0])
            2'd0:    phy_tx[p] = ca_q[47:32];
            2'd1:    phy_tx[p] = ca_q[31:16];
            default: phy_tx[p] = ca_q[15:0];
          endcase
        end
      end
      StWr: begin
        phy_dq_oe   = 1'b1;
        phy_rwds_oe = 1'b1;
        if (NumPhys == 2) begin
          for (int p = 0; p < NumPhys; p++) begin
            phy_tx[p]   = wd_out.data[16*p +: 16];
            phy_rwds[p] = ~{wd_out.be[2*p+1], wd_out.be[2*p]};
          end
          wd_pop = 1'b1;
        end else begin
          phy_tx[0]   = half_q ? wd_out.data[31:16] : wd_out.data[15:0];
          phy_rwds[0] = half_q ? ~wd_out.be[3:2] : ~wd_out.be[1:0];
          wd_pop      = half_q;
        end
      end
      StRd: begin
        if (phy_rx_valid[0]) begin
          if (NumPhys == 2) begin
            rx_push = 1'b1;
            rx_word = data_t'({phy_rx[NumPhys-1], phy_rx[0]});
          end else begin
            rx_push = half_q;
            rx_word = {phy_rx[0], rx_lo_q};
          end
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge phy_clk_i or negedge prst_n) begin
    if (!prst_n) begin
      state_q <= StIdle;
      ca_q    <= '0;
      cs_q    <= '0;
      we_q    <= 1'b0;
      cnt_q   <= '0;
      beats_q <= '0;
      half_q  <= 1'b0;
      rx_lo_q <= '0;
    end else begin
      unique case (state_q)
        StIdle: begin
          if (cmd_valid) begin
            ca_q.read      <= !cmd_out.we;
            ca_q.reg_space <= 1'b0;
            ca_q.linear    <= 1'b1;
            ca_q.addr_hi   <= hw_addr[31:3];
            ca_q.reserved  <= '0;
            ca_q.addr_lo   <= hw_addr[2:0];
            cs_q    <= cs_sel;
            we_q    <= cmd_out.we;
            cnt_q   <= '0;
            beats_q <= ({2'b0, cmd_out.blen} + 1'b1) << HwShift;
            half_q  <= 1'b0;
            state_q <= StCa;
          end
        end
        StCa: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 6'd2) begin
            cnt_q   <= '0;
            state_q <= !we_q ? StRd : nolat_s2_q[cs_q] ? StWr : StLat;
          end
        end
        StLat: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == {1'b0, lat_s2_q, 1'b0} - 6'd1) state_q <= StWr;
        end
        StWr: begin
          half_q  <= (NumPhys == 1) ? !half_q : 1'b0;
          beats_q <= beats_q - 1'b1;
          if (beats_q == 1) state_q <= StGap;
        end
        StRd: begin
          if (phy_rx_valid[0]) begin
            if (NumPhys == 1) begin
              half_q  <= !half_q;
              rx_lo_q <= phy_rx[0];
            end
            beats_q <= beats_q - 1'b1;
            if (beats_q == 1) state_q <= StGap;
          end
        end
        default: state_q <= StIdle;  // StGap
      endcase
    end
  end

  // PHYs
  for (genvar p = 0; p < NumPhys; p++) begin : gen_phy
    hyperbus_phy #(.NumCs(NumCs)) i_phy (
      .clk_i           (phy_clk_i),
      .rst_ni          (prst_n),
      .cs_i            (phy_cs),
      .ck_en_i         (phy_ck_en),
      .dq_oe_i         (phy_dq_oe),
      .tx_data_i       (phy_tx[p]),
      .rwds_oe_i       (phy_rwds_oe),
      .tx_rwds_i       (phy_rwds[p]),
      .rx_valid_o      (phy_rx_valid[p]),
      .rx_data_o       (phy_rx[p]),
      .hyper_cs_no     (hyper_cs_no[p]),
      .hyper_ck_o      (hyper_ck_o[p]),
      .hyper_ck_no     (hyper_ck_no[p]),
      .hyper_reset_no  (hyper_reset_no[p]),
      .hyper_dq_o      (hyper_dq_o[p]),
      .hyper_dq_oe_o   (hyper_dq_oe_o[p]),
      .hyper_dq_i      (hyper_dq_i[p]),
      .hyper_rwds_o    (hyper_rwds_o[p]),
      .hyper_rwds_oe_o (hyper_rwds_oe_o[p]),
      .hyper_rwds_i    (hyper_rwds_i[p])
    );
  end

  // Write data is always complete before a write starts, and read data
  // always finds room, because of the SoC-side flow control.
  assert property (@(posedge phy_clk_i) disable iff (!prst_n) wd_pop |-> wd_valid)
    else $error("hyperbus: write data not available");
  assert property (@(posedge phy_clk_i) disable iff (!prst_n) rx_push |-> rx_ready)
    else $error("hyperbus: read buffer overflow");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(rd_req_i.req && rd_req_i.we))
    else $error("hyperbus: write on the read port");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(wr_req_i.req && !wr_req_i.we))
    else $error("hyperbus: read on the write port");

endmodule
