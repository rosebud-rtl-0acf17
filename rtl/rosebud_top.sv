// rosebud_top: the Rosebud framework: load balancer, packet distribution,
// loopback, broadcast messaging and N_CLUSTER x RPUS_PER_CLUSTER RPUs.
//
// Receive: packets from the N_ETH Ethernet interfaces (two physical ports
// and the host's virtual interface) pass the load balancer, which gives each
// one an RPU and a free slot. The inter-cluster switch (wide, one FIFO per
// incoming link: LB outputs, host DRAM, loopback) sends each packet to its
// RPU's cluster; the cluster switch narrows it onto the RPU's own link. The
// RPU interconnect writes it into the slot and tells the core.
// Transmit: each RPU's outgoing link enters its cluster switch (narrow to
// wide, one FIFO per RPU), then the outgoing inter-cluster switch routes by
// egress port: 0-2 Ethernet, 3 host DRAM, 4 loopback. Loopback packets go
// back into the receive inter-cluster switch.
// Control: interconnects talk to the load balancer over a separate message
// channel; broadcast messages go through bc_msg_switch to all RPUs at once.
// Host side: the LB register channel, per-RPU reset/poke/evict and status,
// and traffic counters (addr bit 15 = 0: wide links {eth rx 0..N_ETH-1,
// eth tx 0..N_ETH-1, host rx, host tx}; 1: per-RPU links {rpu rx, rpu tx},
// see stat_counters for the field encoding).
// Parts that are not RTL here and are outside this module: Ethernet MACs,
// PCIe/host DMA (whose streams and registers are ports), and the RISC-V
// cores, whose buses are ports (one per RPU). The two-stage switching, link
// widths, 16 RPUs in 4 clusters and the separate control channels follow the
// paper (Fig. 2, Fig. 4, Sec. 4-5); FIFO depths and encodings are this
// design's choices.
module rosebud_top
  import rosebud_pkg::*;
#(
  parameter int unsigned N_CLUSTER        = 4,
  parameter int unsigned RPUS_PER_CLUSTER = 4,
  parameter int unsigned N_ETH            = 3,
  parameter int unsigned WIDE_W           = 512,
  parameter int unsigned NARROW_W         = 128,
  parameter int unsigned IMEM_BYTES       = 32768,
  parameter int unsigned DMEM_BYTES       = 32768,
  parameter int unsigned PMEM_BYTES       = 1048576,
  parameter int unsigned AMEM_BYTES       = 16384,
  parameter int unsigned MAX_SLOTS        = 32,
  parameter int unsigned NUM_RULES        = 1050,
  // derived
  parameter int unsigned N_RPU            = N_CLUSTER * RPUS_PER_CLUSTER,
  parameter int unsigned RW               = $clog2(N_RPU)
) (
  input  logic                               clk,
  input  logic                               rst,
  // Ethernet receive (from MAC FIFOs)
  input  logic [N_ETH-1:0][WIDE_W-1:0]       eth_rx_tdata,
  input  logic [N_ETH-1:0][WIDE_W/8-1:0]     eth_rx_tkeep,
  input  logic [N_ETH-1:0]                   eth_rx_tlast,
  input  logic [N_ETH-1:0]                   eth_rx_tvalid,
  output logic [N_ETH-1:0]                   eth_rx_tready,
  input  logic [N_ETH-1:0]                   eth_rx_drop,
  // Ethernet transmit
  output logic [N_ETH-1:0][WIDE_W-1:0]       eth_tx_tdata,
  output logic [N_ETH-1:0][WIDE_W/8-1:0]     eth_tx_tkeep,
  output logic [N_ETH-1:0]                   eth_tx_tlast,
  output logic [N_ETH-1:0]                   eth_tx_tvalid,
  input  logic [N_ETH-1:0]                   eth_tx_tready,
  // host DRAM to RPUs (tdest = RPU, tuser = rx_user_t)
  input  logic [WIDE_W-1:0]                  host_rx_tdata,
  input  logic [WIDE_W/8-1:0]                host_rx_tkeep,
  input  logic                               host_rx_tlast,
  input  logic [RW-1:0]                      host_rx_tdest,
  input  logic [RX_USER_W-1:0]               host_rx_tuser,
  input  logic                               host_rx_tvalid,
  output logic                               host_rx_tready,
  // RPUs to host DRAM (tuser = source RPU)
  output logic [WIDE_W-1:0]                  host_tx_tdata,
  output logic [WIDE_W/8-1:0]                host_tx_tkeep,
  output logic                               host_tx_tlast,
  output logic [RW-1:0]                      host_tx_tuser,
  output logic                               host_tx_tvalid,
  input  logic                               host_tx_tready,
  // host register channel of the load balancer
  input  logic                               lb_wr_en,
  input  logic [29:0]                        lb_wr_addr,
  input  logic [31:0]                        lb_wr_data,
  input  logic                               lb_rd_en,
  input  logic [29:0]                        lb_rd_addr,
  output logic [31:0]                        lb_rd_data,
  output logic                               lb_rd_valid,
  // host control of the RPUs
  input  logic [N_RPU-1:0]                   host_core_reset,
  input  logic [N_RPU-1:0]                   host_poke,
  input  logic [N_RPU-1:0]                   host_evict,
  output logic [N_RPU-1:0][31:0]             core_status,
  output logic [N_RPU-1:0][63:0]             debug_out,
  // traffic counters
  input  logic                               stat_rd_en,
  input  logic [15:0]                        stat_rd_addr,
  output logic [31:0]                        stat_rd_data,
  // RISC-V cores
  output logic [N_RPU-1:0]                   core_rst,
  output logic [N_RPU-1:0]                   core_irq,
  input  logic [N_RPU-1:0]                   core_i_req,
  input  logic [N_RPU-1:0][31:0]             core_i_addr,
  output logic [N_RPU-1:0][31:0]             core_i_rdata,
  output logic [N_RPU-1:0]                   core_i_rvalid,
  input  dbus_req_t [N_RPU-1:0]              core_dbus_req,
  output dbus_rsp_t [N_RPU-1:0]              core_dbus_rsp
);
  localparam int unsigned N_RXIN = N_ETH + 2;          // LB outputs, host, loopback
  localparam int unsigned N_TXO  = N_ETH + 2;          // Ethernet, host, loopback
  localparam int unsigned CW     = $clog2(RPUS_PER_CLUSTER);

  // ======================= load balancer =======================
  logic [N_RXIN-1:0][WIDE_W-1:0]    rx1_tdata;
  logic [N_RXIN-1:0][WIDE_W/8-1:0]  rx1_tkeep;
  logic [N_RXIN-1:0]                rx1_tlast, rx1_tvalid, rx1_tready;
  logic [N_RXIN-1:0][RW-1:0]        rx1_tdest;
  logic [N_RXIN-1:0][RX_USER_W-1:0] rx1_tuser;

  logic [N_RPU-1:0]  lb_ctrl_valid, lb_ctrl_ready, lb_grant_valid;
  ctrl_msg_t [N_RPU-1:0] lb_ctrl_msg;
  slot_grant_t       lb_grant;

  load_balancer #(.N_RPU(N_RPU), .N_IF(N_ETH), .DATA_W(WIDE_W), .MAX_SLOTS(MAX_SLOTS)) u_lb (
    .clk, .rst,
    .s_tdata(eth_rx_tdata), .s_tkeep(eth_rx_tkeep), .s_tlast(eth_rx_tlast),
    .s_tvalid(eth_rx_tvalid), .s_tready(eth_rx_tready),
    .m_tdata(rx1_tdata[N_ETH-1:0]), .m_tkeep(rx1_tkeep[N_ETH-1:0]), .m_tlast(rx1_tlast[N_ETH-1:0]),
    .m_tdest(rx1_tdest[N_ETH-1:0]), .m_tuser(rx1_tuser[N_ETH-1:0]),
    .m_tvalid(rx1_tvalid[N_ETH-1:0]), .m_tready(rx1_tready[N_ETH-1:0]),
    .ctrl_valid(lb_ctrl_valid), .ctrl_msg(lb_ctrl_msg), .ctrl_ready(lb_ctrl_ready),
    .grant_valid(lb_grant_valid), .grant(lb_grant),
    .host_wr_en(lb_wr_en), .host_wr_addr(lb_wr_addr), .host_wr_data(lb_wr_data),
    .host_rd_en(lb_rd_en), .host_rd_addr(lb_rd_addr), .host_rd_data(lb_rd_data),
    .host_rd_valid(lb_rd_valid)
  );

  // host DRAM input
  assign rx1_tdata[N_ETH]  = host_rx_tdata;
  assign rx1_tkeep[N_ETH]  = host_rx_tkeep;
  assign rx1_tlast[N_ETH]  = host_rx_tlast;
  assign rx1_tdest[N_ETH]  = host_rx_tdest;
  assign rx1_tuser[N_ETH]  = host_rx_tuser;
  assign rx1_tvalid[N_ETH] = host_rx_tvalid;
  assign host_rx_tready    = rx1_tready[N_ETH];

  // ======================= receive switching =======================
  logic [N_CLUSTER-1:0][WIDE_W-1:0]    rxc_tdata;
  logic [N_CLUSTER-1:0][WIDE_W/8-1:0]  rxc_tkeep;
  logic [N_CLUSTER-1:0]                rxc_tlast, rxc_tvalid, rxc_tready;
  logic [N_CLUSTER-1:0][RW-1:0]        rxc_tdest;
  logic [N_CLUSTER-1:0][RX_USER_W-1:0] rxc_tuser;

  pkt_switch #(
    .N_IN(N_RXIN), .N_OUT(N_CLUSTER), .IN_W(WIDE_W), .OUT_W(WIDE_W),
    .DEST_W(RW), .USER_W(RX_USER_W), .DEST_SHIFT(CW)
  ) u_rx_sw (
    .clk, .rst,
    .s_tdata(rx1_tdata), .s_tkeep(rx1_tkeep), .s_tlast(rx1_tlast), .s_tdest(rx1_tdest),
    .s_tuser(rx1_tuser), .s_tvalid(rx1_tvalid), .s_tready(rx1_tready),
    .m_tdata(rxc_tdata), .m_tkeep(rxc_tkeep), .m_tlast(rxc_tlast), .m_tdest(rxc_tdest),
    .m_tuser(rxc_tuser), .m_tvalid(rxc_tvalid), .m_tready(rxc_tready)
  );

  // per-RPU narrow links
  logic [N_RPU-1:0][NARROW_W-1:0]   rr_tdata;
  logic [N_RPU-1:0][NARROW_W/8-1:0] rr_tkeep;
  logic [N_RPU-1:0]                 rr_tlast, rr_tvalid, rr_tready;
  logic [N_RPU-1:0][RW-1:0]         rr_tdest;
  logic [N_RPU-1:0][RX_USER_W-1:0]  rr_tuser;

  logic [N_RPU-1:0][NARROW_W-1:0]   rt_tdata;
  logic [N_RPU-1:0][NARROW_W/8-1:0] rt_tkeep;
  logic [N_RPU-1:0]                 rt_tlast, rt_tvalid, rt_tready;
  logic [N_RPU-1:0][PORT_W-1:0]     rt_tdest;
  logic [N_RPU-1:0][RW-1:0]         rt_tuser;

  logic [N_CLUSTER-1:0][WIDE_W-1:0]    txc_tdata;
  logic [N_CLUSTER-1:0][WIDE_W/8-1:0]  txc_tkeep;
  logic [N_CLUSTER-1:0]                txc_tlast, txc_tvalid, txc_tready;
  logic [N_CLUSTER-1:0][PORT_W-1:0]    txc_tdest;
  logic [N_CLUSTER-1:0][RW-1:0]        txc_tuser;

  for (genvar c = 0; c < N_CLUSTER; c++) begin : g_cluster
    localparam int unsigned B = c * RPUS_PER_CLUSTER;

    pkt_switch #(
      .N_IN(1), .N_OUT(RPUS_PER_CLUSTER), .IN_W(WIDE_W), .OUT_W(NARROW_W),
      .DEST_W(RW), .USER_W(RX_USER_W), .DEST_SHIFT(0)
    ) u_rx_csw (
      .clk, .rst,
      .s_tdata(rxc_tdata[c]), .s_tkeep(rxc_tkeep[c]), .s_tlast(rxc_tlast[c]), .s_tdest(rxc_tdest[c]),
      .s_tuser(rxc_tuser[c]), .s_tvalid(rxc_tvalid[c]), .s_tready(rxc_tready[c]),
      .m_tdata(rr_tdata[B +: RPUS_PER_CLUSTER]), .m_tkeep(rr_tkeep[B +: RPUS_PER_CLUSTER]),
      .m_tlast(rr_tlast[B +: RPUS_PER_CLUSTER]), .m_tdest(rr_tdest[B +: RPUS_PER_CLUSTER]),
      .m_tuser(rr_tuser[B +: RPUS_PER_CLUSTER]), .m_tvalid(rr_tvalid[B +: RPUS_PER_CLUSTER]),
      .m_tready(rr_tready[B +: RPUS_PER_CLUSTER])
    );

    pkt_switch #(
      .N_IN(RPUS_PER_CLUSTER), .N_OUT(1), .IN_W(NARROW_W), .OUT_W(WIDE_W),
      .DEST_W(PORT_W), .USER_W(RW), .DEST_SHIFT(0)
    ) u_tx_csw (
      .clk, .rst,
      .s_tdata(rt_tdata[B +: RPUS_PER_CLUSTER]), .s_tkeep(rt_tkeep[B +: RPUS_PER_CLUSTER]),
      .s_tlast(rt_tlast[B +: RPUS_PER_CLUSTER]), .s_tdest(rt_tdest[B +: RPUS_PER_CLUSTER]),
      .s_tuser(rt_tuser[B +: RPUS_PER_CLUSTER]), .s_tvalid(rt_tvalid[B +: RPUS_PER_CLUSTER]),
      .s_tready(rt_tready[B +: RPUS_PER_CLUSTER]),
      .m_tdata(txc_tdata[c]), .m_tkeep(txc_tkeep[c]), .m_tlast(txc_tlast[c]), .m_tdest(txc_tdest[c]),
      .m_tuser(txc_tuser[c]), .m_tvalid(txc_tvalid[c]), .m_tready(txc_tready[c])
    );
  end

  // ======================= transmit switching =======================
  logic [N_TXO-1:0][WIDE_W-1:0]   tx_tdata;
  logic [N_TXO-1:0][WIDE_W/8-1:0] tx_tkeep;
  logic [N_TXO-1:0]               tx_tlast, tx_tvalid, tx_tready;
  logic [N_TXO-1:0][PORT_W-1:0]   tx_tdest;
  logic [N_TXO-1:0][RW-1:0]       tx_tuser;

  pkt_switch #(
    .N_IN(N_CLUSTER), .N_OUT(N_TXO), .IN_W(WIDE_W), .OUT_W(WIDE_W),
    .DEST_W(PORT_W), .USER_W(RW), .DEST_SHIFT(0)
  ) u_tx_sw (
    .clk, .rst,
    .s_tdata(txc_tdata), .s_tkeep(txc_tkeep), .s_tlast(txc_tlast), .s_tdest(txc_tdest),
    .s_tuser(txc_tuser), .s_tvalid(txc_tvalid), .s_tready(txc_tready),
    .m_tdata(tx_tdata), .m_tkeep(tx_tkeep), .m_tlast(tx_tlast), .m_tdest(tx_tdest),
    .m_tuser(tx_tuser), .m_tvalid(tx_tvalid), .m_tready(tx_tready)
  );

  assign eth_tx_tdata  = tx_tdata[N_ETH-1:0];
  assign eth_tx_tkeep  = tx_tkeep[N_ETH-1:0];
  assign eth_tx_tlast  = tx_tlast[N_ETH-1:0];
  assign eth_tx_tvalid = tx_tvalid[N_ETH-1:0];
  assign tx_tready[N_ETH-1:0] = eth_tx_tready;

  assign host_tx_tdata  = tx_tdata[PORT_HOST];
  assign host_tx_tkeep  = tx_tkeep[PORT_HOST];
  assign host_tx_tlast  = tx_tlast[PORT_HOST];
  assign host_tx_tuser  = tx_tuser[PORT_HOST];
  assign host_tx_tvalid = tx_tvalid[PORT_HOST];
  assign tx_tready[PORT_HOST] = host_tx_tready;

  // ======================= loopback =======================
  loopback #(.DATA_W(WIDE_W), .DEST_W(RW)) u_lpbk (
    .clk, .rst,
    .s_tdata(tx_tdata[PORT_LOOPBACK]), .s_tkeep(tx_tkeep[PORT_LOOPBACK]),
    .s_tlast(tx_tlast[PORT_LOOPBACK]), .s_tvalid(tx_tvalid[PORT_LOOPBACK]),
    .s_tready(tx_tready[PORT_LOOPBACK]),
    .m_tdata(rx1_tdata[N_ETH+1]), .m_tkeep(rx1_tkeep[N_ETH+1]), .m_tlast(rx1_tlast[N_ETH+1]),
    .m_tdest(rx1_tdest[N_ETH+1]), .m_tuser(rx1_tuser[N_ETH+1]),
    .m_tvalid(rx1_tvalid[N_ETH+1]), .m_tready(rx1_tready[N_ETH+1])
  );

  // ======================= broadcast messaging =======================
  logic [N_RPU-1:0]    bco_valid, bco_ready;
  bc_msg_t [N_RPU-1:0] bco_msg;
  logic                bci_valid;
  bc_msg_t             bci_msg;
  logic [RW-1:0]       bci_src;  // sender, not needed by the RPUs

  bc_msg_switch #(.N_RPU(N_RPU)) u_bc (
    .clk, .rst,
    .in_valid(bco_valid), .in_msg(bco_msg), .in_ready(bco_ready),
    .out_valid(bci_valid), .out_msg(bci_msg), .out_src(bci_src)
  );

  // ======================= RPUs =======================
  logic [N_RPU-1:0] rpu_drop;

  for (genvar r = 0; r < N_RPU; r++) begin : g_rpu
    rpu #(
      .IMEM_BYTES(IMEM_BYTES), .DMEM_BYTES(DMEM_BYTES), .PMEM_BYTES(PMEM_BYTES),
      .AMEM_BYTES(AMEM_BYTES), .MAX_SLOTS(MAX_SLOTS), .LB_BEATS(WIDE_W / NARROW_W),
      .NUM_RULES(NUM_RULES)
    ) u_rpu (
      .clk, .rst,
      .s_tdata(rr_tdata[r]), .s_tkeep(rr_tkeep[r]), .s_tlast(rr_tlast[r]), .s_tuser(rr_tuser[r]),
      .s_tvalid(rr_tvalid[r]), .s_tready(rr_tready[r]),
      .m_tdata(rt_tdata[r]), .m_tkeep(rt_tkeep[r]), .m_tlast(rt_tlast[r]), .m_tdest(rt_tdest[r]),
      .m_tvalid(rt_tvalid[r]), .m_tready(rt_tready[r]),
      .ctrl_valid(lb_ctrl_valid[r]), .ctrl_msg(lb_ctrl_msg[r]), .ctrl_ready(lb_ctrl_ready[r]),
      .grant_valid(lb_grant_valid[r]), .grant(lb_grant),
      .bc_out_valid(bco_valid[r]), .bc_out_msg(bco_msg[r]), .bc_out_ready(bco_ready[r]),
      .bc_in_valid(bci_valid), .bc_in_msg(bci_msg),
      .host_core_reset(host_core_reset[r]), .host_poke(host_poke[r]), .host_evict(host_evict[r]),
      .core_status(core_status[r]), .debug_out(debug_out[r]), .drop_pulse(rpu_drop[r]),
      .core_rst(core_rst[r]), .irq(core_irq[r]),
      .i_req(core_i_req[r]), .i_addr(core_i_addr[r]), .i_rdata(core_i_rdata[r]),
      .i_rvalid(core_i_rvalid[r]),
      .dbus_req(core_dbus_req[r]), .dbus_rsp(core_dbus_rsp[r])
    );
    assign rt_tuser[r] = RW'(r);
  end

  // ======================= traffic counters =======================
  localparam int unsigned N_WIDE = 2 * N_ETH + 2;
  logic [N_WIDE-1:0]                w_valid, w_ready, w_last, w_drop;
  logic [N_WIDE-1:0][WIDE_W/8-1:0]  w_keep;
  logic [2*N_RPU-1:0]               n_valid, n_ready, n_last, n_drop;
  logic [2*N_RPU-1:0][NARROW_W/8-1:0] n_keep;
  logic [31:0] w_rdata, n_rdata;
  logic        rd_hi_q;

  always_comb begin
    for (int i = 0; i < int'(N_ETH); i++) begin
      w_valid[i] = eth_rx_tvalid[i]; w_ready[i] = eth_rx_tready[i];
      w_last[i]  = eth_rx_tlast[i];  w_keep[i]  = eth_rx_tkeep[i]; w_drop[i] = eth_rx_drop[i];
      w_valid[N_ETH+i] = eth_tx_tvalid[i]; w_ready[N_ETH+i] = eth_tx_tready[i];
      w_last[N_ETH+i]  = eth_tx_tlast[i];  w_keep[N_ETH+i]  = eth_tx_tkeep[i]; w_drop[N_ETH+i] = 1'b0;
    end
    w_valid[2*N_ETH] = host_rx_tvalid; w_ready[2*N_ETH] = host_rx_tready;
    w_last[2*N_ETH]  = host_rx_tlast;  w_keep[2*N_ETH]  = host_rx_tkeep; w_drop[2*N_ETH] = 1'b0;
    w_valid[2*N_ETH+1] = host_tx_tvalid; w_ready[2*N_ETH+1] = host_tx_tready;
    w_last[2*N_ETH+1]  = host_tx_tlast;  w_keep[2*N_ETH+1]  = host_tx_tkeep; w_drop[2*N_ETH+1] = 1'b0;
    for (int r = 0; r < int'(N_RPU); r++) begin
      n_valid[2*r] = rr_tvalid[r]; n_ready[2*r] = rr_tready[r];
      n_last[2*r]  = rr_tlast[r];  n_keep[2*r]  = rr_tkeep[r]; n_drop[2*r] = 1'b0;
      n_valid[2*r+1] = rt_tvalid[r]; n_ready[2*r+1] = rt_tready[r];
      n_last[2*r+1]  = rt_tlast[r];  n_keep[2*r+1]  = rt_tkeep[r]; n_drop[2*r+1] = rpu_drop[r];
    end
  end

  stat_counters #(.N_MON(N_WIDE), .KEEP_W(WIDE_W/8)) u_wstat (
    .clk, .rst, .mon_valid(w_valid), .mon_ready(w_ready), .mon_last(w_last), .mon_keep(w_keep),
    .drop(w_drop), .rd_en(stat_rd_en && !stat_rd_addr[15]), .rd_addr({1'b0, stat_rd_addr[14:0]}),
    .rd_data(w_rdata)
  );
  stat_counters #(.N_MON(2*N_RPU), .KEEP_W(NARROW_W/8)) u_nstat (
    .clk, .rst, .mon_valid(n_valid), .mon_ready(n_ready), .mon_last(n_last), .mon_keep(n_keep),
    .drop(n_drop), .rd_en(stat_rd_en && stat_rd_addr[15]), .rd_addr({1'b0, stat_rd_addr[14:0]}),
    .rd_data(n_rdata)
  );
  always_ff @(posedge clk) if (stat_rd_en) rd_hi_q <= stat_rd_addr[15];
  assign stat_rd_data = rd_hi_q ? n_rdata : w_rdata;
endmodule
