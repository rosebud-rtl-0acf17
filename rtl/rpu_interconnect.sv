// rpu_interconnect: the per-RPU interconnect and DMA engine.
//
// It joins one RPU to the rest of the framework and does all data movement
// for it, so that the core only handles descriptors:
//  * Receive: a packet arriving from the switch for slot `tag` is written
//    into packet memory at SLOT_BASE + (tag-1)*SLOT_SIZE; its first HDR_SIZE
//    bytes are also written into data memory at HDR_BASE + (tag-1)*HDR_SIZE,
//    so the core can parse the header with single-cycle loads. Only when the
//    whole packet is in memory is a descriptor {port, tag, len, address}
//    queued for the core.
//  * Host loading: a host packet of type RX_MEMWR carries a 16-byte address
//    header and data that is written to IMEM, DMEM, PMEM or accelerator
//    memory (used before the core is booted, e.g. code and lookup tables).
//  * Transmit: the core writes a descriptor; the engine reads len bytes from
//    packet memory and streams them out with tdest = port. A descriptor with
//    len = 0 drops the packet. For the loopback port one wide beat (LB_BEATS
//    narrow beats) holding {destination slot, destination RPU} is sent first.
//    After the last beat leaves, the slot is returned to the load balancer.
//  * Control: slot count, slot free and loopback slot requests go to the load
//    balancer as messages; grants come back into a register.
//  * Broadcast: core writes to the broadcast region are queued in a
//    BC_FIFO_DEPTH-entry FIFO (the write waits while it is full); delivered
//    broadcasts are written into DMEM port B and, when enabled for that
//    256-byte sub-region, queued as notifications that raise an interrupt.
//  * Host control: poke and evict interrupts, a status word and a 64-bit
//    debug word the core writes and the host reads.
// The packet-memory port is shared by receive writes and transmit reads in
// alternating priority; the core is ahead of both (in rpu_mem). Broadcast
// writes go ahead of header copies on DMEM port B.
// Register map, descriptor layout and message formats: see rosebud_pkg.
// The functions listed follow the paper (Sec. 4.1-4.4); the slot address
// formula, the 16-byte alignment of slot bases and descriptor addresses, and
// all encodings are this design's choices.
module rpu_interconnect
  import rosebud_pkg::*;
#(
  parameter int unsigned IMEM_BYTES    = 32768,
  parameter int unsigned DMEM_BYTES    = 32768,
  parameter int unsigned PMEM_BYTES    = 1048576,
  parameter int unsigned AMEM_BYTES    = 16384,
  parameter int unsigned MAX_SLOTS     = 32,
  parameter int unsigned BC_FIFO_DEPTH = 16,
  parameter int unsigned LB_BEATS      = 4,   // narrow beats per wide beat
  parameter int unsigned TX_FIFO_DEPTH = 8
) (
  input  logic                             clk,
  input  logic                             rst,
  // receive stream from the switch
  input  logic [127:0]                     s_tdata,
  input  logic [15:0]                      s_tkeep,
  input  logic                             s_tlast,
  input  rx_user_t                         s_tuser,
  input  logic                             s_tvalid,
  output logic                             s_tready,
  // transmit stream to the switch
  output logic [127:0]                     m_tdata,
  output logic [15:0]                      m_tkeep,
  output logic                             m_tlast,
  output logic [PORT_W-1:0]                m_tdest,
  output logic                             m_tvalid,
  input  logic                             m_tready,
  // memory ports (see rpu_mem)
  output logic                             dma_i_en,
  output logic [15:0]                      dma_i_we,
  output logic [$clog2(IMEM_BYTES/16)-1:0] dma_i_addr,
  output logic [127:0]                     dma_i_wdata,
  output logic                             dma_d_en,
  output logic [15:0]                      dma_d_we,
  output logic [$clog2(DMEM_BYTES/16)-1:0] dma_d_addr,
  output logic [127:0]                     dma_d_wdata,
  output logic                             dma_p_req,
  output logic [15:0]                      dma_p_we,
  output logic [$clog2(PMEM_BYTES/16)-1:0] dma_p_addr,
  output logic [127:0]                     dma_p_wdata,
  input  logic                             dma_p_gnt,
  input  logic [127:0]                     dma_p_rdata,
  input  logic                             dma_p_rvalid,
  output logic                             dma_a_en,
  output logic [15:0]                      dma_a_we,
  output logic [$clog2(AMEM_BYTES/16)-1:0] dma_a_addr,
  output logic [127:0]                     dma_a_wdata,
  // core register port (offsets in the IO_INT page)
  input  logic                             reg_req,
  input  logic                             reg_we,
  input  logic [7:0]                       reg_addr,
  input  logic [31:0]                      reg_wdata,
  output logic                             reg_gnt,
  output logic                             reg_rvalid,
  output logic [31:0]                      reg_rdata,
  // core writes to the broadcast region
  input  logic                             bcw_req,
  input  logic [BC_ADDR_W-1:0]             bcw_addr,
  input  logic [31:0]                      bcw_wdata,
  input  logic [3:0]                       bcw_strb,
  output logic                             bcw_gnt,
  // load balancer control channel
  output logic                             ctrl_valid,
  output ctrl_msg_t                        ctrl_msg,
  input  logic                             ctrl_ready,
  input  logic                             grant_valid,
  input  slot_grant_t                      grant,
  // broadcast messaging
  output logic                             bc_out_valid,
  output bc_msg_t                          bc_out_msg,
  input  logic                             bc_out_ready,
  input  logic                             bc_in_valid,
  input  bc_msg_t                          bc_in_msg,
  // host control
  input  logic                             host_poke,
  input  logic                             host_evict,
  output logic [31:0]                      core_status,
  output logic [63:0]                      debug_out,
  output logic                             irq,
  output logic                             drop_pulse
);
  localparam int unsigned DW = $clog2(DMEM_BYTES/16);
  localparam int unsigned PW = $clog2(PMEM_BYTES/16);
  localparam int unsigned TAGC = TAG_W;

  // ---------------- configuration registers ----------------
  logic [31:0] slot_base, slot_size, hdr_base, hdr_size;
  logic [7:0]  int_mask;
  logic [15:0] bc_mask;
  logic        int_evict, int_poke;
  logic [31:0] send_low, send_data, lpbk_dest;

  // ---------------- receive descriptor FIFO ----------------
  desc_t rxd_in, rxd_head;
  logic  rxd_push, rxd_ready, rxd_valid, rxd_pop;
  logic [$clog2(MAX_SLOTS):0] rxd_count;

  sync_fifo #(.W($bits(desc_t)), .DEPTH(MAX_SLOTS)) u_rxd (
    .clk, .rst,
    .in_valid(rxd_push), .in_ready(rxd_ready), .in_data(rxd_in),
    .out_valid(rxd_valid), .out_ready(rxd_pop), .out_data(rxd_head), .count(rxd_count)
  );

  // ---------------- transmit descriptor FIFO ----------------
  typedef struct packed {
    desc_t       d;
    logic [15:0] lp;   // {dest slot, dest rpu}
  } txd_t;
  txd_t txd_in, txd_head;
  logic txd_push, txd_ready, txd_valid, txd_pop;
  logic [2:0] txd_count;

  sync_fifo #(.W($bits(txd_t)), .DEPTH(4)) u_txd (
    .clk, .rst,
    .in_valid(txd_push), .in_ready(txd_ready), .in_data(txd_in),
    .out_valid(txd_valid), .out_ready(txd_pop), .out_data(txd_head), .count(txd_count)
  );

  // ---------------- control message FIFO ----------------
  ctrl_msg_t cm_in;
  logic      cm_push, cm_ready;
  logic [2:0] cm_count;

  sync_fifo #(.W($bits(ctrl_msg_t)), .DEPTH(4)) u_cm (
    .clk, .rst,
    .in_valid(cm_push), .in_ready(cm_ready), .in_data(cm_in),
    .out_valid(ctrl_valid), .out_ready(ctrl_ready), .out_data(ctrl_msg), .count(cm_count)
  );

  // ---------------- broadcast FIFOs ----------------
  bc_msg_t bco_in;
  logic    bco_ready;
  logic [$clog2(BC_FIFO_DEPTH):0] bco_count;
  assign bco_in = '{addr: bcw_addr, strb: bcw_strb, data: bcw_wdata};
  assign bcw_gnt = bcw_req && bco_ready;

  sync_fifo #(.W($bits(bc_msg_t)), .DEPTH(BC_FIFO_DEPTH)) u_bco (
    .clk, .rst,
    .in_valid(bcw_req), .in_ready(bco_ready), .in_data(bco_in),
    .out_valid(bc_out_valid), .out_ready(bc_out_ready), .out_data(bc_out_msg), .count(bco_count)
  );

  logic                 ntf_push, ntf_valid, ntf_pop, ntf_ready;
  logic [BC_ADDR_W-1:0] ntf_head;
  logic [$clog2(BC_FIFO_DEPTH):0] ntf_count;
  assign ntf_push = bc_in_valid && bc_mask[bc_in_msg.addr[BC_ADDR_W-1 -: 4]];

  sync_fifo #(.W(BC_ADDR_W), .DEPTH(BC_FIFO_DEPTH)) u_ntf (
    .clk, .rst,
    .in_valid(ntf_push), .in_ready(ntf_ready), .in_data(bc_in_msg.addr),
    .out_valid(ntf_valid), .out_ready(ntf_pop), .out_data(ntf_head), .count(ntf_count)
  );

  // ---------------- receive engine ----------------
  logic        rx_in_pkt;          // inside a packet (after its first beat)
  rx_type_e    rx_typ;
  logic [TAGC-1:0]   rx_tag;
  logic [PORT_W-1:0] rx_port;
  logic [31:0] rx_paddr;           // PMEM byte offset of the current beat
  logic [31:0] rx_haddr;           // DMEM byte offset of the current beat's header copy
  logic [31:0] rx_cnt;             // bytes received so far
  logic [31:0] rx_waddr;           // memory-write address (RX_MEMWR)

  logic [31:0] sop_paddr, sop_haddr, cur_paddr, cur_haddr, cur_cnt;
  rx_type_e    cur_typ;
  logic [4:0]  beat_bytes;

  always_comb begin
    beat_bytes = '0;
    for (int b = 0; b < 16; b++) beat_bytes += 5'(s_tkeep[b]);
  end

  assign sop_paddr = slot_base + (32'(s_tuser.tag) - 1) * slot_size;
  assign sop_haddr = hdr_base  + (32'(s_tuser.tag) - 1) * hdr_size;
  assign cur_typ   = rx_in_pkt ? rx_typ   : s_tuser.typ;
  assign cur_paddr = rx_in_pkt ? rx_paddr : sop_paddr;
  assign cur_haddr = rx_in_pkt ? rx_haddr : sop_haddr;
  assign cur_cnt   = rx_in_pkt ? rx_cnt   : 32'd0;

  // what the current beat has to do
  logic rx_hdr_wr, rx_is_addr_beat, rx_mw_imem, rx_mw_dmem, rx_mw_pmem, rx_mw_amem;
  logic rx_need_p, rx_need_d, rx_p_gnt, rx_dmem_free;

  assign rx_is_addr_beat = (cur_typ == RX_MEMWR) && !rx_in_pkt;
  assign rx_hdr_wr  = (cur_typ == RX_PKT) && (cur_cnt < hdr_size);
  assign rx_mw_imem = (cur_typ == RX_MEMWR) && rx_in_pkt && rx_waddr[31:20] == 12'h000;
  assign rx_mw_dmem = (cur_typ == RX_MEMWR) && rx_in_pkt && rx_waddr[31:20] == DMEM_BASE[31:20];
  assign rx_mw_pmem = (cur_typ == RX_MEMWR) && rx_in_pkt && rx_waddr[31:24] == PMEM_BASE[31:24];
  assign rx_mw_amem = (cur_typ == RX_MEMWR) && rx_in_pkt && rx_waddr[31:24] == AMEM_BASE[31:24];
  assign rx_need_p  = (cur_typ == RX_PKT) || rx_mw_pmem;
  assign rx_need_d  = rx_hdr_wr || rx_mw_dmem;
  assign rx_dmem_free = !bc_in_valid;

  // PMEM DMA port sharing between receive writes and transmit reads
  logic rx_p_want, tx_p_want, pm_pri, sel_rx;
  assign rx_p_want = s_tvalid && rx_need_p && (!rx_need_d || rx_dmem_free)
                     && (!s_tlast || rxd_ready);
  assign sel_rx    = rx_p_want && (!tx_p_want || !pm_pri);
  assign rx_p_gnt  = sel_rx && dma_p_gnt;

  always_comb begin
    s_tready = 1'b0;
    if (s_tvalid) begin
      if (rx_is_addr_beat)            s_tready = 1'b1;
      else if (rx_need_p)             s_tready = rx_p_gnt;
      else if (rx_need_d)             s_tready = rx_dmem_free;
      else                            s_tready = 1'b1;   // IMEM / AMEM / unmapped
      if (s_tlast && cur_typ == RX_PKT && !rxd_ready) s_tready = 1'b0;
    end
  end

  logic rx_fire;
  assign rx_fire = s_tvalid && s_tready;

  // receive-side memory writes
  assign dma_i_en    = rx_fire && rx_mw_imem;
  assign dma_i_we    = s_tkeep;
  assign dma_i_addr  = rx_waddr[$clog2(IMEM_BYTES)-1:4];
  assign dma_i_wdata = s_tdata;

  assign dma_a_en    = rx_fire && rx_mw_amem;
  assign dma_a_we    = s_tkeep;
  assign dma_a_addr  = rx_waddr[$clog2(AMEM_BYTES)-1:4];
  assign dma_a_wdata = s_tdata;

  // DMEM port B: broadcast first, then receive
  logic [31:0] bc_off;
  logic [15:0] hkeep;
  assign bc_off = BC_OFFSET + 32'(bc_in_msg.addr);
  always_comb begin
    // only header bytes below HDR_SIZE are copied
    for (int b = 0; b < 16; b++) hkeep[b] = s_tkeep[b] && (cur_cnt + 32'(b) < hdr_size);
  end

  always_comb begin
    dma_d_en    = 1'b0;
    dma_d_we    = '0;
    dma_d_addr  = '0;
    dma_d_wdata = s_tdata;
    if (bc_in_valid) begin
      dma_d_en    = 1'b1;
      dma_d_we    = 16'(bc_in_msg.strb) << (bc_off[3:2] * 4);
      dma_d_addr  = bc_off[DW+3:4];
      dma_d_wdata = {4{bc_in_msg.data}};
    end else if (rx_fire && rx_hdr_wr) begin
      dma_d_en    = 1'b1;
      dma_d_we    = hkeep;
      dma_d_addr  = cur_haddr[DW+3:4];
    end else if (rx_fire && rx_mw_dmem) begin
      dma_d_en    = 1'b1;
      dma_d_we    = s_tkeep;
      dma_d_addr  = rx_waddr[DW+3:4];
    end
  end

  assign rxd_push    = rx_fire && s_tlast && cur_typ == RX_PKT;
  assign rxd_in.port = rx_in_pkt ? rx_port : s_tuser.port;
  assign rxd_in.tag  = rx_in_pkt ? rx_tag  : s_tuser.tag;
  assign rxd_in.len  = LEN_W'(cur_cnt + 32'(beat_bytes));
  assign rxd_in.data = PMEM_BASE + (rx_in_pkt ? (rx_paddr - rx_cnt) : sop_paddr);

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_in_pkt <= 1'b0;
    end else if (rx_fire) begin
      rx_in_pkt <= !s_tlast;
      if (!rx_in_pkt) begin
        rx_typ  <= s_tuser.typ;
        rx_tag  <= s_tuser.tag;
        rx_port <= s_tuser.port;
      end
      rx_paddr <= cur_paddr + 32'd16;
      rx_haddr <= cur_haddr + 32'd16;
      rx_cnt   <= cur_cnt + 32'(beat_bytes);
      if (rx_is_addr_beat) rx_waddr <= {s_tdata[31:4], 4'h0};
      else                 rx_waddr <= rx_waddr + 32'd16;
    end
  end

  // ---------------- transmit engine ----------------
  typedef enum logic [2:0] {TX_IDLE, TX_HDR, TX_DATA, TX_FREE} tx_state_e;
  tx_state_e tx_state;
  txd_t      tx_cur;
  logic [15:0] tx_words, tx_issued, tx_resp;
  logic [3:0]  tx_hdr_cnt;
  logic [PW-1:0] tx_raddr;

  // output FIFO for read data
  logic [144:0] tof_in, tof_out;
  logic tof_valid, tof_ready, tof_pop;
  logic [$clog2(TX_FIFO_DEPTH):0] tof_count;
  logic [15:0] tx_inflight;

  assign tx_p_want = (tx_state == TX_DATA) && (tx_issued != tx_words) &&
                     (32'(tx_inflight) + 32'(tof_count) < TX_FIFO_DEPTH);

  always_comb begin
    dma_p_req   = 1'b0;
    dma_p_we    = '0;
    dma_p_addr  = tx_raddr;
    dma_p_wdata = s_tdata;
    if (sel_rx) begin
      dma_p_req   = 1'b1;
      dma_p_we    = s_tkeep;
      dma_p_addr  = rx_mw_pmem ? rx_waddr[PW+3:4] : cur_paddr[PW+3:4];
    end else if (tx_p_want) begin
      dma_p_req   = 1'b1;
    end
  end

  logic tx_issue;
  assign tx_issue = tx_p_want && !sel_rx && dma_p_gnt;

  // keep and last of each returning word
  logic        resp_last;
  logic [15:0] resp_keep;
  always_comb begin
    resp_last = (tx_resp == tx_words - 16'd1);
    resp_keep = '1;
    if (resp_last && tx_cur.d.len[3:0] != 4'd0)
      resp_keep = (16'd1 << tx_cur.d.len[3:0]) - 16'd1;
  end
  assign tof_in = {resp_last, resp_keep, dma_p_rdata};

  sync_fifo #(.W(145), .DEPTH(TX_FIFO_DEPTH)) u_tof (
    .clk, .rst,
    .in_valid(dma_p_rvalid), .in_ready(tof_ready), .in_data(tof_in),
    .out_valid(tof_valid), .out_ready(tof_pop), .out_data(tof_out), .count(tof_count)
  );

  // output multiplexer: loopback header beats, then packet data
  always_comb begin
    m_tdest = tx_cur.d.port;
    if (tx_state == TX_HDR) begin
      m_tvalid = 1'b1;
      m_tdata  = (tx_hdr_cnt == 4'(LB_BEATS)) ? {112'd0, tx_cur.lp} : '0;
      m_tkeep  = '1;
      m_tlast  = 1'b0;
      tof_pop  = 1'b0;
    end else begin
      m_tvalid = tof_valid;
      m_tdata  = tof_out[127:0];
      m_tkeep  = tof_out[143:128];
      m_tlast  = tof_out[144];
      tof_pop  = m_tready;
    end
  end

  logic tx_free_push;
  assign tx_free_push = (tx_state == TX_FREE) && tx_cur.d.tag != '0;
  assign txd_pop      = (tx_state == TX_IDLE) && txd_valid;
  assign drop_pulse   = txd_pop && txd_head.d.len == '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_state    <= TX_IDLE;
      tx_inflight <= '0;
      pm_pri      <= 1'b0;
    end else begin
      if (rx_p_want && tx_p_want) pm_pri <= ~pm_pri;
      tx_inflight <= tx_inflight + 16'(tx_issue) - 16'(dma_p_rvalid);
      if (dma_p_rvalid) tx_resp <= tx_resp + 16'd1;
      if (tx_issue) begin
        tx_issued <= tx_issued + 16'd1;
        tx_raddr  <= tx_raddr + 1'b1;
      end
      unique case (tx_state)
        TX_IDLE: if (txd_valid) begin
          tx_cur     <= txd_head;
          tx_words   <= (txd_head.d.len + 16'd15) >> 4;
          tx_issued  <= '0;
          tx_resp    <= '0;
          tx_raddr   <= PW'((txd_head.d.data - PMEM_BASE) >> 4);
          tx_hdr_cnt <= 4'(LB_BEATS);
          if (txd_head.d.len == '0)                 tx_state <= TX_FREE;
          else if (txd_head.d.port == PORT_LOOPBACK) tx_state <= TX_HDR;
          else                                      tx_state <= TX_DATA;
        end
        TX_HDR: if (m_tready) begin
          tx_hdr_cnt <= tx_hdr_cnt - 4'd1;
          if (tx_hdr_cnt == 4'd1) tx_state <= TX_DATA;
        end
        TX_DATA: if (m_tvalid && m_tready && m_tlast) tx_state <= TX_FREE;
        TX_FREE: if (!tx_free_push || cm_ready) tx_state <= TX_IDLE;
        default: tx_state <= TX_IDLE;
      endcase
    end
  end

  // ---------------- core register port ----------------
  logic core_cm_push;
  ctrl_msg_t core_cm;
  always_comb begin
    core_cm_push = 1'b0;
    core_cm      = '{typ: CM_SLOT_CFG, data: reg_wdata[7:0]};
    if (reg_req && reg_we && reg_addr == R_SLOT_CFG) core_cm_push = 1'b1;
    if (reg_req && reg_we && reg_addr == R_SLOT_REQ) begin
      core_cm_push = 1'b1;
      core_cm.typ  = CM_SLOT_REQ;
    end
  end
  assign cm_push = tx_free_push || (core_cm_push && cm_ready);
  assign cm_in   = tx_free_push ? '{typ: CM_SLOT_FREE, data: 8'(tx_cur.d.tag)} : core_cm;

  always_comb begin
    reg_gnt = reg_req;
    if (core_cm_push && (tx_free_push || !cm_ready)) reg_gnt = 1'b0;
    if (reg_req && reg_we && reg_addr == R_SEND_GO && !txd_ready) reg_gnt = 1'b0;
  end

  assign txd_push  = reg_req && reg_gnt && reg_we && reg_addr == R_SEND_GO;
  assign txd_in.d  = '{port: send_low[LEN_W+TAG_W +: PORT_W], tag: send_low[LEN_W +: TAG_W],
                      len: send_low[LEN_W-1:0], data: send_data};
  assign txd_in.lp = lpbk_dest[15:0];
  assign rxd_pop   = reg_req && reg_gnt && reg_we && reg_addr == R_RECV_REL && rxd_valid;
  assign ntf_pop   = reg_req && reg_gnt && !reg_we && reg_addr == R_BC_NOTIF && ntf_valid;

  logic        gr_valid;
  slot_grant_t gr;
  logic [7:0]  int_stat;

  always_comb begin
    int_stat            = '0;
    int_stat[INT_BC]    = ntf_valid;
    int_stat[INT_EVICT] = int_evict;
    int_stat[INT_POKE]  = int_poke;
  end
  assign irq = |(int_stat & int_mask);

  always_ff @(posedge clk) begin
    if (rst) begin
      slot_base   <= '0;
      slot_size   <= 32'd16384;
      hdr_base    <= '0;
      hdr_size    <= 32'd128;
      int_mask    <= '0;
      bc_mask     <= '0;
      int_evict   <= 1'b0;
      int_poke    <= 1'b0;
      gr_valid    <= 1'b0;
      core_status <= '0;
      debug_out   <= '0;
      reg_rvalid  <= 1'b0;
      lpbk_dest   <= '0;
    end else begin
      reg_rvalid <= reg_req && reg_gnt && !reg_we;
      if (host_evict) int_evict <= 1'b1;
      if (host_poke)  int_poke  <= 1'b1;
      if (grant_valid) begin
        gr_valid <= 1'b1;
        gr       <= grant;
      end
      if (reg_req && reg_gnt) begin
        if (reg_we) begin
          unique case (reg_addr)
            R_SEND_LOW:  send_low  <= reg_wdata;
            R_SEND_DATA: send_data <= reg_wdata;
            R_LPBK_DEST: lpbk_dest <= reg_wdata;
            R_SLOT_BASE: slot_base <= reg_wdata;
            R_SLOT_SIZE: slot_size <= reg_wdata;
            R_HDR_BASE:  hdr_base  <= reg_wdata;
            R_HDR_SIZE:  hdr_size  <= reg_wdata;
            R_INT_MASK:  int_mask  <= reg_wdata[7:0];
            R_INT_STAT: begin
              if (reg_wdata[INT_EVICT]) int_evict <= 1'b0;
              if (reg_wdata[INT_POKE])  int_poke  <= 1'b0;
            end
            R_BC_MASK:   bc_mask     <= reg_wdata[15:0];
            R_CORE_STAT: core_status <= reg_wdata;
            R_DEBUG_L:   debug_out[31:0]  <= reg_wdata;
            R_DEBUG_H:   debug_out[63:32] <= reg_wdata;
            default: ;
          endcase
        end else begin
          reg_rdata <= '0;
          unique case (reg_addr)
            R_RECV_LOW:   reg_rdata <= desc_low(rxd_head);
            R_RECV_DATA:  reg_rdata <= rxd_head.data;
            R_STATUS:     reg_rdata <= {27'd0, bco_ready, ntf_valid, gr_valid, txd_ready, rxd_valid};
            R_INT_MASK:   reg_rdata <= 32'(int_mask);
            R_INT_STAT:   reg_rdata <= 32'(int_stat);
            R_BC_MASK:    reg_rdata <= 32'(bc_mask);
            R_SLOT_GRANT: begin
              reg_rdata <= {gr_valid, 15'd0, gr.rpu, gr.slot};
              if (!grant_valid) gr_valid <= 1'b0;
            end
            R_BC_NOTIF:   reg_rdata <= {ntf_valid, 19'd0, ntf_head};
            R_CORE_STAT:  reg_rdata <= core_status;
            default: ;
          endcase
        end
      end
    end
  end

  // receive data is never lost: descriptors fit in the FIFO
  a_rxd_room: assert property (@(posedge clk) disable iff (rst) rxd_push |-> rxd_ready);
  // transmit read data always has room (credit check at issue)
  a_tof_room: assert property (@(posedge clk) disable iff (rst) dma_p_rvalid |-> tof_ready);
endmodule
