// load_balancer: round-robin load balancer (LB) with per-RPU slot tracking.
//
// The LB never touches packet memory; it only labels each packet arriving
// from one of the N_IF Ethernet interfaces (physical and virtual) with a
// target RPU and a free slot of that RPU (tdest = RPU, tuser = {type, ingress
// port, slot}), and the switches and the RPU interconnect do the rest. For
// each RPU it keeps a bit mask of free slots. An RPU's core announces its
// slot count at boot (CM_SLOT_CFG, slots 1..count become free); the RPU
// interconnect returns a slot after the packet in it has been sent out
// (CM_SLOT_FREE); a core that wants to send a packet to another RPU asks for
// one of that RPU's slots (CM_SLOT_REQ) and gets a grant on its grant port
// (slot 0 when none is free). Because a packet is only let through once it
// holds a slot, every packet past the LB can be absorbed by an RPU; packets
// wait in the interface FIFOs otherwise.
//
// Policy: interfaces needing a slot are served round-robin, one assignment
// per cycle; the target is the next RPU after the previous target, in
// round-robin order, that is enabled and has a free slot; the lowest free slot
// is taken. Slot requests from cores go first (the packet assignment waits
// that cycle). Control messages are taken one per cycle, round-robin.
//
// Host channel (30-bit byte address, 32-bit words, read data one cycle after
// rd_en): word 0 = RPU enable mask (R/W, reset all enabled), word 1 = flush
// (W: clears all free slots of the RPUs whose bit is set, used before an RPU
// is reloaded), word 2 = number of RPUs (R), word 16+r = free slots of RPU r
// (R), word 48+r = packets assigned to RPU r (R).
//
// From the paper: round-robin policy, slot/descriptor labelling, slot count
// from the core at boot, freeing after send, loopback slot requests, enable
// mask, flush and slot-count readback over the host channel. Register layout,
// message encodings and the lowest-free-slot rule are this design's own.
module load_balancer
  import rosebud_pkg::*;
#(
  parameter int unsigned N_RPU     = 16,
  parameter int unsigned N_IF      = 3,
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned MAX_SLOTS = 32
) (
  input  logic                               clk,
  input  logic                               rst,
  // packets from the interfaces
  input  logic [N_IF-1:0][DATA_W-1:0]        s_tdata,
  input  logic [N_IF-1:0][DATA_W/8-1:0]      s_tkeep,
  input  logic [N_IF-1:0]                    s_tlast,
  input  logic [N_IF-1:0]                    s_tvalid,
  output logic [N_IF-1:0]                    s_tready,
  // labelled packets to the receive switch
  output logic [N_IF-1:0][DATA_W-1:0]        m_tdata,
  output logic [N_IF-1:0][DATA_W/8-1:0]      m_tkeep,
  output logic [N_IF-1:0]                    m_tlast,
  output logic [N_IF-1:0][$clog2(N_RPU)-1:0] m_tdest,
  output logic [N_IF-1:0][RX_USER_W-1:0]     m_tuser,
  output logic [N_IF-1:0]                    m_tvalid,
  input  logic [N_IF-1:0]                    m_tready,
  // control messages from the RPU interconnects
  input  logic [N_RPU-1:0]                   ctrl_valid,
  input  ctrl_msg_t [N_RPU-1:0]              ctrl_msg,
  output logic [N_RPU-1:0]                   ctrl_ready,
  // slot grants back to requesting RPUs
  output logic [N_RPU-1:0]                   grant_valid,
  output slot_grant_t                        grant,
  // host register channel
  input  logic                               host_wr_en,
  input  logic [29:0]                        host_wr_addr,
  input  logic [31:0]                        host_wr_data,
  input  logic                               host_rd_en,
  input  logic [29:0]                        host_rd_addr,
  output logic [31:0]                        host_rd_data,
  output logic                               host_rd_valid
);
  localparam int unsigned RW = $clog2(N_RPU);
  localparam int unsigned IFW = (N_IF > 1) ? $clog2(N_IF) : 1;

  logic [N_RPU-1:0][MAX_SLOTS-1:0] free_mask;
  logic [N_RPU-1:0]                enable;
  logic [RW-1:0]                   rpu_ptr;
  logic [N_RPU-1:0][31:0]          assigned_cnt;

  // per-interface packet state
  logic [N_IF-1:0]                 have_slot;
  logic [N_IF-1:0][RW-1:0]         cur_rpu;
  logic [N_IF-1:0][TAG_W-1:0]      cur_tag;

  // ---------------- helpers ----------------
  function automatic logic [TAG_W-1:0] lowest_free(logic [MAX_SLOTS-1:0] m);
    lowest_free = '0;
    for (int k = MAX_SLOTS-1; k >= 0; k--)
      if (m[k]) lowest_free = TAG_W'(k + 1);
  endfunction

  function automatic logic [7:0] popcnt(logic [MAX_SLOTS-1:0] m);
    popcnt = '0;
    for (int k = 0; k < int'(MAX_SLOTS); k++) popcnt += 8'(m[k]);
  endfunction

  // ---------------- control message arbitration ----------------
  logic          cm_valid;
  logic [RW-1:0] cm_src;
  ctrl_msg_t     cm;

  rr_arbiter #(.N(N_RPU)) u_cm_arb (
    .clk, .rst,
    .req(ctrl_valid), .advance(1'b1),
    .grant_valid(cm_valid), .grant_idx(cm_src)
  );
  assign cm = ctrl_msg[cm_src];

  always_comb begin
    ctrl_ready = '0;
    if (cm_valid) ctrl_ready[cm_src] = 1'b1;
  end

  logic cm_req;
  logic [RW-1:0] req_rpu;
  assign cm_req  = cm_valid && cm.typ == CM_SLOT_REQ;
  assign req_rpu = RW'(cm.data);

  // ---------------- packet assignment ----------------
  logic [N_IF-1:0] need;
  logic            if_valid;
  logic [IFW-1:0]  if_idx;
  logic            tgt_found;
  logic [RW-1:0]   tgt;
  logic            do_assign;

  always_comb
    for (int i = 0; i < int'(N_IF); i++) need[i] = s_tvalid[i] && !have_slot[i];

  rr_arbiter #(.N(N_IF)) u_if_arb (
    .clk, .rst,
    .req(need), .advance(do_assign),
    .grant_valid(if_valid), .grant_idx(if_idx)
  );

  always_comb begin
    tgt_found = 1'b0;
    tgt       = '0;
    for (int k = 1; k <= int'(N_RPU); k++) begin
      int unsigned r;
      r = (int'(rpu_ptr) + k) % N_RPU;
      if (!tgt_found && enable[r] && free_mask[r] != '0) begin
        tgt_found = 1'b1;
        tgt       = RW'(r);
      end
    end
  end

  assign do_assign = if_valid && tgt_found && !cm_req;

  // ---------------- pass-through ----------------
  always_comb begin
    for (int i = 0; i < int'(N_IF); i++) begin
      rx_user_t u;
      u.typ  = RX_PKT;
      u.port = PORT_W'(i);
      u.tag  = cur_tag[i];
      m_tdata[i]  = s_tdata[i];
      m_tkeep[i]  = s_tkeep[i];
      m_tlast[i]  = s_tlast[i];
      m_tdest[i]  = cur_rpu[i];
      m_tuser[i]  = u;
      m_tvalid[i] = s_tvalid[i] && have_slot[i];
      s_tready[i] = m_tready[i] && have_slot[i];
    end
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      free_mask     <= '0;
      enable        <= '1;
      rpu_ptr       <= RW'(N_RPU-1);
      have_slot     <= '0;
      grant_valid   <= '0;
      host_rd_valid <= 1'b0;
      assigned_cnt  <= '0;
    end else begin
      grant_valid   <= '0;
      host_rd_valid <= host_rd_en;

      // end of packet releases the interface
      for (int i = 0; i < int'(N_IF); i++)
        if (m_tvalid[i] && m_tready[i] && s_tlast[i]) have_slot[i] <= 1'b0;

      // control messages
      if (cm_valid) begin
        unique case (cm.typ)
          CM_SLOT_CFG: begin
            for (int k = 0; k < int'(MAX_SLOTS); k++)
              free_mask[cm_src][k] <= (k < int'(cm.data));
          end
          CM_SLOT_FREE: begin
            if (cm.data != 0 && int'(cm.data) <= int'(MAX_SLOTS))
              free_mask[cm_src][cm.data-1] <= 1'b1;
          end
          CM_SLOT_REQ: begin
            grant_valid[cm_src] <= 1'b1;
            grant.rpu  <= RPU_ID_W'(req_rpu);
            grant.slot <= lowest_free(free_mask[req_rpu]);
            if (free_mask[req_rpu] != '0)
              free_mask[req_rpu][lowest_free(free_mask[req_rpu])-1] <= 1'b0;
          end
          default: ;
        endcase
      end

      // packet assignment
      if (do_assign) begin
        have_slot[if_idx] <= 1'b1;
        cur_rpu[if_idx]   <= tgt;
        cur_tag[if_idx]   <= lowest_free(free_mask[tgt]);
        free_mask[tgt][lowest_free(free_mask[tgt])-1] <= 1'b0;
        rpu_ptr           <= tgt;
        assigned_cnt[tgt] <= assigned_cnt[tgt] + 1;
      end

      // host writes
      if (host_wr_en) begin
        if (host_wr_addr[29:2] == 28'd0) enable <= N_RPU'(host_wr_data);
        if (host_wr_addr[29:2] == 28'd1)
          for (int r = 0; r < int'(N_RPU); r++)
            if (host_wr_data[r]) free_mask[r] <= '0;
      end
    end
  end

  // host reads
  always_ff @(posedge clk) begin
    if (host_rd_en) begin
      host_rd_data <= '0;
      if (host_rd_addr[29:2] == 28'd0) host_rd_data <= 32'(enable);
      if (host_rd_addr[29:2] == 28'd2) host_rd_data <= 32'(N_RPU);
      for (int r = 0; r < int'(N_RPU); r++) begin
        if (host_rd_addr[29:2] == 28'(16 + r)) host_rd_data <= 32'(popcnt(free_mask[r]));
        if (host_rd_addr[29:2] == 28'(48 + r)) host_rd_data <= assigned_cnt[r];
      end
    end
  end

  // a slot is only handed out if it was free
  a_assign_free: assert property (@(posedge clk) disable iff (rst)
    do_assign |-> free_mask[tgt] != '0);
endmodule
