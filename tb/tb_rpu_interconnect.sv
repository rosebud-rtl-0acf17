// tb_rpu_interconnect: self-checking test of the RPU interconnect/DMA engine.
//
// The interconnect is joined to a small rpu_mem (IMEM 4 KB, DMEM 16 KB,
// PMEM 64 KB, AMEM 1 KB). The bench plays the core (register port and
// direct memory ports), the switch (receive and transmit streams), the load
// balancer (control channel, grants) and the broadcast fabric. Checked:
//  * receive: packet bytes land in packet memory at the slot address, the
//    first HDR_SIZE bytes are copied to data memory, the descriptor carries
//    port/tag/len/address; a 1024-byte packet is taken at one 16-byte beat
//    per cycle (64 cycles);
//  * transmit: the packet read back from memory leaves unchanged with
//    tdest = port under random back-pressure, while receives run at the same
//    time; the slot is then returned with CM_SLOT_FREE; a zero-length send
//    drops (drop pulse, free, no output); a loopback send is preceded by
//    LB_BEATS header beats holding {slot, RPU};
//  * control: SLOT_CFG and SLOT_REQ messages, grant register;
//  * broadcast: 16 queued writes are accepted, the 17th waits (FIFO full),
//    all come out in order; a delivered message is written to data memory,
//    queued as a notification only when its sub-region is enabled, and
//    raises the interrupt;
//  * host: poke/evict interrupts with mask and write-1-to-clear; host
//    memory writes into IMEM and accelerator memory.
module tb_rpu_interconnect;
  import rosebud_pkg::*;
  localparam int IB = 4096, DB = 16384, PB = 65536, AB = 1024;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // streams
  logic [127:0] s_tdata, m_tdata; logic [15:0] s_tkeep, m_tkeep;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  rx_user_t s_tuser; logic [2:0] m_tdest;
  // memory wires
  logic dma_i_en, dma_d_en, dma_p_req, dma_p_gnt, dma_p_rvalid, dma_a_en;
  logic [15:0] dma_i_we, dma_d_we, dma_p_we, dma_a_we;
  logic [7:0] dma_i_addr; logic [9:0] dma_d_addr; logic [11:0] dma_p_addr; logic [5:0] dma_a_addr;
  logic [127:0] dma_i_wdata, dma_d_wdata, dma_d_rdata, dma_p_wdata, dma_p_rdata, dma_a_wdata;
  // core side
  logic reg_req, reg_we, reg_gnt, reg_rvalid; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata;
  logic bcw_req, bcw_gnt; logic [11:0] bcw_addr; logic [31:0] bcw_wdata; logic [3:0] bcw_strb;
  logic ctrl_valid, ctrl_ready, grant_valid; ctrl_msg_t ctrl_msg; slot_grant_t grant;
  logic bc_out_valid, bc_out_ready, bc_in_valid; bc_msg_t bc_out_msg, bc_in_msg;
  logic host_poke, host_evict, irq, drop_pulse; logic [31:0] core_status; logic [63:0] debug_out;
  logic i_req, i_rvalid, d_req, d_rvalid, p_req, p_rvalid;
  logic [11:0] i_addr; logic [13:0] d_addr; logic [15:0] p_addr;
  logic [31:0] i_rdata, d_rdata, p_rdata;
  logic acc_a_en; logic [5:0] acc_a_addr; logic [127:0] acc_a_rdata, acc_b_rdata, acc_p_rdata;

  rpu_interconnect #(.IMEM_BYTES(IB), .DMEM_BYTES(DB), .PMEM_BYTES(PB), .AMEM_BYTES(AB)) dut (.*);

  rpu_mem #(.IMEM_BYTES(IB), .DMEM_BYTES(DB), .PMEM_BYTES(PB), .AMEM_BYTES(AB)) u_mem (
    .clk, .rst,
    .i_req, .i_addr, .i_rdata, .i_rvalid,
    .d_req, .d_we(4'd0), .d_addr, .d_wdata(32'd0), .d_rdata, .d_rvalid,
    .p_req, .p_we(4'd0), .p_addr, .p_wdata(32'd0), .p_rdata, .p_rvalid,
    .dma_i_en, .dma_i_we, .dma_i_addr, .dma_i_wdata,
    .dma_d_en, .dma_d_we, .dma_d_addr, .dma_d_wdata, .dma_d_rdata,
    .dma_p_req, .dma_p_we, .dma_p_addr, .dma_p_wdata, .dma_p_gnt, .dma_p_rdata, .dma_p_rvalid,
    .dma_a_en, .dma_a_we, .dma_a_addr, .dma_a_wdata,
    .acc_p_en(1'b0), .acc_p_we(16'd0), .acc_p_addr(12'd0), .acc_p_wdata(128'd0), .acc_p_rdata,
    .acc_a_en, .acc_a_we(16'd0), .acc_a_addr, .acc_a_wdata(128'd0), .acc_a_rdata,
    .acc_b_en(1'b0), .acc_b_we(16'd0), .acc_b_addr(6'd0), .acc_b_wdata(128'd0), .acc_b_rdata
  );

  function automatic byte pb(int seq, int k);
    return byte'((seq * 29 + k * 3 + (k >> 8)) & 8'hff);
  endfunction

  // ---------------- core-side helpers ----------------
  task automatic reg_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    reg_req = 1; reg_we = 1; reg_addr = a; reg_wdata = d;
    #1; while (!reg_gnt) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); reg_req = 0;
  endtask
  task automatic reg_rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_req = 1; reg_we = 0; reg_addr = a;
    #1; while (!reg_gnt) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); reg_req = 0;
    d = reg_rdata;
  endtask
  task automatic dmem_rd(int a, output logic [31:0] d);
    @(negedge clk); d_req = 1; d_addr = 14'(a);
    @(negedge clk); d_req = 0; d = d_rdata;
  endtask
  task automatic pmem_rd(int a, output logic [31:0] d);
    @(negedge clk); p_req = 1; p_addr = 16'(a);
    @(negedge clk); p_req = 0;
    @(negedge clk); d = p_rdata;
  endtask

  // ---------------- switch side: receive driver ----------------
  task automatic rx_pkt(rx_type_e typ, int port, int tag, int len, int seq);
    int k = 0;
    while (k < len) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        s_tdata[b*8 +: 8] = (k + b < len) ? pb(seq, k + b) : 8'h0;
        s_tkeep[b] = (k + b < len);
      end
      s_tlast = (k + 16 >= len);
      s_tuser = '{typ: typ, port: 3'(port), tag: 8'(tag)};
      s_tvalid = 1;
      #1; while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      k += 16;
    end
    @(negedge clk); s_tvalid = 0;
  endtask
  task automatic rx_memwr(logic [31:0] addr, int len, int seq);
    @(negedge clk);
    s_tdata = 128'(addr); s_tkeep = '1; s_tlast = 0; s_tvalid = 1;
    s_tuser = '{typ: RX_MEMWR, port: 3'd3, tag: 8'd0};
    #1; while (!s_tready) begin @(negedge clk); #1; end
    @(posedge clk);
    for (int k = 0; k < len; k += 16) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) s_tdata[b*8 +: 8] = pb(seq, k + b);
      s_tlast = (k + 16 >= len);
      #1; while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); s_tvalid = 0;
  endtask

  // ---------------- switch side: transmit monitor ----------------
  typedef struct { int port; int len; int seq; bit lpbk; int lp; } txe_t;
  txe_t tx_exp[$];
  byte  tx_got[$];
  int   tx_hdr = 0, tx_done = 0, lpbk_hdrs = 0;
  bit   tx_rand = 1;
  always @(posedge clk) m_tready <= tx_rand ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    if (tx_exp.size() == 0) check(0, "unexpected transmit beat");
    else begin
      txe_t e;
      e = tx_exp[0];
      check(int'(m_tdest) == e.port, "transmit tdest");
      if (e.lpbk && tx_hdr < LB_BEATS_TB) begin
        if (tx_hdr == 0) check(m_tdata[15:0] == 16'(e.lp), "loopback header");
        check(!m_tlast, "tlast in loopback header");
        tx_hdr++;
        if (tx_hdr == LB_BEATS_TB) lpbk_hdrs++;
      end else begin
        for (int b = 0; b < 16; b++) if (m_tkeep[b]) tx_got.push_back(byte'(m_tdata[b*8 +: 8]));
        if (m_tlast) begin
          bit ok;
          ok = tx_got.size() == e.len;
          for (int k = 0; k < tx_got.size() && ok; k++) ok = tx_got[k] == pb(e.seq, k);
          check(ok, $sformatf("transmitted packet seq %0d len %0d got %0d bytes", e.seq, e.len, tx_got.size()));
          tx_got.delete(); tx_hdr = 0; tx_done++;
          void'(tx_exp.pop_front());
        end
      end
    end
  end
  localparam int LB_BEATS_TB = 4;

  // ---------------- LB side ----------------
  ctrl_msg_t cm_got[$];
  always @(posedge clk) ctrl_ready <= $urandom % 2;
  always @(posedge clk) if (!rst && ctrl_valid && ctrl_ready) cm_got.push_back(ctrl_msg);

  // ---------------- broadcast side ----------------
  bc_msg_t bco_got[$];
  always @(posedge clk) if (!rst && bc_out_valid && bc_out_ready) bco_got.push_back(bc_out_msg);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int drops = 0;
  always @(posedge clk) if (!rst && drop_pulse) drops++;

  initial begin
    logic [31:0] d, lo, da;
    s_tvalid = 0; s_tdata = '0; s_tkeep = '0; s_tlast = 0; s_tuser = '0;
    reg_req = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    bcw_req = 0; bcw_addr = 0; bcw_wdata = 0; bcw_strb = 0; bc_out_ready = 0;
    bc_in_valid = 0; bc_in_msg = '0; grant_valid = 0; grant = '0;
    host_poke = 0; host_evict = 0;
    i_req = 0; i_addr = 0; d_req = 0; d_addr = 0; p_req = 0; p_addr = 0; acc_a_en = 0; acc_a_addr = 0;
    repeat (4) @(posedge clk);
    rst = 0;

    // ---- boot configuration (as the firmware's init code) ----
    reg_wr(R_SLOT_BASE, 32'h0);
    reg_wr(R_SLOT_SIZE, 32'd2048);
    reg_wr(R_HDR_BASE, 32'h800);
    reg_wr(R_HDR_SIZE, 32'd128);
    reg_wr(R_SLOT_CFG, 32'd8);
    repeat (10) @(posedge clk);
    check(cm_got.size() == 1 && cm_got[0].typ == CM_SLOT_CFG && cm_got[0].data == 8, "slot count message");
    cm_got.delete();

    // ---- receive 8 packets into slots 8..1, check memory and descriptors ----
    for (int n = 0; n < 8; n++) begin
      int tag, len;
      tag = 8 - n; len = (n == 0) ? 1024 : 1 + $urandom % 2000;
      if (n == 0) begin
        int t0;
        tx_rand = 0;
        t0 = cyc;
        rx_pkt(RX_PKT, n % 3, tag, len, n);
        check(cyc - t0 <= 64 + 3, $sformatf("1024-byte receive took %0d cycles, expected 64", cyc - t0));
      end else rx_pkt(RX_PKT, n % 3, tag, len, n);
      reg_rd(R_STATUS, d); check(d[0], "descriptor not ready after packet");
      reg_rd(R_RECV_LOW, lo); reg_rd(R_RECV_DATA, da);
      reg_wr(R_RECV_REL, 0);
      check(lo == {5'd0, 3'(n % 3), 8'(tag), 16'(len)}, $sformatf("descriptor low %h", lo));
      check(da == PMEM_BASE + (tag - 1) * 2048, $sformatf("descriptor address %h", da));
      for (int k = 0; k < len; k += 4 + 4 * ($urandom % 60)) begin
        pmem_rd((tag - 1) * 2048 + (k & ~3), d);
        for (int b = 0; b < 4; b++) if ((k & ~3) + b < len)
          check(d[b*8 +: 8] == pb(n, (k & ~3) + b), "packet byte in PMEM");
      end
      for (int k = 0; k < 128; k += 4) begin
        dmem_rd(32'h800 + (tag - 1) * 128 + k, d);
        for (int b = 0; b < 4; b++) if (k + b < len)
          check(d[b*8 +: 8] == pb(n, k + b), "header byte in DMEM");
      end
      // remember for transmit
      tx_exp.push_back('{port: (n % 2 == 0) ? 1 : 0, len: len, seq: n, lpbk: 0, lp: 0});
      reg_wr(R_SEND_LOW, {5'd0, 3'((n % 2 == 0) ? 1 : 0), 8'(tag), 16'(len)});
      reg_wr(R_SEND_DATA, da);
      reg_wr(R_SEND_GO, 0);
      tx_rand = 1;
    end
    repeat (500) @(posedge clk);
    check(tx_done == 8, $sformatf("%0d of 8 packets transmitted", tx_done));
    begin
      int frees = 0;
      foreach (cm_got[i]) if (cm_got[i].typ == CM_SLOT_FREE) frees++;
      check(frees == 8, $sformatf("%0d slot frees, expected 8", frees));
    end
    cm_got.delete();

    // ---- transmit and receive at the same time (shared PMEM port) ----
    fork
      for (int n = 0; n < 6; n++) rx_pkt(RX_PKT, 0, 1 + n, 700, 100 + n);
      begin
        for (int n = 0; n < 6; n++) begin
          // slot 8 still holds the 1024-byte packet seq 0 (tag 0: no slot free)
          tx_exp.push_back('{port: 2, len: 1024, seq: 0, lpbk: 0, lp: 0});
          reg_wr(R_SEND_LOW, {5'd0, 3'd2, 8'd0, 16'd1024});
          reg_wr(R_SEND_DATA, PMEM_BASE + 7 * 2048);
          reg_wr(R_SEND_GO, 0);
        end
      end
    join
    repeat (2000) @(posedge clk);
    // ---- loopback send ----
    rx_pkt(RX_PKT, 1, 3, 300, 77);
    for (int n = 0; n < 6; n++) begin reg_rd(R_STATUS, d); if (d[0]) reg_wr(R_RECV_REL, 0); end
    reg_wr(R_LPBK_DEST, 32'h0502);
    tx_exp.push_back('{port: 4, len: 300, seq: 77, lpbk: 1, lp: 16'h0502});
    reg_wr(R_SEND_LOW, {5'd0, 3'd4, 8'd3, 16'd300});
    reg_wr(R_SEND_DATA, PMEM_BASE + 2 * 2048);
    reg_wr(R_SEND_GO, 0);
    // ---- drop ----
    reg_wr(R_SEND_LOW, {5'd0, 3'd0, 8'd4, 16'd0});
    reg_wr(R_SEND_GO, 0);
    repeat (300) @(posedge clk);
    check(lpbk_hdrs == 1, "loopback header beats not seen");
    check(drops == 1, "drop pulse");
    check(tx_exp.size() == 0, $sformatf("%0d transmits missing", tx_exp.size()));

    // ---- slot request and grant ----
    cm_got.delete();
    reg_wr(R_SLOT_REQ, 32'd3);
    repeat (10) @(posedge clk);
    check(cm_got.size() > 0 && cm_got[$].typ == CM_SLOT_REQ && cm_got[$].data == 3, "slot request message");
    @(negedge clk); grant_valid = 1; grant = '{rpu: 8'd3, slot: 8'd6};
    @(negedge clk); grant_valid = 0;
    reg_rd(R_STATUS, d); check(d[2], "grant flag");
    reg_rd(R_SLOT_GRANT, d); check(d == 32'h8000_0306, $sformatf("grant register %h", d));
    reg_rd(R_STATUS, d); check(!d[2], "grant flag not cleared by read");

    // ---- broadcast out: FIFO of 16, 17th waits ----
    begin
      int acc = 0;
      for (int n = 0; n < 20; n++) begin
        @(negedge clk);
        bcw_req = 1; bcw_addr = 12'(n * 4); bcw_wdata = 32'(1000 + n); bcw_strb = 4'hf;
        #1;
        if (bcw_gnt) acc++;
        @(posedge clk);
      end
      @(negedge clk); bcw_req = 0;
      check(acc == 16, $sformatf("broadcast FIFO accepted %0d writes while blocked, expected 16", acc));
      reg_rd(R_STATUS, d); check(!d[4], "broadcast FIFO should report full");
      bc_out_ready = 1;
      repeat (30) @(posedge clk);
      check(bco_got.size() == 16, "broadcast messages out");
      foreach (bco_got[i]) check(bco_got[i].data == 32'(1000 + i) && bco_got[i].addr == 12'(i * 4), "broadcast order");
    end
    // ---- broadcast in: write to DMEM, notification for enabled sub-region ----
    reg_wr(R_BC_MASK, 32'h2);        // notify for offsets 0x100..0x1ff
    reg_wr(R_INT_MASK, 32'h31);
    @(negedge clk); bc_in_valid = 1; bc_in_msg = '{addr: 12'h004, strb: 4'hf, data: 32'hcafe0001};
    @(negedge clk); bc_in_msg = '{addr: 12'h108, strb: 4'h3, data: 32'hbeef1234};
    @(negedge clk); bc_in_valid = 0;
    dmem_rd(32'h3004, d); check(d == 32'hcafe0001, "broadcast write to DMEM");
    dmem_rd(32'h3108, d); check(d[15:0] == 16'h1234, "broadcast byte-strobe write to DMEM");
    check(irq, "broadcast interrupt");
    reg_rd(R_BC_NOTIF, d); check(d == 32'h8000_0108, $sformatf("notification %h", d));
    reg_rd(R_BC_NOTIF, d); check(d[31] == 0, "only enabled sub-region notifies");
    @(negedge clk); check(!irq, "interrupt stays after notification read");

    // ---- poke / evict ----
    @(negedge clk); host_poke = 1; @(negedge clk); host_poke = 0;
    @(negedge clk); check(irq, "poke interrupt");
    reg_rd(R_INT_STAT, d); check(d[INT_POKE] && !d[INT_EVICT], "interrupt status");
    reg_wr(R_INT_STAT, 32'h20);
    @(negedge clk); check(!irq, "poke not cleared");
    reg_wr(R_INT_MASK, 32'h01);
    @(negedge clk); host_evict = 1; @(negedge clk); host_evict = 0;
    @(negedge clk); check(!irq, "masked evict raised interrupt");
    reg_wr(R_CORE_STAT, 32'h1234); reg_wr(R_DEBUG_H, 32'hab);
    check(core_status == 32'h1234 && debug_out[63:32] == 32'hab, "status and debug words");

    // ---- host memory writes ----
    rx_memwr(IMEM_BASE + 32'h100, 64, 5);
    for (int k = 0; k < 64; k += 4) begin
      @(negedge clk); i_req = 1; i_addr = 12'(32'h100 + k);
      @(negedge clk); i_req = 0;
      check(i_rdata == {pb(5, k + 3), pb(5, k + 2), pb(5, k + 1), pb(5, k)}, "IMEM loaded by host");
    end
    rx_memwr(AMEM_BASE + 32'h40, 32, 6);
    @(negedge clk); acc_a_en = 1; acc_a_addr = 6'd4;
    @(negedge clk); acc_a_en = 0;
    check(acc_a_rdata[7:0] == pb(6, 0) && acc_a_rdata[127:120] == pb(6, 15), "AMEM loaded by host");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
