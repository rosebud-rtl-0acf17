// tb_rpu: self-checking test of one RPU running the firewall firmware.
//
// The RPU (default sizes: 32 KB IMEM/DMEM, 1 MB packet memory, 1050-rule
// checker) is driven by core_model with the firewall flags. Before the core
// is let out of reset, the host writes 1050 rules (about one in three of
// them used by the traffic below) into the accelerator's local memory with
// a host memory-write packet. The bench then acts as load balancer and
// Ethernet: it assigns free slots, sends IPv4 packets (64..1500 bytes) whose
// source address is blacklisted or not, and returns slots when the RPU
// reports them free. Checked: blacklisted packets are dropped (drop pulse,
// no output), others leave unchanged on the swapped port, every slot comes
// back, the core saw every packet, the per-packet bus cost of the firewall
// loop, and that the slot-count message reached the LB.
module tb_rpu;
  import rosebud_pkg::*;
  localparam int NRULE = 1050, NPK = 120, SLOTS = 16;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [127:0] s_tdata, m_tdata; logic [15:0] s_tkeep, m_tkeep;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  rx_user_t s_tuser; logic [2:0] m_tdest;
  logic ctrl_valid, ctrl_ready, grant_valid; ctrl_msg_t ctrl_msg; slot_grant_t grant;
  logic bc_out_valid, bc_out_ready, bc_in_valid; bc_msg_t bc_out_msg, bc_in_msg;
  logic host_core_reset, host_poke, host_evict, drop_pulse, core_rst, irq;
  logic [31:0] core_status; logic [63:0] debug_out;
  logic i_req, i_rvalid; logic [31:0] i_addr, i_rdata;
  dbus_req_t dbus_req; dbus_rsp_t dbus_rsp;

  rpu dut (.*);
  core_model #(.ID(0), .N_RPU(16), .N_SLOTS(SLOTS), .N_RULES(NRULE), .FLAGS(1)) u_core (
    .clk, .core_rst, .irq, .dbus_req, .dbus_rsp);

  // ---------------- rules ----------------
  logic [23:0] rule [NRULE];
  function automatic bit blacklisted(logic [31:0] ip);
    for (int i = 0; i < NRULE; i++) if (rule[i] == ip[31:8]) return 1;
    return 0;
  endfunction

  // ---------------- packet content ----------------
  function automatic byte pbyte(int seq, int k, logic [31:0] ip);
    if (k == 12) return 8'h08;                 // EtherType IPv4
    if (k == 13) return 8'h00;
    if (k == 14) return 8'h45;
    if (k >= 26 && k < 30) return byte'(ip[8 * (29 - k) +: 8]);
    return byte'((seq * 13 + k * 5) & 8'hff);
  endfunction

  // ---------------- LB / Ethernet side ----------------
  bit slot_busy [SLOTS+1];
  int cfg_slots = 0, frees = 0;
  always @(posedge clk) ctrl_ready <= ($urandom % 3 != 0);
  always @(posedge clk) if (!rst && ctrl_valid && ctrl_ready) begin
    if (ctrl_msg.typ == CM_SLOT_CFG) cfg_slots = int'(ctrl_msg.data);
    if (ctrl_msg.typ == CM_SLOT_FREE) begin
      check(slot_busy[ctrl_msg.data], "freed a slot that was not in use");
      slot_busy[ctrl_msg.data] = 0;
      frees++;
    end
  end

  task automatic send_stream(rx_user_t u, int len, int seq, logic [31:0] ip, bit memwr, logic [31:0] maddr);
    int k = 0;
    if (memwr) begin
      @(negedge clk);
      s_tdata = 128'(maddr); s_tkeep = '1; s_tlast = 0; s_tuser = u; s_tvalid = 1;
      #1; while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    while (k < len) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        if (memwr) s_tdata[b*8 +: 8] = (k + b < len) ? ((b % 4 == 3) ? 8'h80 : rule[(k + b) / 4][8 * (b % 4) +: 8]) : 8'h0;
        else       s_tdata[b*8 +: 8] = (k + b < len) ? pbyte(seq, k + b, ip) : 8'h0;
        s_tkeep[b] = (k + b < len);
      end
      s_tlast = (k + 16 >= len); s_tuser = u; s_tvalid = 1;
      #1; while (!s_tready) begin @(negedge clk); #1; end
      @(posedge clk);
      k += 16;
    end
    @(negedge clk); s_tvalid = 0;
  endtask

  typedef struct { int seq; int len; int port; logic [31:0] ip; } exp_t;
  exp_t exp_q[$];
  byte  got[$];
  int   n_out = 0, n_drop_seen = 0;
  always @(posedge clk) m_tready <= ($urandom % 5 != 0);
  always @(posedge clk) if (!rst && drop_pulse) n_drop_seen++;
  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    for (int b = 0; b < 16; b++) if (m_tkeep[b]) got.push_back(byte'(m_tdata[b*8 +: 8]));
    if (m_tlast) begin
      check(exp_q.size() > 0, "unexpected output packet");
      if (exp_q.size() > 0) begin
        exp_t e;
        bit ok;
        e = exp_q[0];
        ok = got.size() == e.len && int'(m_tdest) == e.port;
        for (int k = 0; k < got.size() && ok; k++) ok = got[k] == pbyte(e.seq, k, e.ip);
        check(ok, $sformatf("output packet seq %0d (len %0d port %0d) wrong", e.seq, e.len, e.port));
        void'(exp_q.pop_front());
      end
      got.delete();
      n_out++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_black = 0, t_start, t_loop;
    s_tvalid = 0; s_tdata = '0; s_tkeep = '0; s_tlast = 0; s_tuser = '0;
    bc_out_ready = 1; bc_in_valid = 0; bc_in_msg = '0; grant_valid = 0; grant = '0;
    host_core_reset = 1; host_poke = 0; host_evict = 0; i_req = 0; i_addr = 0;
    for (int i = 0; i < NRULE; i++) rule[i] = {8'd10 + 8'(i % 3), 16'($urandom)};
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (4) @(posedge clk);
    // host loads the rule list into accelerator memory, then starts the core
    send_stream('{typ: RX_MEMWR, port: PORT_HOST, tag: 8'd0}, NRULE * 4, 0, 0, 1, AMEM_BASE);
    repeat (4) @(posedge clk);
    @(negedge clk); host_core_reset = 0;
    wait (u_core.booted);
    repeat (20) @(posedge clk);
    check(cfg_slots == SLOTS, "slot count not announced");
    check(dut.u_acc.n_rules == NRULE, "rules not loaded");
    // traffic: one in three blacklisted
    t_start = cyc;
    for (int n = 0; n < NPK; n++) begin
      int tag, len, port;
      logic [31:0] ip;
      exp_t e;
      len = (n % 10 == 0) ? 1500 : 64 + $urandom % 600;
      port = n % 3;
      if (n % 3 == 0) begin ip = {rule[$urandom % NRULE], 8'($urandom)}; end
      else ip = {8'd20 + 8'($urandom % 100), 24'($urandom)};
      if (blacklisted(ip)) n_black++;
      else begin
        e.seq = n; e.len = len; e.ip = ip;
        e.port = (port == 0) ? 1 : (port == 1) ? 0 : 2;
        exp_q.push_back(e);
      end
      // wait for a free slot (as the LB would)
      tag = 0;
      while (tag == 0) begin
        for (int s = 1; s <= SLOTS; s++) if (!slot_busy[s] && tag == 0) tag = s;
        if (tag == 0) @(posedge clk);
      end
      slot_busy[tag] = 1;
      send_stream('{typ: RX_PKT, port: 3'(port), tag: 8'(tag)}, len, n, ip, 0, 0);
    end
    while (exp_q.size() != 0 || frees != NPK) begin
      @(posedge clk);
      if (cyc - t_start > 300000) break;
    end
    repeat (50) @(posedge clk);
    t_loop = (cyc - t_start) / NPK;
    $display("packets %0d blacklisted %0d forwarded %0d, %0d cycles per packet", NPK, n_black, n_out, t_loop);
    check(n_black > 20, "too few blacklisted packets to be useful");
    check(n_out == NPK - n_black, $sformatf("%0d packets out, expected %0d", n_out, NPK - n_black));
    check(n_drop_seen == n_black && u_core.n_drop == n_black, "drop count");
    check(u_core.n_rx == NPK, "core did not see every packet");
    check(frees == NPK, $sformatf("%0d slots freed, expected %0d", frees, NPK));
    check(exp_q.size() == 0, "packets missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
