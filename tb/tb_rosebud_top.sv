// tb_rosebud_top: end-to-end test of the full-size Rosebud top level.
//
// The top runs with its default parameters (16 RPUs in 4 clusters, 512/128
// bit links, 1 MB packet memory, 1050-rule firewall per RPU). Each RPU gets
// a core_model running the firewall firmware with loopback and broadcast
// enabled (RPU 0 is additionally slow). Sequence:
//  1. the host loads the rule list into every RPU's accelerator memory with
//     host memory-write packets, then releases the cores;
//  2. the three Ethernet inputs (two physical, one host virtual) send
//     random IPv4 packets (64..1500 bytes, a quarter blacklisted) at the
//     same time while the outputs apply random back-pressure;
//  3. the host enables only RPU 0 in the load balancer and sends a burst,
//     so its slots run out and the load balancer must hold the input;
//  4. all RPUs are re-enabled and the traffic counters are read.
// Every output packet is matched by the sequence number in its payload:
// it must be unchanged, not blacklisted, not seen twice, and leave on the
// swapped port (0<->1, 2->2) or on port 0 after a loopback. Mechanisms that
// must each have happened (else they count as failures): firewall drops,
// loopback sends and receptions, broadcasts sent and notified, load balancer
// stall, simultaneous inputs, output back-pressure, and a slot request with
// no free slot is not required. At the end every RPU's copy of the
// broadcast region must hold the same, latest value from every sender, and
// the Ethernet receive frame counters must match the packets sent.
module tb_rosebud_top;
  import rosebud_pkg::*;
  localparam int NR = 16, NE = 3, WW = 512, RW = 4, NRULE = 1050;
  localparam int NPK = 60;              // per Ethernet input in phase 2
  localparam int NBURST = 48;           // phase 3
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [NE-1:0][WW-1:0] eth_rx_tdata, eth_tx_tdata; logic [NE-1:0][WW/8-1:0] eth_rx_tkeep, eth_tx_tkeep;
  logic [NE-1:0] eth_rx_tlast, eth_rx_tvalid, eth_rx_tready, eth_rx_drop;
  logic [NE-1:0] eth_tx_tlast, eth_tx_tvalid, eth_tx_tready;
  logic [WW-1:0] host_rx_tdata, host_tx_tdata; logic [WW/8-1:0] host_rx_tkeep, host_tx_tkeep;
  logic host_rx_tlast, host_rx_tvalid, host_rx_tready, host_tx_tlast, host_tx_tvalid, host_tx_tready;
  logic [RW-1:0] host_rx_tdest, host_tx_tuser; logic [RX_USER_W-1:0] host_rx_tuser;
  logic lb_wr_en, lb_rd_en, lb_rd_valid; logic [29:0] lb_wr_addr, lb_rd_addr; logic [31:0] lb_wr_data, lb_rd_data;
  logic [NR-1:0] host_core_reset, host_poke, host_evict, core_rst, core_irq, core_i_req, core_i_rvalid;
  logic [NR-1:0][31:0] core_status, core_i_addr, core_i_rdata; logic [NR-1:0][63:0] debug_out;
  logic stat_rd_en; logic [15:0] stat_rd_addr; logic [31:0] stat_rd_data;
  dbus_req_t [NR-1:0] core_dbus_req; dbus_rsp_t [NR-1:0] core_dbus_rsp;

  rosebud_top dut (.*);

  // per-RPU core models and their counters
  int unsigned c_rx [NR], c_drop [NR], c_lo [NR], c_li [NR], c_bs [NR], c_bn [NR], c_ng [NR];
  logic [31:0] c_lastbc [NR];
  bit c_boot [NR];
  for (genvar r = 0; r < NR; r++) begin : g_core
    core_model #(.ID(r), .N_RPU(NR), .N_SLOTS(16), .N_RULES(NRULE), .FLAGS(r == 0 ? 15 : 7)) u_core (
      .clk, .core_rst(core_rst[r]), .irq(core_irq[r]),
      .dbus_req(core_dbus_req[r]), .dbus_rsp(core_dbus_rsp[r]));
    always_comb begin
      c_rx[r] = u_core.n_rx; c_drop[r] = u_core.n_drop; c_lo[r] = u_core.n_lpbk_out;
      c_li[r] = u_core.n_lpbk_in; c_bs[r] = u_core.n_bc_sent; c_bn[r] = u_core.n_bc_seen;
      c_ng[r] = u_core.n_no_grant; c_lastbc[r] = u_core.last_bc; c_boot[r] = u_core.booted;
    end
  end
  // broadcast region word of sender k as held by RPU r
  logic [NR-1:0][NR-1:0][31:0] bc_copy;
  for (genvar r = 0; r < NR; r++) begin : g_bcc
    for (genvar k = 0; k < NR; k++) begin : g_k
      assign bc_copy[r][k] = dut.g_rpu[r].u_rpu.u_mem.u_dmem.mem[(int'(BC_OFFSET) + 4 * k) / 16][32 * (k % 4) +: 32];
    end
  end

  // ---------------- rules and packets ----------------
  logic [23:0] rule [NRULE];
  function automatic bit blacklisted(logic [31:0] ip);
    for (int i = 0; i < NRULE; i++) if (rule[i] == ip[31:8]) return 1;
    return 0;
  endfunction
  typedef struct { int port; int len; logic [31:0] ip; bit black; bit seen; } pk_t;
  pk_t pk [int];
  int  next_seq = 1;

  function automatic byte pbyte(int seq, int k, logic [31:0] ip);
    if (k == 12) return 8'h08;
    if (k == 13) return 8'h00;
    if (k == 14) return 8'h45;
    if (k >= 26 && k < 30) return byte'(ip[8 * (29 - k) +: 8]);
    if (k >= 30 && k < 34) return byte'(seq >> (8 * (33 - k)));
    return byte'((seq * 7 + k * 3) & 8'hff);
  endfunction

  int sent [NE];
  task automatic eth_send(int i, int len, bit black);
    int seq, k;
    logic [31:0] ip;
    pk_t p;
    seq = next_seq++;
    if (black) ip = {rule[$urandom % NRULE], 8'($urandom)};
    else       ip = {8'd30 + 8'($urandom % 100), 24'($urandom)};
    p.port = i; p.len = len; p.ip = ip; p.black = blacklisted(ip); p.seen = 0;
    pk[seq] = p;
    k = 0;
    while (k < len) begin
      @(negedge clk);
      for (int b = 0; b < 64; b++) begin
        eth_rx_tdata[i][b*8 +: 8] = (k + b < len) ? pbyte(seq, k + b, ip) : 8'h0;
        eth_rx_tkeep[i][b] = (k + b < len);
      end
      eth_rx_tlast[i] = (k + 64 >= len); eth_rx_tvalid[i] = 1;
      #1; while (!eth_rx_tready[i]) begin @(negedge clk); #1; end
      @(posedge clk);
      k += 64;
    end
    @(negedge clk); eth_rx_tvalid[i] = 0;
    sent[i]++;
  endtask

  // host memory write of the rule list into RPU r's accelerator memory
  task automatic load_rules(int r);
    byte s[$];
    for (int b = 0; b < 16; b++) s.push_back(byte'(AMEM_BASE >> (8 * b)));
    for (int i = 0; i < NRULE; i++) begin
      s.push_back(byte'(rule[i][7:0])); s.push_back(byte'(rule[i][15:8]));
      s.push_back(byte'(rule[i][23:16])); s.push_back(8'h80);
    end
    for (int k = 0; k < s.size(); k += 64) begin
      @(negedge clk);
      for (int b = 0; b < 64; b++) begin
        host_rx_tdata[b*8 +: 8] = (k + b < s.size()) ? s[k + b] : 8'h0;
        host_rx_tkeep[b] = (k + b < s.size());
      end
      host_rx_tlast = (k + 64 >= s.size()); host_rx_tvalid = 1;
      host_rx_tdest = RW'(r); host_rx_tuser = {RX_MEMWR, PORT_HOST, 8'd0};
      #1; while (!host_rx_tready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); host_rx_tvalid = 0;
  endtask

  // ---------------- output monitors ----------------
  byte  rxb [NE][$];
  int   n_out = 0, n_out_lpbk_port = 0, n_host_tx = 0, bp_cycles = 0, multi_in = 0, lb_stall = 0;
  always @(posedge clk) begin
    eth_tx_tready <= NE'($urandom) | NE'($urandom) | NE'($urandom);
    host_tx_tready <= 1'b1;
  end
  always @(posedge clk) if (!rst) begin
    if ($countones(eth_rx_tvalid) >= 2) multi_in++;
    for (int i = 0; i < NE; i++) begin
      if (eth_rx_tvalid[i] && !eth_rx_tready[i]) lb_stall++;
      if (eth_tx_tvalid[i] && !eth_tx_tready[i]) bp_cycles++;
      if (eth_tx_tvalid[i] && eth_tx_tready[i]) begin
        for (int b = 0; b < 64; b++) if (eth_tx_tkeep[i][b]) rxb[i].push_back(byte'(eth_tx_tdata[i][b*8 +: 8]));
        if (eth_tx_tlast[i]) begin
          int seq;
          seq = (rxb[i].size() >= 34) ? {rxb[i][30], rxb[i][31], rxb[i][32], rxb[i][33]} : -1;
          if (!pk.exists(seq)) check(0, $sformatf("port %0d: unknown packet", i));
          else begin
            pk_t p;
            bit ok;
            int swp;
            p = pk[seq];
            swp = (p.port == 0) ? 1 : (p.port == 1) ? 0 : 2;
            check(!p.seen, $sformatf("packet %0d delivered twice", seq));
            check(!p.black, $sformatf("blacklisted packet %0d was forwarded", seq));
            check(i == swp || i == 0, $sformatf("packet %0d from port %0d left on port %0d", seq, p.port, i));
            if (i != swp) n_out_lpbk_port++;
            ok = rxb[i].size() == p.len;
            for (int k = 0; k < rxb[i].size() && ok; k++) ok = rxb[i][k] == pbyte(seq, k, p.ip);
            check(ok, $sformatf("packet %0d corrupted", seq));
            pk[seq].seen = 1;
          end
          rxb[i].delete();
          n_out++;
        end
      end
    end
    if (host_tx_tvalid && host_tx_tready && host_tx_tlast) n_host_tx++;
  end

  task automatic lb_write(int word, logic [31:0] d);
    @(negedge clk); lb_wr_en = 1; lb_wr_addr = 30'(word * 4); lb_wr_data = d;
    @(negedge clk); lb_wr_en = 0;
  endtask
  task automatic lb_read(int word, output logic [31:0] d);
    @(negedge clk); lb_rd_en = 1; lb_rd_addr = 30'(word * 4);
    @(negedge clk); lb_rd_en = 0; d = lb_rd_data;
  endtask
  task automatic stat_read(logic [15:0] a, output logic [31:0] d);
    @(negedge clk); stat_rd_en = 1; stat_rd_addr = a;
    @(negedge clk); stat_rd_en = 0; d = stat_rd_data;
  endtask

  function automatic int sum(int unsigned v [NR]);
    int s = 0;
    for (int r = 0; r < NR; r++) s += int'(v[r]);
    return s;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int n_black, n_expect, t0;
    eth_rx_tdata = '0; eth_rx_tkeep = '0; eth_rx_tlast = '0; eth_rx_tvalid = '0; eth_rx_drop = '0;
    host_rx_tdata = '0; host_rx_tkeep = '0; host_rx_tlast = 0; host_rx_tvalid = 0; host_rx_tdest = '0; host_rx_tuser = '0;
    lb_wr_en = 0; lb_rd_en = 0; lb_wr_addr = '0; lb_rd_addr = '0; lb_wr_data = '0;
    host_core_reset = '1; host_poke = '0; host_evict = '0; core_i_req = '0; core_i_addr = '0;
    stat_rd_en = 0; stat_rd_addr = '0;
    for (int i = 0; i < NRULE; i++) rule[i] = {8'd10 + 8'(i % 5), 16'($urandom)};
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    // ---- 1: boot ----
    for (int r = 0; r < NR; r++) load_rules(r);
    repeat (20) @(posedge clk);
    @(negedge clk); host_core_reset = '0;
    t0 = cyc;
    while (1) begin
      bit all;
      all = 1;
      for (int r = 0; r < NR; r++) all &= c_boot[r];
      if (all) break;
      @(posedge clk);
    end
    repeat (20) @(posedge clk);
    $display("cores booted after %0d cycles", cyc - t0);
    for (int r = 0; r < NR; r++) begin
      lb_read(16 + r, d); check(d == 16, $sformatf("RPU %0d slot count at LB %0d", r, d));
    end
    // ---- 2: traffic on all inputs at once ----
    fork
      for (int n = 0; n < NPK; n++) eth_send(0, 64 + $urandom % 1437, $urandom % 4 == 0);
      for (int n = 0; n < NPK; n++) eth_send(1, 64 + $urandom % 1437, $urandom % 4 == 0);
      for (int n = 0; n < NPK; n++) eth_send(2, 64 + $urandom % 1437, $urandom % 4 == 0);
    join
    // ---- 3: only the slow RPU 0 enabled: its slots run out ----
    repeat (2000) @(posedge clk);
    lb_write(0, 32'h1);
    lb_stall = 0;
    for (int n = 0; n < NBURST; n++) eth_send(n % 2, 64, 0);
    check(lb_stall > 100, $sformatf("load balancer stall not seen (%0d cycles)", lb_stall));
    lb_write(0, 32'hffff);
    // ---- drain ----
    n_black = 0;
    foreach (pk[s]) if (pk[s].black) n_black++;
    n_expect = pk.num() - n_black;
    t0 = cyc;
    while (n_out < n_expect && cyc - t0 < 200000) @(posedge clk);
    repeat (3000) @(posedge clk);
    // ---- checks ----
    $display("sent %0d (blacklisted %0d) out %0d via-loopback-port %0d", pk.num(), n_black, n_out, n_out_lpbk_port);
    $display("drops %0d lpbk out %0d in %0d no-grant %0d bc sent %0d notified %0d lb-stall %0d backpressure %0d multi-input %0d",
             sum(c_drop), sum(c_lo), sum(c_li), sum(c_ng), sum(c_bs), sum(c_bn), lb_stall, bp_cycles, multi_in);
    check(n_out == n_expect, $sformatf("%0d packets out, expected %0d", n_out, n_expect));
    check(sum(c_rx) == pk.num() + sum(c_lo), "cores saw a different number of packets");
    check(sum(c_drop) == n_black && n_black > 0, "firewall drops");
    check(sum(c_lo) > 0, "no loopback send happened");
    check(sum(c_li) == sum(c_lo), "loopback packets lost");
    check(sum(c_bs) > 0, "no broadcast sent");
    check(sum(c_bn) > 0, "no broadcast notification");
    check(bp_cycles > 0, "no output back-pressure");
    check(multi_in > 0, "inputs never active together");
    check(n_host_tx == 0, "unexpected packets to host memory");
    for (int r = 0; r < NR; r++) begin
      check(c_rx[r] > 0, $sformatf("RPU %0d received nothing", r));
      for (int k = 0; k < NR; k++)
        check(bc_copy[r][k] == c_lastbc[k], $sformatf("RPU %0d broadcast copy of sender %0d is %0d, expected %0d", r, k, bc_copy[r][k], c_lastbc[k]));
    end
    // LB got every slot back
    for (int r = 0; r < NR; r++) begin
      lb_read(16 + r, d); check(d == 16, $sformatf("RPU %0d has %0d free slots after drain", r, d));
    end
    // frame counters of the Ethernet receive links
    for (int i = 0; i < NE; i++) begin
      stat_read(16'(i * 8 + 2), d); check(d == sent[i], $sformatf("eth rx %0d frame counter %0d vs %0d", i, d, sent[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
