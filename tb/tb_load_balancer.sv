// tb_load_balancer: self-checking test of the round-robin load balancer.
//
// A small instance (4 RPUs, 3 interfaces, 64-bit data, 4 slots) is used.
// The bench plays the RPU side: it announces slot counts with CM_SLOT_CFG,
// receives labelled packets, and returns each slot with CM_SLOT_FREE some
// random time after the packet ended. Checked: every label names an enabled
// RPU and a slot that was free (no slot is ever handed out twice), packet
// data passes unchanged, assignments are spread evenly (round robin), the LB
// stalls when no slot is free and resumes after frees, CM_SLOT_REQ grants
// the lowest free slot (or 0 when none), the enable mask and flush work,
// the host read-back of slot and assignment counts matches, and one packet
// is labelled per cycle at most.
module tb_load_balancer;
  import rosebud_pkg::*;
  localparam int NR = 4, NI = 3, DW = 64, MS = 4;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NI-1:0][DW-1:0] s_tdata; logic [NI-1:0][DW/8-1:0] s_tkeep;
  logic [NI-1:0] s_tlast, s_tvalid, s_tready;
  logic [NI-1:0][DW-1:0] m_tdata; logic [NI-1:0][DW/8-1:0] m_tkeep;
  logic [NI-1:0] m_tlast, m_tvalid, m_tready;
  logic [NI-1:0][1:0] m_tdest; logic [NI-1:0][RX_USER_W-1:0] m_tuser;
  logic [NR-1:0] ctrl_valid, ctrl_ready, grant_valid;
  ctrl_msg_t [NR-1:0] ctrl_msg;
  slot_grant_t grant;
  logic host_wr_en = 0, host_rd_en = 0, host_rd_valid;
  logic [29:0] host_wr_addr = '0, host_rd_addr = '0;
  logic [31:0] host_wr_data = '0, host_rd_data;

  load_balancer #(.N_RPU(NR), .N_IF(NI), .DATA_W(DW), .MAX_SLOTS(MS)) dut (.*);

  // ---------------- model ----------------
  bit   busy [NR][MS+1];      // slot handed out and not yet freed
  int   nslots [NR];
  bit   en [NR];
  int   assigned [NR];
  int   stall_cycles = 0, labelled = 0;
  ctrl_msg_t cq [NR][$];      // pending control messages per RPU
  int   pend_rpu[$], pend_tag[$], pend_time[$];
  bit   auto_free = 1;

  // control message drivers
  always_comb
    for (int r = 0; r < NR; r++) begin
      ctrl_valid[r] = cq[r].size() > 0;
      ctrl_msg[r]   = (cq[r].size() > 0) ? cq[r][0] : '0;
    end
  always @(posedge clk) if (!rst)
    for (int r = 0; r < NR; r++) if (ctrl_valid[r] && ctrl_ready[r]) void'(cq[r].pop_front());

  // packet sources
  int seqno [NI];
  task automatic send_pkt(int i, int beats);
    // inputs change just after the falling edge; the handshake is decided
    // from the settled ready before the next rising edge
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      s_tdata[i] = {16'(i), 16'(seqno[i]), 32'(b)};
      s_tkeep[i] = '1; s_tlast[i] = (b == beats - 1); s_tvalid[i] = 1;
      #1;
      while (!s_tready[i]) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    s_tvalid[i] = 0;
    seqno[i]++;
  endtask

  // sink: check labels at the first beat, schedule the slot free after last
  bit in_pkt [NI];
  int rx_seq [NI];
  int cur_r [NI], cur_t [NI], beat_no [NI];
  always @(posedge clk) if (!rst) begin
    m_tready <= NI'($urandom) | NI'($urandom);
    for (int i = 0; i < NI; i++) begin
      if (s_tvalid[i] && !s_tready[i]) stall_cycles++;
      if (m_tvalid[i] && m_tready[i]) begin
        rx_user_t u;
        int r, t;
        u = m_tuser[i];
        check(m_tdata[i] == {16'(i), 16'(rx_seq[i]), 32'(beat_no[i])}, "data changed in LB");
        beat_no[i]++;
        if (!in_pkt[i]) begin
          r = int'(m_tdest[i]); t = int'(u.tag);
          check(u.typ == RX_PKT && int'(u.port) == i, "bad type/port label");
          check(en[r], $sformatf("packet sent to disabled RPU %0d", r));
          check(t >= 1 && t <= nslots[r], $sformatf("slot %0d out of range for RPU %0d", t, r));
          if (t >= 1 && t <= MS) begin
            check(!busy[r][t], $sformatf("slot %0d of RPU %0d handed out twice", t, r));
            busy[r][t] = 1;
          end
          assigned[r]++;
          labelled++;
          cur_r[i] = r; cur_t[i] = t;
          in_pkt[i] = 1;
        end
        if (m_tlast[i]) begin
          in_pkt[i] = 0; beat_no[i] = 0; rx_seq[i]++;
          pend_rpu.push_back(cur_r[i]); pend_tag.push_back(cur_t[i]);
          pend_time.push_back(int'($time / 4) + 5 + int'($urandom % 40));
        end
      end
    end
    // free slots whose time has come
    if (auto_free && pend_rpu.size() > 0 && pend_time[0] <= int'($time / 4)) begin
      ctrl_msg_t c;
      c.typ = CM_SLOT_FREE; c.data = 8'(pend_tag[0]);
      busy[pend_rpu[0]][pend_tag[0]] = 0;
      cq[pend_rpu[0]].push_back(c);
      void'(pend_rpu.pop_front()); void'(pend_tag.pop_front()); void'(pend_time.pop_front());
    end
  end

  task automatic host_write(int word, logic [31:0] d);
    host_wr_en <= 1; host_wr_addr <= 30'(word * 4); host_wr_data <= d;
    @(posedge clk); host_wr_en <= 0;
  endtask
  task automatic host_read(int word, output logic [31:0] d);
    host_rd_en <= 1; host_rd_addr <= 30'(word * 4);
    @(posedge clk); host_rd_en <= 0;
    @(posedge clk); d = host_rd_data;
  endtask
  task automatic send_ctrl(int r, ctrl_type_e typ, int data);
    ctrl_msg_t c;
    c.typ = typ; c.data = 8'(data);
    cq[r].push_back(c);
    while (cq[r].size() > 0) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    s_tvalid = 0; s_tdata = '0; s_tkeep = '0; s_tlast = 0; m_tready = 0;
    for (int r = 0; r < NR; r++) begin en[r] = 1; nslots[r] = 0; end
    repeat (4) @(posedge clk);
    rst = 0;
    @(posedge clk);
    // nothing is sent before slots exist
    fork send_pkt(0, 2); join_none
    repeat (20) @(posedge clk);
    check(labelled == 0, "packet labelled before any RPU had slots");
    // boot: every RPU announces its slot count
    for (int r = 0; r < NR; r++) begin nslots[r] = MS; send_ctrl(r, CM_SLOT_CFG, MS); end
    repeat (3) @(posedge clk);
    host_read(2, d); check(d == NR, "RPU count read-back");
    // traffic with random frees
    fork
      begin wait (s_tvalid[0] == 0); for (int n = 0; n < 60; n++) send_pkt(0, 1 + $urandom % 4); end
      for (int n = 0; n < 60; n++) send_pkt(1, 1 + $urandom % 4);
      for (int n = 0; n < 60; n++) send_pkt(2, 1 + $urandom % 4);
    join
    repeat (200) @(posedge clk);
    check(labelled == 181, $sformatf("labelled %0d packets, expected 181", labelled));
    begin
      int mn = 1000, mx = 0;
      for (int r = 0; r < NR; r++) begin mn = (assigned[r] < mn) ? assigned[r] : mn; mx = (assigned[r] > mx) ? assigned[r] : mx; end
      check(mx - mn <= 2, $sformatf("uneven spread %0d..%0d", mn, mx));
    end
    for (int r = 0; r < NR; r++) begin
      host_read(16 + r, d); check(d == MS, $sformatf("free slots of RPU %0d read %0d", r, d));
      host_read(48 + r, d); check(d == assigned[r], $sformatf("assigned count RPU %0d", r));
    end

    // stall: stop freeing, fill all 16 slots, the 17th packet must wait
    auto_free = 0;
    for (int n = 0; n < NR * MS; n++) send_pkt(n % NI, 1);
    stall_cycles = 0;
    fork send_pkt(0, 1); join_none
    repeat (30) @(posedge clk);
    check(stall_cycles >= 25, "LB did not stall with all slots busy");
    check(labelled == 181 + NR * MS, "packet labelled while no slot was free");
    host_read(16, d); check(d == 0, "RPU 0 should show 0 free slots");
    // slot request with no free slot -> slot 0
    cq[1].push_back('{typ: CM_SLOT_REQ, data: 8'd3});
    @(posedge clk); while (!grant_valid[1]) @(posedge clk);
    check(grant.slot == 0 && grant.rpu == 3, "grant with no free slot must be slot 0");
    auto_free = 1;
    wait (s_tvalid[0] == 0);
    repeat (100) @(posedge clk);
    check(labelled == 182 + NR * MS, "LB did not resume after frees");

    // slot request: lowest free slot of RPU 2, given to requester 1
    auto_free = 0;
    cq[1].push_back('{typ: CM_SLOT_REQ, data: 8'd2});
    @(posedge clk); while (!grant_valid[1]) @(posedge clk);
    check(grant.rpu == 2 && grant.slot == 1, $sformatf("grant rpu %0d slot %0d, expected 2/1", grant.rpu, grant.slot));
    host_read(18, d); check(d == MS - 1, "granted slot not taken from free set");
    send_ctrl(2, CM_SLOT_FREE, 1);
    auto_free = 1;

    // enable mask: RPU 2 off
    host_write(0, 32'hb); en[2] = 0;
    host_read(0, d); check(d == 32'hb, "enable mask read-back");
    begin
      int before_cnt;
      before_cnt = assigned[2];
      for (int n = 0; n < 24; n++) send_pkt(n % NI, 2);
      repeat (100) @(posedge clk);
      check(assigned[2] == before_cnt, "disabled RPU received packets");
    end
    // flush RPU 3 and reconfigure it with 1 slot
    repeat (100) @(posedge clk);
    host_write(1, 32'h8);
    host_read(19, d); check(d == 0, "flush did not clear slots");
    nslots[3] = 1; send_ctrl(3, CM_SLOT_CFG, 1);
    host_read(19, d); check(d == 1, "slot config after flush");
    host_write(0, 32'hf); en[2] = 1;
    for (int n = 0; n < 24; n++) send_pkt(n % NI, 1);
    repeat (200) @(posedge clk);
    $display("labelled %0d stall cycles %0d", labelled, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // at most one new label per cycle
  always @(posedge clk) if (!rst) check($countones(dut.have_slot & ~$past(dut.have_slot)) <= 1, "two labels in one cycle");
endmodule
