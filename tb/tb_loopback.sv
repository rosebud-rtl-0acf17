// tb_loopback: self-checking test of the loopback module.
//
// Packets made of one header beat ({slot, dest RPU} in bits [15:0]) and a
// random number of body beats are sent with random output back-pressure.
// Checked: the header beat is removed, the body arrives unchanged, tdest is
// the destination RPU, tuser is {packet, loopback port, slot}, and the body
// flows at one beat per cycle when the output is always ready.
module tb_loopback;
  import rosebud_pkg::*;
  localparam int DW = 128, NPK = 80;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [DW-1:0] s_tdata, m_tdata; logic [DW/8-1:0] s_tkeep, m_tkeep;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  logic [3:0] m_tdest; logic [RX_USER_W-1:0] m_tuser;
  loopback #(.DATA_W(DW), .DEST_W(4)) dut (.*);

  typedef struct { int dest; int slot; int beats; int seq; } pk_t;
  pk_t exp_q[$];
  int rx_beat = 0, rx_pk = 0;
  bit hold_ready = 0;

  always @(posedge clk) m_tready <= hold_ready ? 1'b1 : ($urandom % 3 != 0);

  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    rx_user_t u;
    u = m_tuser;
    check(exp_q.size() > 0, "unexpected output");
    if (exp_q.size() > 0) begin
      check(int'(m_tdest) == exp_q[0].dest, "wrong tdest");
      check(u.typ == RX_PKT && u.port == PORT_LOOPBACK && int'(u.tag) == exp_q[0].slot, "wrong tuser");
      check(m_tdata == {DW/32{32'(exp_q[0].seq * 256 + rx_beat)}}, "body data changed");
      check(m_tlast == (rx_beat == exp_q[0].beats - 1), "wrong tlast");
      rx_beat++;
      if (m_tlast) begin rx_beat = 0; rx_pk++; void'(exp_q.pop_front()); end
    end
  end

  task automatic beat(logic [DW-1:0] d, logic last);
    @(negedge clk);
    s_tdata = d; s_tkeep = '1; s_tlast = last; s_tvalid = 1;
    #1;
    while (!s_tready) begin @(negedge clk); #1; end
    @(posedge clk);
  endtask

  task automatic send(int dest, int slot, int beats, int seq);
    pk_t p;
    p.dest = dest; p.slot = slot; p.beats = beats; p.seq = seq;
    exp_q.push_back(p);
    beat(DW'({slot[7:0], dest[7:0]}), 1'b0);
    for (int b = 0; b < beats; b++) beat({DW/32{32'(seq * 256 + b)}}, b == beats - 1);
    @(negedge clk); s_tvalid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_tvalid = 0; s_tdata = '0; s_tkeep = '0; s_tlast = 0;
    repeat (4) @(posedge clk);
    rst = 0;
    for (int n = 0; n < NPK; n++) send($urandom % 16, 1 + $urandom % 32, 1 + $urandom % 12, n);
    repeat (100) @(posedge clk);
    check(rx_pk == NPK, $sformatf("%0d of %0d packets looped back", rx_pk, NPK));
    // rate: 20 body beats in 21 input cycles (header + body) with ready held
    hold_ready = 1;
    repeat (3) @(posedge clk);
    begin
      int t0, t1;
      t0 = $time;
      send(3, 7, 20, 999);
      t1 = $time;
      check((t1 - t0) / 4 <= 23, $sformatf("20-beat packet took %0d cycles to enter", (t1 - t0) / 4));
    end
    repeat (40) @(posedge clk);
    check(rx_pk == NPK + 1, "last packet missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
