// tb_pkt_switch: self-checking test of pkt_switch in its two cluster roles.
//
// dut_dn: 2 wide (512-bit) inputs to 4 narrow (128-bit) outputs, as on the
// receive side; dut_up: 4 narrow inputs to 1 wide output, as on the
// transmit side. Random packets (1..300 bytes, random destinations, random
// output back-pressure) are sent; each received packet is compared byte by
// byte with the expected one from the same input (per input/output order is
// kept). Also checked: tlast/keep framing, that every packet arrives, that
// contention for one output happened, and that a lone 512-byte packet to a
// narrow output takes 32 beats (quarter-rate link).
module tb_pkt_switch;
  localparam int NPK = 120;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic byte pbyte(int src, int seq, int k);
    return byte'((src * 37 + seq * 11 + k * 7) & 8'hff);
  endfunction

  // ---------------- down-sizing switch ----------------
  logic [1:0][511:0] dn_sd; logic [1:0][63:0] dn_sk; logic [1:0] dn_sl, dn_sv, dn_sr;
  logic [1:0][3:0] dn_sdst; logic [1:0][7:0] dn_su;
  logic [3:0][127:0] dn_md; logic [3:0][15:0] dn_mk; logic [3:0] dn_ml, dn_mv, dn_mr;
  logic [3:0][3:0] dn_mdst; logic [3:0][7:0] dn_mu;

  pkt_switch #(.N_IN(2), .N_OUT(4), .IN_W(512), .OUT_W(128), .DEST_W(4), .USER_W(8), .DEST_SHIFT(0)) dut_dn (
    .clk, .rst, .s_tdata(dn_sd), .s_tkeep(dn_sk), .s_tlast(dn_sl), .s_tdest(dn_sdst), .s_tuser(dn_su),
    .s_tvalid(dn_sv), .s_tready(dn_sr), .m_tdata(dn_md), .m_tkeep(dn_mk), .m_tlast(dn_ml),
    .m_tdest(dn_mdst), .m_tuser(dn_mu), .m_tvalid(dn_mv), .m_tready(dn_mr));

  // ---------------- up-sizing switch ----------------
  logic [3:0][127:0] up_sd; logic [3:0][15:0] up_sk; logic [3:0] up_sl, up_sv, up_sr;
  logic [3:0][2:0] up_sdst; logic [3:0][7:0] up_su;
  logic [0:0][511:0] up_md; logic [0:0][63:0] up_mk; logic [0:0] up_ml, up_mv, up_mr;
  logic [0:0][2:0] up_mdst; logic [0:0][7:0] up_mu;

  pkt_switch #(.N_IN(4), .N_OUT(1), .IN_W(128), .OUT_W(512), .DEST_W(3), .USER_W(8), .DEST_SHIFT(0)) dut_up (
    .clk, .rst, .s_tdata(up_sd), .s_tkeep(up_sk), .s_tlast(up_sl), .s_tdest(up_sdst), .s_tuser(up_su),
    .s_tvalid(up_sv), .s_tready(up_sr), .m_tdata(up_md), .m_tkeep(up_mk), .m_tlast(up_ml),
    .m_tdest(up_mdst), .m_tuser(up_mu), .m_tvalid(up_mv), .m_tready(up_mr));

  typedef struct { int src; int seq; int len; int dst; } pkt_t;
  pkt_t exp_dn[4][$];
  pkt_t exp_up[$];
  int   got_dn = 0, got_up = 0, sent_dn = 0, sent_up = 0;
  int   contention = 0;

  // ---- generic driver for one input ----
  task automatic drive_dn(int i, int seq, int len, int dst);
    int k = 0;
    pkt_t p;
    p.src = i; p.seq = seq; p.len = len; p.dst = dst;
    exp_dn[dst].push_back(p);
    // inputs change after the falling edge; the handshake is decided from
    // the settled ready before the next rising edge
    while (k < len) begin
      @(negedge clk);
      for (int b = 0; b < 64; b++) begin
        dn_sd[i][b*8 +: 8] = (k + b < len) ? pbyte(i, seq, k + b) : 8'h00;
        dn_sk[i][b]        = (k + b < len);
      end
      dn_sl[i] = (k + 64 >= len); dn_sdst[i] = 4'(dst); dn_su[i] = {4'(i), 4'(seq)};
      dn_sv[i] = 1;
      #1;
      while (!dn_sr[i]) begin @(negedge clk); #1; end
      @(posedge clk);
      k += 64;
    end
    @(negedge clk);
    dn_sv[i] = 0;
    sent_dn++;
  endtask

  task automatic drive_up(int i, int seq, int len);
    int k = 0;
    pkt_t p;
    p.src = i; p.seq = seq; p.len = len; p.dst = 0;
    exp_up.push_back(p);
    // inputs change after the falling edge; the handshake is decided from
    // the settled ready before the next rising edge
    while (k < len) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        up_sd[i][b*8 +: 8] = (k + b < len) ? pbyte(i, seq, k + b) : 8'h00;
        up_sk[i][b]        = (k + b < len);
      end
      up_sl[i] = (k + 16 >= len); up_sdst[i] = 3'd0; up_su[i] = {4'(i), 4'(seq)};
      up_sv[i] = 1;
      #1;
      while (!up_sr[i]) begin @(negedge clk); #1; end
      @(posedge clk);
      k += 16;
    end
    @(negedge clk);
    up_sv[i] = 0;
    sent_up++;
  endtask

  // ---- monitors ----
  byte rx_dn [4][$];
  byte rx_up [$];

  // check a received packet against the oldest expected one from its source
  function automatic bit match_pkt(pkt_t p, byte got[$]);
    if (got.size() != p.len) return 0;
    for (int k = 0; k < p.len; k++) if (got[k] != pbyte(p.src, p.seq, k)) return 0;
    return 1;
  endfunction

  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < 4; o++) if (dn_mv[o] && dn_mr[o]) begin
      for (int b = 0; b < 16; b++) if (dn_mk[o][b]) rx_dn[o].push_back(byte'(dn_md[o][b*8 +: 8]));
      if (dn_ml[o]) begin
        check(dn_mdst[o] % 4 == 4'(o), "down: tdest routed to wrong output");
        begin
          int idx;
          idx = -1;
          for (int n = 0; n < exp_dn[o].size(); n++) if (exp_dn[o][n].src == int'(dn_mu[o][7:4])) begin idx = n; break; end
          check(idx >= 0, "down: packet from unexpected source");
          if (idx >= 0) begin
            check(match_pkt(exp_dn[o][idx], rx_dn[o]), $sformatf("down: data mismatch out %0d src %0d", o, exp_dn[o][idx].src));
            exp_dn[o].delete(idx);
          end
        end
        rx_dn[o].delete();
        got_dn++;
      end
    end
    if (up_mv[0] && up_mr[0]) begin
      for (int b = 0; b < 64; b++) if (up_mk[0][b]) rx_up.push_back(byte'(up_md[0][b*8 +: 8]));
      if (up_ml[0]) begin
        begin
          int idx;
          idx = -1;
          for (int n = 0; n < exp_up.size(); n++) if (exp_up[n].src == int'(up_mu[0][7:4])) begin idx = n; break; end
          check(idx >= 0, "up: packet from unexpected source");
          if (idx >= 0) begin
            check(match_pkt(exp_up[idx], rx_up), $sformatf("up: data mismatch src %0d", exp_up[idx].src));
            exp_up.delete(idx);
          end
        end
        rx_up.delete();
        got_up++;
      end
    end
    // both inputs of dut_dn want the same output while it serves one of them
    if (dut_dn.g_out[0].req == 2'b11) contention++;
  end

  always @(posedge clk) begin
    dn_mr <= 4'($urandom) | 4'($urandom);
    up_mr <= 1'($urandom) | 1'($urandom);
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dn_sv = 0; up_sv = 0; dn_sd = '0; dn_sk = '0; dn_sl = 0; dn_sdst = '0; dn_su = '0;
    up_sd = '0; up_sk = '0; up_sl = 0; up_sdst = '0; up_su = '0;
    repeat (5) @(posedge clk);
    rst = 0;
    fork
      for (int n = 0; n < NPK; n++) drive_dn(0, n, 1 + $urandom % 300, (n % 3 == 0) ? 0 : $urandom % 4);
      for (int n = 0; n < NPK; n++) drive_dn(1, n, 1 + $urandom % 300, (n % 3 == 0) ? 0 : $urandom % 4);
      for (int n = 0; n < NPK; n++) drive_up(0, n, 1 + $urandom % 300);
      for (int n = 0; n < NPK; n++) drive_up(1, n, 1 + $urandom % 300);
      for (int n = 0; n < NPK; n++) drive_up(2, n, 1 + $urandom % 300);
      for (int n = 0; n < NPK; n++) drive_up(3, n, 1 + $urandom % 300);
    join
    repeat (2000) @(posedge clk);
    check(got_dn == 2 * NPK, $sformatf("down: %0d of %0d packets arrived", got_dn, 2 * NPK));
    check(got_up == 4 * NPK, $sformatf("up: %0d of %0d packets arrived", got_up, 4 * NPK));
    check(contention > 0, "no output contention happened");

    // quarter-rate narrow link: 512-byte packet = 8 wide beats = 32 narrow beats
    begin
      int beats;
      beats = 0;
      force dn_mr = 4'hf;
      fork
        drive_dn(0, 99, 512, 2);
        begin
          while (!(dn_mv[2] && dn_ml[2])) begin
            @(posedge clk);
            if (dn_mv[2]) beats++;
          end
        end
      join
      @(posedge clk);
      check(beats == 32, $sformatf("512-byte packet took %0d narrow beats, expected 32", beats));
      release dn_mr;
    end
    repeat (50) @(posedge clk);
    check(exp_dn[0].size() + exp_dn[1].size() + exp_dn[2].size() + exp_dn[3].size() == 0, "down: packets missing");
    $display("contention cycles %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
