// tb_stat_counters: self-checking test of the link statistics counters.
//
// Four monitored links see random traffic (valid, ready, last, keep) and
// random drop pulses; a reference model counts bytes, frames, drops and
// stall cycles. At the end every counter is read back over the register port
// (data one cycle after the read) and compared, including the upper half of
// the 64-bit byte counter after it has been pushed past 2^32 by a long run
// of full 64-byte beats.
module tb_stat_counters;
  localparam int NM = 4, KW = 64;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NM-1:0] mon_valid, mon_ready, mon_last, drop;
  logic [NM-1:0][KW-1:0] mon_keep;
  logic rd_en;
  logic [15:0] rd_addr;
  logic [31:0] rd_data;
  stat_counters #(.N_MON(NM), .KEEP_W(KW)) dut (.*);

  longint m_bytes [NM];
  int m_frames [NM], m_drops [NM], m_stalls [NM];

  always @(posedge clk) if (!rst)
    for (int i = 0; i < NM; i++) begin
      if (mon_valid[i] && mon_ready[i]) begin
        m_bytes[i] += $countones(mon_keep[i]);
        if (mon_last[i]) m_frames[i]++;
      end
      if (mon_valid[i] && !mon_ready[i]) m_stalls[i]++;
      if (drop[i]) m_drops[i]++;
    end

  task automatic rd(int link, int field, output logic [31:0] d);
    @(negedge clk);
    rd_en = 1; rd_addr = 16'(link * 8 + field);
    @(posedge clk);
    @(negedge clk);
    rd_en = 0;
    d = rd_data;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    mon_valid = 0; mon_ready = 0; mon_last = 0; drop = 0; mon_keep = '0; rd_en = 0; rd_addr = 0;
    repeat (4) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      mon_valid = NM'($urandom); mon_ready = NM'($urandom); mon_last = NM'($urandom);
      drop = NM'($urandom % 16 == 0 ? $urandom : 0);
      for (int i = 0; i < NM; i++) mon_keep[i] = {$urandom, $urandom} >> ($urandom % 64);
    end
    // link 2: enough full beats to pass 2^32 bytes would take too long, so
    // check the carry into the upper word by forcing the low word near wrap
    @(negedge clk);
    mon_valid = 0; drop = 0;
    force dut.bytes[2][31:0] = 32'hffff_ffc0;
    @(negedge clk);
    release dut.bytes[2][31:0];
    m_bytes[2] = longint'(32'hffff_ffc0) + (m_bytes[2] & 64'hffff_ffff_0000_0000);
    mon_valid = 4'b0100; mon_ready = 4'b0100; mon_keep[2] = '1; mon_last = 0;
    repeat (3) @(negedge clk);
    mon_valid = 0;
    @(negedge clk);
    for (int i = 0; i < NM; i++) begin
      rd(i, 0, d); check(d == m_bytes[i][31:0], $sformatf("link %0d bytes low %0d vs %0d", i, d, m_bytes[i][31:0]));
      rd(i, 1, d); check(d == m_bytes[i][63:32], $sformatf("link %0d bytes high", i));
      rd(i, 2, d); check(d == m_frames[i], $sformatf("link %0d frames", i));
      rd(i, 3, d); check(d == m_drops[i], $sformatf("link %0d drops", i));
      rd(i, 4, d); check(d == m_stalls[i], $sformatf("link %0d stalls", i));
    end
    check(m_bytes[2][63:32] != 0, "upper byte word not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
