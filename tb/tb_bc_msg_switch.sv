// tb_bc_msg_switch: self-checking test of the broadcast message fabric.
//
// 16 sources. Checked: a lone message appears on the shared output exactly
// 2 cycles after it is offered (input register + output register); under
// full load one message leaves per cycle and every source is served exactly
// once every 16 cycles (round robin); messages of a source stay in order and
// arrive unchanged; nothing is lost or duplicated.
module tb_bc_msg_switch;
  import rosebud_pkg::*;
  localparam int NR = 16, PER_SRC = 40;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [NR-1:0] in_valid, in_ready;
  bc_msg_t [NR-1:0] in_msg;
  logic out_valid;
  bc_msg_t out_msg;
  logic [3:0] out_src;
  bc_msg_switch #(.N_RPU(NR)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic bc_msg_t mk(int src, int n);
    bc_msg_t m;
    m.addr = 12'((src * 64 + n * 4) % 4096);
    m.strb = 4'hf;
    m.data = {8'(src), 24'(n)};
    return m;
  endfunction

  int next_rx [NR];
  int last_cyc [NR];
  int total_rx = 0, gap_checks = 0;
  bit saturated = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    int s;
    s = int'(out_src);
    check(out_msg == mk(s, next_rx[s]), $sformatf("source %0d message %0d wrong or out of order", s, next_rx[s]));
    if (saturated && next_rx[s] > 2 && next_rx[s] < PER_SRC - 2) begin
      check(cyc - last_cyc[s] == NR, $sformatf("source %0d served after %0d cycles, expected %0d", s, cyc - last_cyc[s], NR));
      gap_checks++;
    end
    last_cyc[s] = cyc;
    next_rx[s]++;
    total_rx++;
  end

  task automatic send(int src, int n);
    @(negedge clk);
    in_msg[src] = mk(src, n); in_valid[src] = 1;
    #1;
    while (!in_ready[src]) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    in_valid[src] = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; in_msg = '0;
    repeat (4) @(posedge clk);
    rst = 0;
    // sparse latency: offered before edge t, visible after edge t+1
    begin
      int t0;
      @(negedge clk);
      in_msg[5] = mk(5, 0); in_valid[5] = 1;
      t0 = cyc;
      @(posedge clk); @(negedge clk); in_valid[5] = 0;
      while (!out_valid) @(negedge clk);
      check(cyc - t0 == 2, $sformatf("sparse latency %0d cycles, expected 2", cyc - t0));
      @(negedge clk);
    end
    // saturation: every source offers PER_SRC-1 more messages back to back
    @(negedge clk);
    saturated = 1;
    for (int s = 0; s < NR; s++) begin
      automatic int ss = s;
      fork
        begin
          for (int n = (ss == 5) ? 1 : 0; n < PER_SRC; n++) begin
            in_msg[ss] = mk(ss, n); in_valid[ss] = 1;
            #1;
            while (!in_ready[ss]) begin @(negedge clk); #1; end
            @(posedge clk); @(negedge clk);
          end
          in_valid[ss] = 0;
        end
      join_none
    end
    wait fork;
    repeat (40) @(posedge clk);
    check(total_rx == NR * PER_SRC, $sformatf("received %0d of %0d messages", total_rx, NR * PER_SRC));
    check(gap_checks > 100, "round-robin service interval not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one message per cycle when saturated
  int busy_cycles = 0;
  always @(posedge clk) if (!rst && out_valid) busy_cycles++;
endmodule
