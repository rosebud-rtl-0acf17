// tb_fw_ip_matcher: self-checking test of the firewall IP checker.
//
// A behavioural local memory (1-cycle read) holds 1050 random /24 rules, a
// few of them marked invalid. The bench loads them (LOAD, poll BUSY, read the
// rule count), measures the load time, then checks 600 source addresses
// against a reference model: exact rule hits, addresses that share only the
// first 9 bits with a rule, invalid rules, and random addresses. A MATCH
// read issued straight after the SRC_IP write must be granted exactly 3
// cycles after the write (1 capture cycle + the 2 compare cycles).
module tb_fw_ip_matcher;
  localparam int NR = 1050, AW = 1024;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic mmio_req, mmio_we, mmio_gnt, mmio_rvalid;
  logic [7:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic amem_en;
  logic [9:0] amem_addr;
  logic [127:0] amem_rdata;
  fw_ip_matcher #(.NUM_RULES(NR), .AMEM_WORDS(AW)) dut (.*);

  logic [127:0] amem [AW];
  always @(posedge clk) if (amem_en) amem_rdata <= amem[amem_addr];

  logic [23:0] rules [NR];
  bit          valid [NR];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic bit model(logic [31:0] ip);
    for (int i = 0; i < NR; i++) if (valid[i] && rules[i] == ip[31:8]) return 1;
    return 0;
  endfunction

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    mmio_req = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    #1;
    while (!mmio_gnt) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    mmio_req = 0;
  endtask

  // read; returns data and the cycle the request was granted
  task automatic rd(logic [7:0] a, output logic [31:0] d, output int gcyc);
    @(negedge clk);
    mmio_req = 1; mmio_we = 0; mmio_addr = a;
    #1;
    while (!mmio_gnt) begin @(negedge clk); #1; end
    gcyc = cyc;
    @(posedge clk);
    @(negedge clk);
    mmio_req = 0;
    d = mmio_rdata;
    check(mmio_rvalid, "read data not valid one cycle after grant");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int g, t0, hits = 0, near = 0;
    mmio_req = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0; amem_rdata = '0;
    for (int w = 0; w < AW; w++) amem[w] = '0;
    for (int i = 0; i < NR; i++) begin
      rules[i] = 24'($urandom);
      if (i % 7 == 0) rules[i][23:15] = 9'h155;   // many rules share a 9-bit prefix
      valid[i] = ($urandom % 50) != 0;
      amem[i / 4][32 * (i % 4) +: 32] = {valid[i], 7'd0, rules[i]};
    end
    repeat (4) @(posedge clk);
    rst = 0;
    // no rules loaded yet: nothing matches
    wr(8'h00, {rules[0], 8'h01});
    rd(8'h04, d, g); check(d == 0, "match before rules were loaded");
    // load
    t0 = cyc;
    wr(8'h08, NR);
    do rd(8'h0C, d, g); while (d != 0);
    $display("rule load took %0d cycles", cyc - t0);
    check(cyc - t0 <= 2 * ((NR + 3) / 4) + 10, "rule load slower than one word per two cycles");
    rd(8'h10, d, g); check(d == NR, $sformatf("rule count %0d", d));
    for (int n = 0; n < 600; n++) begin
      logic [31:0] ip;
      int k, tw;
      k = $urandom % NR;
      unique case (n % 4)
        0: ip = {rules[k], 8'($urandom)};
        1: ip = {9'h155, 23'($urandom)};
        2: ip = {rules[k][23:15], ~rules[k][14:0], 8'($urandom)};
        default: ip = $urandom;
      endcase
      wr(8'h00, ip);
      tw = cyc - 1;      // cycle of the granted write
      rd(8'h04, d, g);
      check(g - tw == 3, $sformatf("match ready %0d cycles after write, expected 3", g - tw));
      check(d[0] == model(ip), $sformatf("ip %h: match %0d, expected %0d", ip, d[0], model(ip)));
      if (model(ip)) hits++;
      if (n % 4 == 1 || n % 4 == 2) near++;
    end
    check(hits > 100 && hits < 500, $sformatf("hit mix not useful (%0d hits)", hits));
    $display("hits %0d of 600", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
