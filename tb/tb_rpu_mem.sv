// tb_rpu_mem: self-checking test of the RPU memory subsystem.
//
// Small memories (IMEM/DMEM/AMEM 1 KB, PMEM 4 KB) are filled and read
// through every port against a byte-level reference model: DMA writes to
// IMEM/DMEM/PMEM/AMEM with random byte enables, core 32-bit reads and
// writes with random strobes, DMA 128-bit reads, accelerator PMEM port B and
// both AMEM ports. Checked latencies: IMEM/DMEM reads 1 cycle, PMEM reads
// PMEM_LAT = 2 cycles for core and DMA. Arbitration: while the core uses
// PMEM every cycle the DMA is never granted, and it is granted in the first
// cycle the core leaves the port idle; a boot-time DMA write to AMEM wins
// over an accelerator access in the same cycle.
module tb_rpu_mem;
  localparam int IB = 1024, DB = 1024, PB = 4096, AB = 1024, PL = 2;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic i_req, i_rvalid, d_req, d_rvalid, p_req, p_rvalid;
  logic [9:0] i_addr, d_addr; logic [11:0] p_addr;
  logic [31:0] i_rdata, d_wdata, d_rdata, p_wdata, p_rdata;
  logic [3:0] d_we, p_we;
  logic dma_i_en, dma_d_en, dma_p_req, dma_p_gnt, dma_p_rvalid, dma_a_en;
  logic [15:0] dma_i_we, dma_d_we, dma_p_we, dma_a_we;
  logic [5:0] dma_i_addr, dma_d_addr, dma_a_addr; logic [7:0] dma_p_addr;
  logic [127:0] dma_i_wdata, dma_d_wdata, dma_d_rdata, dma_p_wdata, dma_p_rdata, dma_a_wdata;
  logic acc_p_en, acc_a_en, acc_b_en;
  logic [15:0] acc_p_we, acc_a_we, acc_b_we;
  logic [7:0] acc_p_addr; logic [5:0] acc_a_addr, acc_b_addr;
  logic [127:0] acc_p_wdata, acc_p_rdata, acc_a_wdata, acc_a_rdata, acc_b_wdata, acc_b_rdata;

  rpu_mem #(.IMEM_BYTES(IB), .DMEM_BYTES(DB), .PMEM_BYTES(PB), .AMEM_BYTES(AB), .PMEM_LAT(PL)) dut (.*);


  function automatic logic [127:0] line(ref byte m [], input int a);
    logic [127:0] v;
    for (int b = 0; b < 16; b++) v[b*8 +: 8] = m[a * 16 + b];
    return v;
  endfunction
  function automatic logic [31:0] word(ref byte m [], input int a);
    logic [31:0] v;
    for (int b = 0; b < 4; b++) v[b*8 +: 8] = m[(a & ~3) + b];
    return v;
  endfunction
  function automatic void put_line(ref byte m [], input int a, input logic [15:0] we, input logic [127:0] d);
    for (int b = 0; b < 16; b++) if (we[b]) m[a * 16 + b] = byte'(d[b*8 +: 8]);
  endfunction
  function automatic void put_word(ref byte m [], input int a, input logic [3:0] we, input logic [31:0] d);
    for (int b = 0; b < 4; b++) if (we[b]) m[(a & ~3) + b] = byte'(d[b*8 +: 8]);
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic idle_all();
    i_req = 0; d_req = 0; p_req = 0; d_we = 0; p_we = 0;
    dma_i_en = 0; dma_d_en = 0; dma_p_req = 0; dma_a_en = 0;
    dma_i_we = 0; dma_d_we = 0; dma_p_we = 0; dma_a_we = 0;
    acc_p_en = 0; acc_a_en = 0; acc_b_en = 0; acc_p_we = 0; acc_a_we = 0; acc_b_we = 0;
  endtask

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte dmv [], imv [], pmv [], amv [];
  initial begin
    idle_all();
    i_addr = 0; d_addr = 0; p_addr = 0; d_wdata = 0; p_wdata = 0;
    dma_i_addr = 0; dma_d_addr = 0; dma_p_addr = 0; dma_a_addr = 0;
    dma_i_wdata = 0; dma_d_wdata = 0; dma_p_wdata = 0; dma_a_wdata = 0;
    acc_p_addr = 0; acc_a_addr = 0; acc_b_addr = 0; acc_p_wdata = 0; acc_a_wdata = 0; acc_b_wdata = 0;
    imv = new[IB]; dmv = new[DB]; pmv = new[PB]; amv = new[AB];
    repeat (4) @(posedge clk);
    rst = 0;

    // ---- DMA fills every line of every memory (full enables first) ----
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < PB / 16; a++) begin
        logic [15:0] we;
        logic [127:0] d;
        we = pass == 0 ? 16'hffff : 16'($urandom);
        @(negedge clk); idle_all();
        d = rnd128();
        if (a < IB / 16) begin dma_i_en = 1; dma_i_we = we; dma_i_addr = 6'(a); dma_i_wdata = d; put_line(imv, a, we, d); end
        if (a < DB / 16) begin dma_d_en = 1; dma_d_we = we; dma_d_addr = 6'(a); dma_d_wdata = ~d; put_line(dmv, a, we, ~d); end
        if (a < AB / 16) begin dma_a_en = 1; dma_a_we = we; dma_a_addr = 6'(a); dma_a_wdata = {d[63:0], d[127:64]}; put_line(amv, a, we, {d[63:0], d[127:64]}); end
        dma_p_req = 1; dma_p_we = we; dma_p_addr = 8'(a); dma_p_wdata = d ^ 128'h5a; put_line(pmv, a, we, d ^ 128'h5a);
        #1 check(dma_p_gnt, "DMA not granted on idle PMEM port");
        @(posedge clk);
      end
    end
    @(negedge clk); idle_all();

    // ---- core reads: IMEM, DMEM 1 cycle; PMEM 2 cycles ----
    for (int n = 0; n < 300; n++) begin
      int ai, ad, ap, t0;
      ai = ($urandom % IB) & ~3; ad = ($urandom % DB) & ~3; ap = ($urandom % PB) & ~3;
      @(negedge clk);
      i_req = 1; i_addr = 10'(ai); d_req = 1; d_we = 0; d_addr = 10'(ad); p_req = 1; p_we = 0; p_addr = 12'(ap);
      t0 = cyc;
      @(negedge clk); idle_all();
      check(i_rvalid && i_rdata == word(imv, ai), "IMEM read");
      check(d_rvalid && d_rdata == word(dmv, ad), "DMEM read");
      check(!p_rvalid, "PMEM read early");
      @(negedge clk);
      check(p_rvalid && p_rdata == word(pmv, ap) && cyc - t0 == PL, "PMEM read after 2 cycles");
    end

    // ---- core writes with random strobes, DMA reads them back ----
    for (int n = 0; n < 300; n++) begin
      int ad, ap;
      logic [3:0] sd, sp;
      logic [31:0] wd, wp;
      ad = ($urandom % DB) & ~3; ap = ($urandom % PB) & ~3;
      sd = 4'($urandom); sp = 4'($urandom); wd = $urandom; wp = $urandom;
      @(negedge clk);
      d_req = 1; d_we = sd; d_addr = 10'(ad); d_wdata = wd; put_word(dmv, ad, sd, wd);
      p_req = 1; p_we = sp; p_addr = 12'(ap); p_wdata = wp; put_word(pmv, ap, sp, wp);
      @(negedge clk); idle_all();
      dma_d_en = 1; dma_d_addr = 6'(ad / 16);
      dma_p_req = 1; dma_p_addr = 8'(ap / 16);
      #1 check(dma_p_gnt, "DMA read not granted");
      @(negedge clk); idle_all();
      check(dma_d_rdata == line(dmv, ad / 16), "DMA DMEM read");
      check(!dma_p_rvalid, "DMA PMEM read early");
      @(negedge clk);
      check(dma_p_rvalid && dma_p_rdata == line(pmv, ap / 16), "DMA PMEM read");
    end

    // ---- core first: core reads PMEM for 20 cycles while DMA waits ----
    begin
      int granted_at, started;
      granted_at = -1;
      @(negedge clk);
      started = cyc;
      dma_p_req = 1; dma_p_we = 0; dma_p_addr = 8'd17;
      for (int n = 0; n < 20; n++) begin
        p_req = 1; p_we = 0; p_addr = 12'(n * 4);
        #1 check(!dma_p_gnt, "DMA granted while core uses PMEM");
        @(negedge clk);
        if (n >= PL - 1) check(p_rvalid && p_rdata == word(pmv, (n - PL + 1) * 4), "core read during contention");
        check(!dma_p_rvalid, "DMA data while never granted");
      end
      p_req = 0;
      #1 check(dma_p_gnt, "DMA not granted when core went idle");
      @(negedge clk); dma_p_req = 0;
      @(negedge clk);
      // PMEM_LAT cycles after the grant
      check(dma_p_rvalid && dma_p_rdata == line(pmv, 17), "DMA read after contention");
    end

    // ---- accelerator ports ----
    for (int n = 0; n < 200; n++) begin
      int a, b;
      logic [127:0] d;
      logic [15:0] we;
      a = $urandom % (PB / 16); b = $urandom % (AB / 16); d = rnd128(); we = 16'($urandom);
      @(negedge clk); idle_all();
      acc_p_en = 1; acc_p_we = we; acc_p_addr = 8'(a); acc_p_wdata = d; put_line(pmv, a, we, d);
      acc_a_en = 1; acc_a_we = we; acc_a_addr = 6'(b); acc_a_wdata = d; put_line(amv, b, we, d);
      @(negedge clk); idle_all();
      acc_p_en = 1; acc_p_addr = 8'(a);
      acc_b_en = 1; acc_b_addr = 6'(b);
      @(negedge clk); idle_all();
      check(acc_b_rdata == line(amv, b), "accelerator AMEM port B read");
      @(negedge clk);
      check(acc_p_rdata == line(pmv, a), "accelerator PMEM port B read (2 cycles)");
    end
    // DMA write to AMEM beats an accelerator port-B write in the same cycle
    @(negedge clk); idle_all();
    dma_a_en = 1; dma_a_we = '1; dma_a_addr = 6'd3; dma_a_wdata = 128'h1111;
    acc_b_en = 1; acc_b_we = '1; acc_b_addr = 6'd3; acc_b_wdata = 128'h2222;
    @(negedge clk); idle_all();
    acc_a_en = 1; acc_a_addr = 6'd3;
    @(negedge clk); idle_all();
    check(acc_a_rdata == 128'h1111, "DMA should win AMEM port B");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
