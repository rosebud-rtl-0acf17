// rpu: one Reconfigurable Packet-processing Unit with its interconnect.
//
// Holds the RPU memory subsystem (rpu_mem), the interconnect/DMA engine
// (rpu_interconnect) and the accelerator (here the firewall IP checker,
// fw_ip_matcher), and decodes the core's data bus onto them. The RISC-V core
// itself is not part of this RTL: its instruction port (i_*) and data bus
// (dbus_req / dbus_rsp) are ports of this module, with core_rst telling it
// when to run. Data-bus address map (see rosebud_pkg): IMEM at 0 (fetch
// only), interconnect registers at IO_INT_BASE, accelerator registers at
// IO_EXT_BASE, DMEM at DMEM_BASE with the broadcast region at BC_OFFSET
// (writes there go to the broadcast FIFO, reads return the local copy),
// PMEM at PMEM_BASE. The bus takes one request at a time: dbus_rsp.gnt
// accepts it, and a read returns with dbus_rsp.rvalid (1 cycle for DMEM and
// registers, PMEM_LAT cycles for PMEM, longer for a blocking accelerator
// read); no new request is granted while a read is outstanding. Unmapped
// addresses read as 0. The accelerator's packet-memory port B and the second
// local-memory port are reserved for accelerators that stream packet data;
// the firewall checker does not use them.
// The structure follows the paper (Fig. 1, Fig. 3); the address map and bus
// protocol are this design's own.
module rpu
  import rosebud_pkg::*;
#(
  parameter int unsigned IMEM_BYTES    = 32768,
  parameter int unsigned DMEM_BYTES    = 32768,
  parameter int unsigned PMEM_BYTES    = 1048576,
  parameter int unsigned AMEM_BYTES    = 16384,
  parameter int unsigned PMEM_LAT      = 2,
  parameter int unsigned MAX_SLOTS     = 32,
  parameter int unsigned BC_FIFO_DEPTH = 16,
  parameter int unsigned LB_BEATS      = 4,
  parameter int unsigned NUM_RULES     = 1050
) (
  input  logic                clk,
  input  logic                rst,
  // packet links
  input  logic [127:0]        s_tdata,
  input  logic [15:0]         s_tkeep,
  input  logic                s_tlast,
  input  rx_user_t            s_tuser,
  input  logic                s_tvalid,
  output logic                s_tready,
  output logic [127:0]        m_tdata,
  output logic [15:0]         m_tkeep,
  output logic                m_tlast,
  output logic [PORT_W-1:0]   m_tdest,
  output logic                m_tvalid,
  input  logic                m_tready,
  // load balancer
  output logic                ctrl_valid,
  output ctrl_msg_t           ctrl_msg,
  input  logic                ctrl_ready,
  input  logic                grant_valid,
  input  slot_grant_t         grant,
  // broadcast messaging
  output logic                bc_out_valid,
  output bc_msg_t             bc_out_msg,
  input  logic                bc_out_ready,
  input  logic                bc_in_valid,
  input  bc_msg_t             bc_in_msg,
  // host control
  input  logic                host_core_reset,
  input  logic                host_poke,
  input  logic                host_evict,
  output logic [31:0]         core_status,
  output logic [63:0]         debug_out,
  output logic                drop_pulse,
  // RISC-V core
  output logic                core_rst,
  output logic                irq,
  input  logic                i_req,
  input  logic [31:0]         i_addr,
  output logic [31:0]         i_rdata,
  output logic                i_rvalid,
  input  dbus_req_t           dbus_req,
  output dbus_rsp_t           dbus_rsp
);
  localparam int unsigned AMW = AMEM_BYTES / 16;

  // ---------------- decode ----------------
  logic sel_dmem, sel_bcw, sel_pmem, sel_reg, sel_acc, sel_none;
  logic [31:0] dmem_off;
  assign dmem_off = dbus_req.addr - DMEM_BASE;

  always_comb begin
    sel_dmem = 1'b0; sel_bcw = 1'b0; sel_pmem = 1'b0;
    sel_reg  = 1'b0; sel_acc = 1'b0; sel_none = 1'b0;
    if (dbus_req.addr >= DMEM_BASE && dbus_req.addr < DMEM_BASE + DMEM_BYTES) begin
      if (dbus_req.we && dmem_off >= BC_OFFSET && dmem_off < BC_OFFSET + BC_BYTES) sel_bcw = 1'b1;
      else sel_dmem = 1'b1;
    end else if (dbus_req.addr >= PMEM_BASE && dbus_req.addr < PMEM_BASE + PMEM_BYTES)
      sel_pmem = 1'b1;
    else if (dbus_req.addr[31:16] == IO_INT_BASE[31:16]) sel_reg = 1'b1;
    else if (dbus_req.addr[31:16] == IO_EXT_BASE[31:16]) sel_acc = 1'b1;
    else sel_none = 1'b1;
  end

  logic pending;         // a read is outstanding
  logic req_ok;
  assign req_ok = dbus_req.req && !pending;

  // slave handshakes
  logic reg_gnt, reg_rvalid, acc_gnt, acc_rvalid, bcw_gnt, d_rvalid, p_rvalid;
  logic [31:0] reg_rdata, acc_rdata, d_rdata, p_rdata;
  logic none_rvalid;

  always_comb begin
    dbus_rsp.gnt = 1'b0;
    if (req_ok) begin
      if (sel_dmem || sel_pmem || sel_none) dbus_rsp.gnt = 1'b1;
      if (sel_reg)  dbus_rsp.gnt = reg_gnt;
      if (sel_acc)  dbus_rsp.gnt = acc_gnt;
      if (sel_bcw)  dbus_rsp.gnt = bcw_gnt;
    end
  end

  always_comb begin
    dbus_rsp.rvalid = d_rvalid || p_rvalid || reg_rvalid || acc_rvalid || none_rvalid;
    dbus_rsp.rdata  = '0;
    if (d_rvalid)   dbus_rsp.rdata = d_rdata;
    if (p_rvalid)   dbus_rsp.rdata = p_rdata;
    if (reg_rvalid) dbus_rsp.rdata = reg_rdata;
    if (acc_rvalid) dbus_rsp.rdata = acc_rdata;
  end

  assign core_rst = rst || host_core_reset;

  always_ff @(posedge clk) begin
    if (rst) begin
      pending     <= 1'b0;
      none_rvalid <= 1'b0;
    end else begin
      none_rvalid <= req_ok && sel_none && !dbus_req.we;
      if (dbus_rsp.gnt && !dbus_req.we) pending <= 1'b1;
      else if (dbus_rsp.rvalid)          pending <= 1'b0;
    end
  end

  // ---------------- memory subsystem ----------------
  logic                             dma_i_en, dma_d_en, dma_p_req, dma_p_gnt, dma_p_rvalid, dma_a_en;
  logic [15:0]                      dma_i_we, dma_d_we, dma_p_we, dma_a_we;
  logic [$clog2(IMEM_BYTES/16)-1:0] dma_i_addr;
  logic [$clog2(DMEM_BYTES/16)-1:0] dma_d_addr;
  logic [$clog2(PMEM_BYTES/16)-1:0] dma_p_addr;
  logic [$clog2(AMW)-1:0]           dma_a_addr;
  logic [127:0]                     dma_i_wdata, dma_d_wdata, dma_d_rdata, dma_p_wdata, dma_p_rdata, dma_a_wdata;
  logic                             acc_a_en;
  logic [$clog2(AMW)-1:0]           acc_a_addr;
  logic [127:0]                     acc_a_rdata, acc_b_rdata, acc_p_rdata;

  rpu_mem #(
    .IMEM_BYTES(IMEM_BYTES), .DMEM_BYTES(DMEM_BYTES), .PMEM_BYTES(PMEM_BYTES),
    .AMEM_BYTES(AMEM_BYTES), .PMEM_LAT(PMEM_LAT)
  ) u_mem (
    .clk, .rst,
    .i_req, .i_addr(i_addr[$clog2(IMEM_BYTES)-1:0]), .i_rdata, .i_rvalid,
    .d_req(req_ok && sel_dmem), .d_we(dbus_req.we ? dbus_req.wstrb : 4'h0),
    .d_addr(dmem_off[$clog2(DMEM_BYTES)-1:0]), .d_wdata(dbus_req.wdata), .d_rdata, .d_rvalid,
    .p_req(req_ok && sel_pmem), .p_we(dbus_req.we ? dbus_req.wstrb : 4'h0),
    .p_addr(dbus_req.addr[$clog2(PMEM_BYTES)-1:0]), .p_wdata(dbus_req.wdata), .p_rdata, .p_rvalid,
    .dma_i_en, .dma_i_we, .dma_i_addr, .dma_i_wdata,
    .dma_d_en, .dma_d_we, .dma_d_addr, .dma_d_wdata, .dma_d_rdata,
    .dma_p_req, .dma_p_we, .dma_p_addr, .dma_p_wdata, .dma_p_gnt, .dma_p_rdata, .dma_p_rvalid,
    .dma_a_en, .dma_a_we, .dma_a_addr, .dma_a_wdata,
    // packet-memory port B and local-memory port B: reserved for streaming accelerators
    .acc_p_en(1'b0), .acc_p_we('0), .acc_p_addr('0), .acc_p_wdata('0), .acc_p_rdata,
    .acc_a_en, .acc_a_we('0), .acc_a_addr, .acc_a_wdata('0), .acc_a_rdata,
    .acc_b_en(1'b0), .acc_b_we('0), .acc_b_addr('0), .acc_b_wdata('0), .acc_b_rdata
  );

  // ---------------- interconnect ----------------
  rpu_interconnect #(
    .IMEM_BYTES(IMEM_BYTES), .DMEM_BYTES(DMEM_BYTES), .PMEM_BYTES(PMEM_BYTES),
    .AMEM_BYTES(AMEM_BYTES), .MAX_SLOTS(MAX_SLOTS), .BC_FIFO_DEPTH(BC_FIFO_DEPTH),
    .LB_BEATS(LB_BEATS)
  ) u_ic (
    .clk, .rst,
    .s_tdata, .s_tkeep, .s_tlast, .s_tuser, .s_tvalid, .s_tready,
    .m_tdata, .m_tkeep, .m_tlast, .m_tdest, .m_tvalid, .m_tready,
    .dma_i_en, .dma_i_we, .dma_i_addr, .dma_i_wdata,
    .dma_d_en, .dma_d_we, .dma_d_addr, .dma_d_wdata,
    .dma_p_req, .dma_p_we, .dma_p_addr, .dma_p_wdata, .dma_p_gnt, .dma_p_rdata, .dma_p_rvalid,
    .dma_a_en, .dma_a_we, .dma_a_addr, .dma_a_wdata,
    .reg_req(req_ok && sel_reg), .reg_we(dbus_req.we), .reg_addr(dbus_req.addr[7:0]),
    .reg_wdata(dbus_req.wdata), .reg_gnt, .reg_rvalid, .reg_rdata,
    .bcw_req(req_ok && sel_bcw), .bcw_addr(BC_ADDR_W'(dmem_off - BC_OFFSET)),
    .bcw_wdata(dbus_req.wdata), .bcw_strb(dbus_req.wstrb), .bcw_gnt,
    .ctrl_valid, .ctrl_msg, .ctrl_ready, .grant_valid, .grant,
    .bc_out_valid, .bc_out_msg, .bc_out_ready, .bc_in_valid, .bc_in_msg,
    .host_poke, .host_evict, .core_status, .debug_out, .irq, .drop_pulse
  );

  // ---------------- accelerator ----------------
  fw_ip_matcher #(.NUM_RULES(NUM_RULES), .AMEM_WORDS(AMW)) u_acc (
    .clk, .rst,
    .mmio_req(req_ok && sel_acc), .mmio_we(dbus_req.we), .mmio_addr(dbus_req.addr[7:0]),
    .mmio_wdata(dbus_req.wdata), .mmio_gnt(acc_gnt), .mmio_rvalid(acc_rvalid), .mmio_rdata(acc_rdata),
    .amem_en(acc_a_en), .amem_addr(acc_a_addr), .amem_rdata(acc_a_rdata)
  );

  // one response per granted read
  a_one_rsp: assert property (@(posedge clk) disable iff (rst) dbus_rsp.rvalid |-> pending);
endmodule
