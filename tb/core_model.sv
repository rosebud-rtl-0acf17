// core_model: behavioural stand-in for an RPU's RISC-V core, running the
// packet-processing firmware as a sequence of data-bus transactions.
//
// It is a bench component, not RTL: it drives the RPU data bus (one request
// at a time, waiting for grant and read data like an in-order core with one
// outstanding load) and follows the firmware structure of the paper's
// examples: init (slot and header-slot setup, interrupt masks, slot count to
// the load balancer, accelerator rule load), then a loop that polls for a
// receive descriptor, processes the packet and sends a descriptor back.
// Processing, by FLAGS bit:
//   bit 0  firewall: read the source IP from the header copy in data memory
//          (bytes 26..29), write it to the checker, read MATCH; a match is
//          dropped (send with len 0), anything else is forwarded;
//   bit 1  loopback: every LPBK_EVERY-th packet from an Ethernet port is sent
//          to the next RPU (slot request, grant, loopback destination);
//          packets that arrive over loopback go out of Ethernet port 0;
//   bit 2  broadcast: every 8th packet writes the packet count into this
//          RPU's word of the broadcast region; delivered messages for the
//          enabled sub-region are popped from the notification FIFO;
//   bit 3  slow: waits SLOW_CYCLES after each receive (a heavier workload).
// Forwarding swaps Ethernet ports 0 and 1 and returns port 2 (host virtual
// interface) traffic to port 2.
module core_model
  import rosebud_pkg::*;
#(
  parameter int unsigned ID          = 0,
  parameter int unsigned N_RPU       = 16,
  parameter int unsigned N_SLOTS     = 16,
  parameter int unsigned SLOT_SIZE   = 16384,
  parameter int unsigned N_RULES     = 1050,
  parameter int unsigned FLAGS       = 1,
  parameter int unsigned LPBK_EVERY  = 4,
  parameter int unsigned SLOW_CYCLES = 200
) (
  input  logic      clk,
  input  logic      core_rst,
  input  logic      irq,
  output dbus_req_t dbus_req,
  input  dbus_rsp_t dbus_rsp
);
  int unsigned n_rx = 0, n_fwd = 0, n_drop = 0, n_lpbk_out = 0, n_lpbk_in = 0;
  int unsigned n_bc_sent = 0, n_bc_seen = 0, n_no_grant = 0, n_bad_len = 0;
  bit          booted = 0;
  logic [31:0] last_bc = '0;     // last value this core broadcast

  task automatic bus(bit we, logic [31:0] addr, logic [31:0] wdata, output logic [31:0] rdata);
    @(negedge clk);
    dbus_req = '{req: 1'b1, we: we, addr: addr, wdata: wdata, wstrb: 4'hf};
    #1;
    while (!dbus_rsp.gnt) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    dbus_req.req = 1'b0;
    rdata = '0;
    if (!we) begin
      #1;
      while (!dbus_rsp.rvalid) begin @(negedge clk); #1; end
      rdata = dbus_rsp.rdata;
    end
  endtask

  task automatic wr(logic [31:0] a, logic [31:0] d);
    logic [31:0] x;
    bus(1'b1, a, d, x);
  endtask
  task automatic rd(logic [31:0] a, output logic [31:0] d);
    bus(1'b0, a, 32'd0, d);
  endtask

  localparam logic [31:0] HDR_OFF = 32'h4000;   // header slots in DMEM

  initial begin
    logic [31:0] st, lo, da, w0, w1, ip, m, g;
    int unsigned since_bc;
    dbus_req = '0;
    since_bc = 0;
    @(negedge clk);
    while (core_rst) @(negedge clk);
    // ---- init ----
    wr(IO_INT_BASE + R_SLOT_BASE, 32'h0);
    wr(IO_INT_BASE + R_SLOT_SIZE, SLOT_SIZE);
    wr(IO_INT_BASE + R_HDR_BASE, HDR_OFF);
    wr(IO_INT_BASE + R_HDR_SIZE, 32'd128);
    wr(IO_INT_BASE + R_INT_MASK, 32'h30);
    if (FLAGS[2]) wr(IO_INT_BASE + R_BC_MASK, 32'h1);      // notify on offsets 0x000-0x0ff
    if (FLAGS[0]) begin
      wr(IO_EXT_BASE + 32'h08, N_RULES);
      do rd(IO_EXT_BASE + 32'h0C, st); while (st != 0);
    end
    wr(IO_INT_BASE + R_SLOT_CFG, N_SLOTS);
    booted = 1;
    // ---- main loop ----
    forever begin
      rd(IO_INT_BASE + R_STATUS, st);
      if (FLAGS[2] && st[3]) begin
        rd(IO_INT_BASE + R_BC_NOTIF, m);
        if (m[31]) n_bc_seen++;
      end
      if (st[0]) begin
        logic [2:0]  port, oport;
        logic [7:0]  tag;
        logic [15:0] len;
        bit          drop, lpbk;
        rd(IO_INT_BASE + R_RECV_LOW, lo);
        rd(IO_INT_BASE + R_RECV_DATA, da);
        wr(IO_INT_BASE + R_RECV_REL, 0);
        n_rx++;
        port = lo[26:24]; tag = lo[23:16]; len = lo[15:0];
        if (len == 0) n_bad_len++;
        if (FLAGS[3]) repeat (SLOW_CYCLES) @(negedge clk);
        drop = 0; lpbk = 0;
        oport = (port == PORT_ETH0) ? PORT_ETH1 : (port == PORT_ETH1) ? PORT_ETH0 : port;
        if (port == PORT_LOOPBACK) begin
          oport = PORT_ETH0;
          n_lpbk_in++;
        end else if (FLAGS[0] && len >= 30) begin
          rd(DMEM_BASE + HDR_OFF + (32'(tag) - 1) * 128 + 24, w0);
          rd(DMEM_BASE + HDR_OFF + (32'(tag) - 1) * 128 + 28, w1);
          // bytes 26..29 in network order
          ip = {w0[23:16], w0[31:24], w1[7:0], w1[15:8]};
          wr(IO_EXT_BASE + 32'h00, ip);
          rd(IO_EXT_BASE + 32'h04, m);
          drop = m[0];
        end
        if (!drop && FLAGS[1] && port != PORT_LOOPBACK && (n_rx % LPBK_EVERY) == 0) begin
          wr(IO_INT_BASE + R_SLOT_REQ, (ID + 1) % N_RPU);
          do rd(IO_INT_BASE + R_SLOT_GRANT, g); while (!g[31]);
          if (g[7:0] != 0) begin
            wr(IO_INT_BASE + R_LPBK_DEST, {16'd0, g[7:0], g[15:8]});
            lpbk = 1;
          end else n_no_grant++;
        end
        if (drop) begin
          wr(IO_INT_BASE + R_SEND_LOW, {5'd0, port, tag, 16'd0});
          n_drop++;
        end else begin
          wr(IO_INT_BASE + R_SEND_LOW, {5'd0, lpbk ? PORT_LOOPBACK : oport, tag, len});
          wr(IO_INT_BASE + R_SEND_DATA, da);
          if (lpbk) n_lpbk_out++; else n_fwd++;
        end
        wr(IO_INT_BASE + R_SEND_GO, 0);
        if (FLAGS[2]) begin
          since_bc++;
          if (since_bc == 8) begin
            since_bc = 0;
            wr(DMEM_BASE + BC_OFFSET + 4 * ID, n_rx);
            last_bc = n_rx;
            n_bc_sent++;
          end
        end
      end
    end
  end
endmodule
