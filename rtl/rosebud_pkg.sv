// rosebud_pkg: constants and types shared by the Rosebud RTL.
//
// The framework moves whole packets on AXI-stream-like links (data, byte
// keep, last, a destination field and a user field) and moves control as
// short messages. This package fixes the field encodings used on those links,
// the packet descriptor handed to the RPU core, the core-visible address map
// of an RPU and the control-message formats between RPU interconnects and the
// load balancer. Link widths (512/128 bit), 16 RPUs in 4 clusters, 32 slots
// of 16 KB, 128-byte header slots and the 16-entry broadcast FIFO follow the
// paper; the encodings and the address map are this design's own choices.
package rosebud_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned TAG_W      = 8;    // slot number (1..MAX_SLOTS), 0 = none
  localparam int unsigned PORT_W     = 3;    // egress/ingress port number
  localparam int unsigned LEN_W      = 16;   // packet length in bytes
  localparam int unsigned RPU_ID_W   = 8;    // RPU index in control messages

  // Port numbers carried in descriptors (firewall code swaps 0 and 1,
  // Pigasus code sends matches to port 2).
  localparam logic [PORT_W-1:0] PORT_ETH0     = 3'd0;
  localparam logic [PORT_W-1:0] PORT_ETH1     = 3'd1;
  localparam logic [PORT_W-1:0] PORT_VETH     = 3'd2;  // host virtual Ethernet
  localparam logic [PORT_W-1:0] PORT_HOST     = 3'd3;  // host DRAM
  localparam logic [PORT_W-1:0] PORT_LOOPBACK = 3'd4;
  localparam int unsigned N_TX_PORTS = 5;

  // ---------------- receive-side user field ----------------
  // tuser of a packet travelling towards an RPU.
  typedef enum logic [1:0] {
    RX_PKT   = 2'd0,   // packet for slot `tag`
    RX_MEMWR = 2'd1    // host memory write: first 16 bytes = address header
  } rx_type_e;

  typedef struct packed {
    rx_type_e              typ;
    logic [PORT_W-1:0]     port;  // ingress port
    logic [TAG_W-1:0]      tag;   // slot
  } rx_user_t;
  localparam int unsigned RX_USER_W = $bits(rx_user_t);

  // ---------------- descriptor ----------------
  typedef struct packed {
    logic [PORT_W-1:0] port;
    logic [TAG_W-1:0]  tag;
    logic [LEN_W-1:0]  len;
    logic [31:0]       data;   // core address of the first packet byte
  } desc_t;

  // low descriptor word as the core reads and writes it
  function automatic logic [31:0] desc_low(desc_t d);
    return {5'd0, d.port, d.tag, d.len};
  endfunction

  // ---------------- RPU address map (core view) ----------------
  localparam logic [31:0] IMEM_BASE   = 32'h0000_0000;
  localparam logic [31:0] IO_INT_BASE = 32'h0004_0000;  // interconnect registers
  localparam logic [31:0] IO_EXT_BASE = 32'h0005_0000;  // accelerator registers
  localparam logic [31:0] DMEM_BASE   = 32'h0080_0000;
  localparam logic [31:0] PMEM_BASE   = 32'h0100_0000;
  localparam logic [31:0] AMEM_BASE   = 32'h0200_0000;  // accelerator local memory (DMA only)

  // broadcast region inside DMEM (offsets within DMEM)
  localparam logic [31:0] BC_OFFSET   = 32'h0000_3000;
  localparam int unsigned BC_BYTES    = 4096;
  localparam int unsigned BC_ADDR_W   = 12;               // byte offset in region

  // interconnect register offsets
  localparam logic [7:0] R_RECV_LOW    = 8'h00;  // R
  localparam logic [7:0] R_RECV_DATA   = 8'h04;  // R
  localparam logic [7:0] R_RECV_REL    = 8'h08;  // W: pop receive descriptor
  localparam logic [7:0] R_STATUS      = 8'h0C;  // R
  localparam logic [7:0] R_SEND_LOW    = 8'h10;  // W
  localparam logic [7:0] R_SEND_DATA   = 8'h14;  // W
  localparam logic [7:0] R_SEND_GO     = 8'h18;  // W: push send descriptor
  localparam logic [7:0] R_LPBK_DEST   = 8'h1C;  // W: {dest_rpu, dest_slot}
  localparam logic [7:0] R_SLOT_CFG    = 8'h20;  // W: slot count -> LB
  localparam logic [7:0] R_SLOT_BASE   = 8'h24;  // W: PMEM byte offset of slot 1
  localparam logic [7:0] R_SLOT_SIZE   = 8'h28;  // W
  localparam logic [7:0] R_HDR_BASE    = 8'h2C;  // W: DMEM byte offset of header slot 1
  localparam logic [7:0] R_HDR_SIZE    = 8'h30;  // W
  localparam logic [7:0] R_INT_MASK    = 8'h34;  // W/R
  localparam logic [7:0] R_INT_STAT    = 8'h38;  // R, W1C
  localparam logic [7:0] R_BC_MASK     = 8'h3C;  // W/R: notification enable per 256-byte sub-region
  localparam logic [7:0] R_SLOT_REQ    = 8'h40;  // W: ask LB for a slot of RPU n
  localparam logic [7:0] R_SLOT_GRANT  = 8'h44;  // R: {valid, rpu, slot}, pops
  localparam logic [7:0] R_BC_NOTIF    = 8'h48;  // R: {valid, offset}, pops
  localparam logic [7:0] R_CORE_STAT   = 8'h50;  // W/R, host readable
  localparam logic [7:0] R_DEBUG_L     = 8'h58;  // W, host readable
  localparam logic [7:0] R_DEBUG_H     = 8'h5C;  // W, host readable

  // interrupt bits (set_masks(0x30) enables evict and poke)
  localparam int unsigned INT_BC    = 0;
  localparam int unsigned INT_EVICT = 4;
  localparam int unsigned INT_POKE  = 5;

  // ---------------- control messages, interconnect <-> LB ----------------
  typedef enum logic [1:0] {
    CM_SLOT_CFG  = 2'd0,  // data = number of slots
    CM_SLOT_FREE = 2'd1,  // data = freed slot
    CM_SLOT_REQ  = 2'd2   // data = RPU whose slot is wanted
  } ctrl_type_e;

  typedef struct packed {
    ctrl_type_e       typ;
    logic [7:0]       data;
  } ctrl_msg_t;

  typedef struct packed {
    logic [RPU_ID_W-1:0] rpu;
    logic [TAG_W-1:0]    slot;   // 0 = no slot free
  } slot_grant_t;

  // ---------------- broadcast message ----------------
  typedef struct packed {
    logic [BC_ADDR_W-1:0] addr;   // byte offset in the broadcast region (word aligned)
    logic [3:0]           strb;
    logic [31:0]          data;
  } bc_msg_t;

  // ---------------- core data bus ----------------
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
  } dbus_req_t;

  typedef struct packed {
    logic        gnt;     // request accepted this cycle
    logic        rvalid;  // read data valid (one per accepted read, in order)
    logic [31:0] rdata;
  } dbus_rsp_t;

endpackage
