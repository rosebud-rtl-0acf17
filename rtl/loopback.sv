// loopback: returns packets that one RPU sends to another RPU into the
// receive side of the packet distribution subsystem.
//
// An RPU sends such a packet to egress port PORT_LOOPBACK with one extra
// leading wide beat (the destination header): bits [7:0] hold the
// destination RPU and bits [15:8] the slot the load balancer granted in it.
// This module reads and drops that beat, then forwards the rest of the packet
// with tdest = destination RPU and tuser = {RX_PKT, PORT_LOOPBACK, slot}
// through a FIFO into the receive switch. The header costs one wide beat per
// packet, which is what limits loopback throughput for minimum-size packets.
// The paper gives the loopback path, the FIFO and the attached destination
// header; the header layout is this design's choice.
module loopback
  import rosebud_pkg::*;
#(
  parameter int unsigned DATA_W     = 512,
  parameter int unsigned DEST_W     = 4,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [DATA_W-1:0]      s_tdata,
  input  logic [DATA_W/8-1:0]    s_tkeep,
  input  logic                   s_tlast,
  input  logic                   s_tvalid,
  output logic                   s_tready,
  output logic [DATA_W-1:0]      m_tdata,
  output logic [DATA_W/8-1:0]    m_tkeep,
  output logic                   m_tlast,
  output logic [DEST_W-1:0]      m_tdest,
  output logic [RX_USER_W-1:0]   m_tuser,
  output logic                   m_tvalid,
  input  logic                   m_tready
);
  localparam int unsigned FW = DATA_W + DATA_W/8 + 1 + DEST_W + RX_USER_W;

  logic              in_body;     // header already consumed
  logic [DEST_W-1:0] dest;
  logic [TAG_W-1:0]  slot;
  logic              f_ready;
  logic [FW-1:0]     f_out;
  logic [$clog2(FIFO_DEPTH):0] f_count;  // occupancy, not needed here
  rx_user_t          u;

  assign u.typ  = RX_PKT;
  assign u.port = PORT_LOOPBACK;
  assign u.tag  = slot;

  // header beats are always accepted; body beats go to the FIFO
  assign s_tready = in_body ? f_ready : 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_body <= 1'b0;
    end else if (s_tvalid && s_tready) begin
      if (!in_body) begin
        dest    <= DEST_W'(s_tdata[7:0]);
        slot    <= s_tdata[15:8];
        in_body <= !s_tlast;
      end else if (s_tlast) begin
        in_body <= 1'b0;
      end
    end
  end

  sync_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .in_valid (s_tvalid && in_body),
    .in_ready (f_ready),
    .in_data  ({s_tdata, s_tkeep, s_tlast, dest, u}),
    .out_valid(m_tvalid),
    .out_ready(m_tready),
    .out_data (f_out),
    .count    (f_count)
  );
  assign {m_tdata, m_tkeep, m_tlast, m_tdest, m_tuser} = f_out;
endmodule
