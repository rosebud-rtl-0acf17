// pkt_switch: unidirectional non-blocking packet switch of the Rosebud packet
// distribution subsystem.
//
// Each of the N_IN incoming links has its own FIFO, so a link waiting for a
// busy output never blocks the others; the only arbitration happens when two
// inputs send to the same output, and it is round-robin, packet by packet
// (an output stays with one input from the first beat to tlast). Width
// conversion makes a wide link feed narrow per-RPU links and the reverse:
// when OUT_W > IN_W the conversion sits after each input FIFO, when
// OUT_W < IN_W it sits after each output's multiplexer, so each narrow output
// drains at its own pace. The output is chosen from the destination field as
// (tdest >> DEST_SHIFT) % N_OUT. The same module serves as the inter-cluster
// stage (wide to wide) and the per-cluster stage (wide to 4 narrow RPU links
// on receive, 4 narrow to wide on transmit); the paper gives 512 and 128 bit
// as the widest and narrowest links. FIFO depth is this design's choice.
// Latency: FIFO plus one cycle per conversion stage.
module pkt_switch #(
  parameter int unsigned N_IN       = 4,
  parameter int unsigned N_OUT      = 4,
  parameter int unsigned IN_W       = 512,
  parameter int unsigned OUT_W      = 512,
  parameter int unsigned DEST_W     = 4,
  parameter int unsigned USER_W     = 13,
  parameter int unsigned DEST_SHIFT = 0,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic [N_IN-1:0][IN_W-1:0]      s_tdata,
  input  logic [N_IN-1:0][IN_W/8-1:0]    s_tkeep,
  input  logic [N_IN-1:0]                s_tlast,
  input  logic [N_IN-1:0][DEST_W-1:0]    s_tdest,
  input  logic [N_IN-1:0][USER_W-1:0]    s_tuser,
  input  logic [N_IN-1:0]                s_tvalid,
  output logic [N_IN-1:0]                s_tready,
  output logic [N_OUT-1:0][OUT_W-1:0]    m_tdata,
  output logic [N_OUT-1:0][OUT_W/8-1:0]  m_tkeep,
  output logic [N_OUT-1:0]               m_tlast,
  output logic [N_OUT-1:0][DEST_W-1:0]   m_tdest,
  output logic [N_OUT-1:0][USER_W-1:0]   m_tuser,
  output logic [N_OUT-1:0]               m_tvalid,
  input  logic [N_OUT-1:0]               m_tready
);
  localparam int unsigned XW     = (IN_W > OUT_W) ? IN_W : OUT_W;  // crossbar width
  localparam int unsigned SIDE_W = DEST_W + USER_W;
  localparam int unsigned FW     = IN_W + IN_W/8 + 1 + SIDE_W;
  localparam int unsigned OI_W   = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned II_W   = (N_IN > 1) ? $clog2(N_IN) : 1;

  // ---------------- input side ----------------
  logic [N_IN-1:0][XW-1:0]     h_data;
  logic [N_IN-1:0][XW/8-1:0]   h_keep;
  logic [N_IN-1:0]             h_last, h_valid, h_ready;
  logic [N_IN-1:0][SIDE_W-1:0] h_side;
  logic [N_IN-1:0][OI_W-1:0]   h_route;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    logic [FW-1:0]     f_out;
    logic              f_valid, f_ready;
    logic [$clog2(FIFO_DEPTH):0] f_count;  // occupancy, not needed here

    sync_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .in_valid (s_tvalid[i]),
      .in_ready (s_tready[i]),
      .in_data  ({s_tdata[i], s_tkeep[i], s_tlast[i], s_tdest[i], s_tuser[i]}),
      .out_valid(f_valid),
      .out_ready(f_ready),
      .out_data (f_out),
      .count    (f_count)
    );

    axis_width_conv #(.IN_W(IN_W), .OUT_W(XW), .SIDE_W(SIDE_W)) u_up (
      .clk, .rst,
      .s_tdata (f_out[FW-1 -: IN_W]),
      .s_tkeep (f_out[FW-1-IN_W -: IN_W/8]),
      .s_tlast (f_out[SIDE_W]),
      .s_tside (f_out[SIDE_W-1:0]),
      .s_tvalid(f_valid),
      .s_tready(f_ready),
      .m_tdata (h_data[i]),
      .m_tkeep (h_keep[i]),
      .m_tlast (h_last[i]),
      .m_tside (h_side[i]),
      .m_tvalid(h_valid[i]),
      .m_tready(h_ready[i])
    );

    logic [DEST_W-1:0] dest;
    assign dest       = h_side[i][SIDE_W-1 -: DEST_W];
    assign h_route[i] = OI_W'((int'(dest) >> DEST_SHIFT) % N_OUT);
  end

  // ---------------- per-output arbitration ----------------
  logic [N_OUT-1:0][II_W-1:0] src;
  logic [N_OUT-1:0]           o_active;
  logic [N_OUT-1:0]           x_ready;
  logic [N_OUT-1:0][XW-1:0]   x_data;
  logic [N_OUT-1:0][XW/8-1:0] x_keep;
  logic [N_OUT-1:0]           x_last, x_valid;
  logic [N_OUT-1:0][SIDE_W-1:0] x_side;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    logic [N_IN-1:0] req;
    logic            locked;
    logic [II_W-1:0] lock_src, arb_idx;
    logic            arb_valid, xfer;

    always_comb begin
      for (int i = 0; i < int'(N_IN); i++)
        req[i] = h_valid[i] && (h_route[i] == OI_W'(o));
    end

    rr_arbiter #(.N(N_IN)) u_arb (
      .clk, .rst,
      .req        (req),
      .advance    (xfer && x_last[o]),
      .grant_valid(arb_valid),
      .grant_idx  (arb_idx)
    );

    assign src[o]      = locked ? lock_src : arb_idx;
    assign o_active[o] = locked || arb_valid;
    assign x_valid[o]  = o_active[o] && req[src[o]];
    assign x_data[o]   = h_data[src[o]];
    assign x_keep[o]   = h_keep[src[o]];
    assign x_last[o]   = h_last[src[o]];
    assign x_side[o]   = h_side[src[o]];
    assign xfer        = x_valid[o] && x_ready[o];

    always_ff @(posedge clk) begin
      if (rst) begin
        locked <= 1'b0;
      end else if (xfer) begin
        locked   <= !x_last[o];
        lock_src <= src[o];
      end
    end

    // a packet must not change output in the middle
    a_locked_route: assert property (@(posedge clk) disable iff (rst)
      (locked && h_valid[lock_src]) |-> h_route[lock_src] == OI_W'(o));

    axis_width_conv #(.IN_W(XW), .OUT_W(OUT_W), .SIDE_W(SIDE_W)) u_down (
      .clk, .rst,
      .s_tdata (x_data[o]),
      .s_tkeep (x_keep[o]),
      .s_tlast (x_last[o]),
      .s_tside (x_side[o]),
      .s_tvalid(x_valid[o]),
      .s_tready(x_ready[o]),
      .m_tdata (m_tdata[o]),
      .m_tkeep (m_tkeep[o]),
      .m_tlast (m_tlast[o]),
      .m_tside ({m_tdest[o], m_tuser[o]}),
      .m_tvalid(m_tvalid[o]),
      .m_tready(m_tready[o])
    );
  end

  // an input is popped by the output that currently serves it
  always_comb begin
    h_ready = '0;
    for (int o = 0; o < int'(N_OUT); o++)
      if (o_active[o] && x_ready[o] && h_route[src[o]] == OI_W'(o))
        h_ready[src[o]] = 1'b1;
  end

endmodule
