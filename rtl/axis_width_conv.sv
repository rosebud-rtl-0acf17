// axis_width_conv: packet stream width converter (IN_W -> OUT_W).
//
// Down-sizing (IN_W = R * OUT_W) holds one input beat and emits it as up to R
// narrow beats, lowest bytes first, stopping early at the end of a packet when
// the remaining byte lanes are empty. Up-sizing (OUT_W = R * IN_W) packs R
// narrow beats into one wide beat, or fewer at the end of a packet. Equal
// widths pass straight through. Byte keep is assumed contiguous from lane 0,
// as it is for packets. SIDE_W bits of side information (destination and
// user fields) travel with the beat; when packing, the first beat's side
// field is kept. One beat of buffering; full throughput on the narrow side.
// The switches of the paper do width conversion in their link FIFOs; this is
// the conversion stage used for that.
module axis_width_conv #(
  parameter int unsigned IN_W   = 512,
  parameter int unsigned OUT_W  = 128,
  parameter int unsigned SIDE_W = 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [IN_W-1:0]      s_tdata,
  input  logic [IN_W/8-1:0]    s_tkeep,
  input  logic                 s_tlast,
  input  logic [SIDE_W-1:0]    s_tside,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  output logic [OUT_W-1:0]     m_tdata,
  output logic [OUT_W/8-1:0]   m_tkeep,
  output logic                 m_tlast,
  output logic [SIDE_W-1:0]    m_tside,
  output logic                 m_tvalid,
  input  logic                 m_tready
);
  if (IN_W == OUT_W) begin : g_pass
    assign m_tdata  = s_tdata;
    assign m_tkeep  = s_tkeep;
    assign m_tlast  = s_tlast;
    assign m_tside  = s_tside;
    assign m_tvalid = s_tvalid;
    assign s_tready = m_tready;

  end else if (IN_W > OUT_W) begin : g_down
    localparam int unsigned R  = IN_W / OUT_W;
    localparam int unsigned IW = (R > 1) ? $clog2(R) : 1;
    localparam int unsigned KB = OUT_W / 8;

    logic [IN_W-1:0]   buf_data;
    logic [IN_W/8-1:0] buf_keep;
    logic              buf_last, buf_valid;
    logic [SIDE_W-1:0] buf_side;
    logic [IW-1:0]     idx;
    logic              final_chunk;

    always_comb begin
      final_chunk = (idx == IW'(R-1));
      if (!final_chunk && buf_keep[(int'(idx)+1)*KB] == 1'b0) final_chunk = 1'b1;
    end

    assign m_tdata  = buf_data[idx*OUT_W +: OUT_W];
    assign m_tkeep  = buf_keep[idx*KB +: KB];
    assign m_tlast  = buf_last && final_chunk;
    assign m_tside  = buf_side;
    assign m_tvalid = buf_valid;
    assign s_tready = !buf_valid || (m_tready && final_chunk);

    always_ff @(posedge clk) begin
      if (rst) begin
        buf_valid <= 1'b0;
        idx       <= '0;
      end else begin
        if (buf_valid && m_tready && !final_chunk) idx <= idx + 1'b1;
        if (s_tvalid && s_tready) begin
          buf_valid <= 1'b1;
          buf_data  <= s_tdata;
          buf_keep  <= s_tkeep;
          buf_last  <= s_tlast;
          buf_side  <= s_tside;
          idx       <= '0;
        end else if (buf_valid && m_tready && final_chunk) begin
          buf_valid <= 1'b0;
        end
      end
    end

  end else begin : g_up
    localparam int unsigned R  = OUT_W / IN_W;
    localparam int unsigned IW = (R > 1) ? $clog2(R) : 1;
    localparam int unsigned KB = IN_W / 8;

    logic [OUT_W-1:0]   acc_data;
    logic [OUT_W/8-1:0] acc_keep;
    logic               acc_last, out_valid;
    logic [SIDE_W-1:0]  acc_side;
    logic [IW-1:0]      idx;
    logic               drain;

    assign drain    = out_valid && m_tready;
    assign s_tready = !out_valid || m_tready;
    assign m_tdata  = acc_data;
    assign m_tkeep  = acc_keep;
    assign m_tlast  = acc_last;
    assign m_tside  = acc_side;
    assign m_tvalid = out_valid;

    always_ff @(posedge clk) begin
      if (rst) begin
        out_valid <= 1'b0;
        idx       <= '0;
        acc_keep  <= '0;
      end else begin
        if (drain) begin
          out_valid <= 1'b0;
          acc_keep  <= '0;
        end
        if (s_tvalid && s_tready) begin
          if (idx == '0) begin
            acc_side <= s_tside;
            acc_keep <= {{(OUT_W/8-KB){1'b0}}, s_tkeep};
            acc_data <= {{(OUT_W-IN_W){1'b0}}, s_tdata};
          end else begin
            acc_keep[idx*KB +: KB]    <= s_tkeep;
            acc_data[idx*IN_W +: IN_W] <= s_tdata;
          end
          acc_last <= s_tlast;
          if (s_tlast || idx == IW'(R-1)) begin
            out_valid <= 1'b1;
            idx       <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
      end
    end
  end
endmodule
