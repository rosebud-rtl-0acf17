// bc_msg_switch: the inter-RPU broadcast messaging fabric.
//
// Every RPU interconnect holds a FIFO of short messages (a write of up to 32
// bits into the broadcast region of its data memory). This block takes one
// message per cycle from the RPUs in round-robin order and presents it to all
// RPUs in the same cycle, so all copies of the region receive each write at
// exactly the same time and in the same order. With N_RPU cores contending,
// each core's FIFO advances once every N_RPU cycles. A register on each input
// and on the output stands for the partial-reconfiguration border registers
// (the paper counts 2 such registers in a core's message path).
// From the paper: broadcast semantics, simultaneous arrival, round-robin among
// cores. Message format and register placement are this design's choices.
module bc_msg_switch
  import rosebud_pkg::*;
#(
  parameter int unsigned N_RPU = 16
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [N_RPU-1:0]      in_valid,
  input  bc_msg_t [N_RPU-1:0]   in_msg,
  output logic [N_RPU-1:0]      in_ready,
  output logic                  out_valid,
  output bc_msg_t               out_msg,
  output logic [$clog2(N_RPU)-1:0] out_src
);
  localparam int unsigned RW = $clog2(N_RPU);

  logic [N_RPU-1:0]    r_valid;
  bc_msg_t [N_RPU-1:0] r_msg;
  logic                g_valid;
  logic [RW-1:0]       g_idx;

  rr_arbiter #(.N(N_RPU)) u_arb (
    .clk, .rst,
    .req(r_valid), .advance(1'b1),
    .grant_valid(g_valid), .grant_idx(g_idx)
  );

  always_comb begin
    for (int r = 0; r < int'(N_RPU); r++)
      in_ready[r] = !r_valid[r] || (g_valid && g_idx == RW'(r));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      r_valid   <= '0;
      out_valid <= 1'b0;
    end else begin
      for (int r = 0; r < int'(N_RPU); r++) begin
        if (in_valid[r] && in_ready[r]) begin
          r_valid[r] <= 1'b1;
          r_msg[r]   <= in_msg[r];
        end else if (g_valid && g_idx == RW'(r)) begin
          r_valid[r] <= 1'b0;
        end
      end
      out_valid <= g_valid;
      if (g_valid) begin
        out_msg <= r_msg[g_idx];
        out_src <= g_idx;
      end
    end
  end
endmodule
