// stat_counters: host-readable traffic counters for a set of packet links.
//
// For each of N_MON monitored links it counts transferred bytes (64 bit, from
// the byte keep of every accepted beat), frames (beats with tlast accepted),
// drops (pulses on drop[i]) and stalled cycles (valid high while ready is
// low). The host reads one 32-bit word per request: rd_addr = {link, field},
// field 0/1 = bytes low/high, 2 = frames, 3 = drops, 4 = stalls; data one
// cycle later. The set of counters follows the paper; the read layout is this
// design's own.
module stat_counters #(
  parameter int unsigned N_MON  = 4,
  parameter int unsigned KEEP_W = 64
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic [N_MON-1:0]              mon_valid,
  input  logic [N_MON-1:0]              mon_ready,
  input  logic [N_MON-1:0]              mon_last,
  input  logic [N_MON-1:0][KEEP_W-1:0]  mon_keep,
  input  logic [N_MON-1:0]              drop,
  input  logic                          rd_en,
  input  logic [15:0]                   rd_addr,
  output logic [31:0]                   rd_data
);
  logic [N_MON-1:0][63:0] bytes;
  logic [N_MON-1:0][31:0] frames, drops, stalls;

  function automatic logic [63:0] popcnt(logic [KEEP_W-1:0] k);
    popcnt = '0;
    for (int b = 0; b < int'(KEEP_W); b++) popcnt += 64'(k[b]);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      bytes  <= '0;
      frames <= '0;
      drops  <= '0;
      stalls <= '0;
    end else begin
      for (int i = 0; i < int'(N_MON); i++) begin
        if (mon_valid[i] && mon_ready[i]) begin
          bytes[i] <= bytes[i] + popcnt(mon_keep[i]);
          if (mon_last[i]) frames[i] <= frames[i] + 1;
        end
        if (mon_valid[i] && !mon_ready[i]) stalls[i] <= stalls[i] + 1;
        if (drop[i]) drops[i] <= drops[i] + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data <= '0;
      for (int i = 0; i < int'(N_MON); i++) begin
        if (rd_addr[15:3] == 13'(i)) begin
          unique case (rd_addr[2:0])
            3'd0: rd_data <= bytes[i][31:0];
            3'd1: rd_data <= bytes[i][63:32];
            3'd2: rd_data <= frames[i];
            3'd3: rd_data <= drops[i];
            3'd4: rd_data <= stalls[i];
            default: rd_data <= '0;
          endcase
        end
      end
    end
  end
endmodule
