// tdp_ram: true dual-port RAM with byte enables and a fixed read latency.
//
// Two independent ports, each with enable, byte write enables and address.
// A read (en with we == 0) returns data LAT cycles later (LAT >= 1); the
// extra LAT-1 cycles model a pipelined high-latency memory such as the
// UltraRAM used for packet memory, LAT = 1 models a block RAM. Writes take
// effect at the clock edge. Read-during-write on the same address returns
// the old data. Used for the instruction, data, packet and accelerator
// memories of an RPU.
module tdp_ram #(
  parameter int unsigned W     = 128,
  parameter int unsigned WORDS = 1024,
  parameter int unsigned LAT   = 1
) (
  input  logic                       clk,
  input  logic                       a_en,
  input  logic [W/8-1:0]             a_we,
  input  logic [$clog2(WORDS)-1:0]   a_addr,
  input  logic [W-1:0]               a_wdata,
  output logic [W-1:0]               a_rdata,
  input  logic                       b_en,
  input  logic [W/8-1:0]             b_we,
  input  logic [$clog2(WORDS)-1:0]   b_addr,
  input  logic [W-1:0]               b_wdata,
  output logic [W-1:0]               b_rdata
);
  logic [W-1:0] mem [WORDS];
  logic [W-1:0] a_pipe [LAT];
  logic [W-1:0] b_pipe [LAT];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_pipe[0] <= mem[a_addr];
      for (int i = 0; i < int'(W/8); i++)
        if (a_we[i]) mem[a_addr][i*8 +: 8] <= a_wdata[i*8 +: 8];
    end
    if (b_en) begin
      b_pipe[0] <= mem[b_addr];
      for (int i = 0; i < int'(W/8); i++)
        if (b_we[i]) mem[b_addr][i*8 +: 8] <= b_wdata[i*8 +: 8];
    end
    for (int s = 1; s < int'(LAT); s++) begin
      a_pipe[s] <= a_pipe[s-1];
      b_pipe[s] <= b_pipe[s-1];
    end
  end

  assign a_rdata = a_pipe[LAT-1];
  assign b_rdata = b_pipe[LAT-1];
endmodule
