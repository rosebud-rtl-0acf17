// rpu_mem: the memory subsystem of one RPU.
//
// Four memories, all 128-bit words with byte enables:
//  * IMEM (instructions) and DMEM (data, stack, packet-header copies and the
//    broadcast region): small block RAMs read in one cycle. Port A belongs to
//    the core alone; port B to the interconnect's DMA engine (boot loading,
//    header copies and broadcast messages).
//  * PMEM (packet slots and scratch pad): large and pipelined, read latency
//    PMEM_LAT. Port A is shared between the core and the DMA engine with the
//    core first (the core touches packet memory sparsely); the DMA request is
//    granted in any cycle the core does not use the port. Port B is the
//    accelerators' own.
//  * AMEM (accelerator local memory, e.g. lookup tables): both ports belong to
//    the accelerators at run time; the DMA engine takes port B while it loads
//    the memory (boot, accelerators idle) and has priority there.
// The core-side ports are 32 bit; the byte address selects the 32-bit lane.
// Read data of the core ports comes with rvalid, in request order.
// The split into these memories and the port assignment follow the paper
// (Fig. 3 and Sec. 4.1); PMEM = 1 MB (8 blocks of 128 KB) and DMEM = 32 KB
// follow the paper's firmware; IMEM and AMEM sizes and PMEM_LAT are assumed.
module rpu_mem #(
  parameter int unsigned IMEM_BYTES = 32768,
  parameter int unsigned DMEM_BYTES = 32768,
  parameter int unsigned PMEM_BYTES = 1048576,
  parameter int unsigned AMEM_BYTES = 16384,
  parameter int unsigned PMEM_LAT   = 2
) (
  input  logic                               clk,
  input  logic                               rst,
  // core instruction port
  input  logic                               i_req,
  input  logic [$clog2(IMEM_BYTES)-1:0]      i_addr,
  output logic [31:0]                        i_rdata,
  output logic                               i_rvalid,
  // core data-memory port
  input  logic                               d_req,
  input  logic [3:0]                         d_we,
  input  logic [$clog2(DMEM_BYTES)-1:0]      d_addr,
  input  logic [31:0]                        d_wdata,
  output logic [31:0]                        d_rdata,
  output logic                               d_rvalid,
  // core packet-memory port (always granted)
  input  logic                               p_req,
  input  logic [3:0]                         p_we,
  input  logic [$clog2(PMEM_BYTES)-1:0]      p_addr,
  input  logic [31:0]                        p_wdata,
  output logic [31:0]                        p_rdata,
  output logic                               p_rvalid,
  // DMA: IMEM port B (write)
  input  logic                               dma_i_en,
  input  logic [15:0]                        dma_i_we,
  input  logic [$clog2(IMEM_BYTES/16)-1:0]   dma_i_addr,
  input  logic [127:0]                       dma_i_wdata,
  // DMA: DMEM port B
  input  logic                               dma_d_en,
  input  logic [15:0]                        dma_d_we,
  input  logic [$clog2(DMEM_BYTES/16)-1:0]   dma_d_addr,
  input  logic [127:0]                       dma_d_wdata,
  output logic [127:0]                       dma_d_rdata,
  // DMA: PMEM port A, shared with the core
  input  logic                               dma_p_req,
  input  logic [15:0]                        dma_p_we,
  input  logic [$clog2(PMEM_BYTES/16)-1:0]   dma_p_addr,
  input  logic [127:0]                       dma_p_wdata,
  output logic                               dma_p_gnt,
  output logic [127:0]                       dma_p_rdata,
  output logic                               dma_p_rvalid,
  // DMA: AMEM port B (boot-time loading)
  input  logic                               dma_a_en,
  input  logic [15:0]                        dma_a_we,
  input  logic [$clog2(AMEM_BYTES/16)-1:0]   dma_a_addr,
  input  logic [127:0]                       dma_a_wdata,
  // accelerator: PMEM port B
  input  logic                               acc_p_en,
  input  logic [15:0]                        acc_p_we,
  input  logic [$clog2(PMEM_BYTES/16)-1:0]   acc_p_addr,
  input  logic [127:0]                       acc_p_wdata,
  output logic [127:0]                       acc_p_rdata,
  // accelerator: AMEM ports A and B
  input  logic                               acc_a_en,
  input  logic [15:0]                        acc_a_we,
  input  logic [$clog2(AMEM_BYTES/16)-1:0]   acc_a_addr,
  input  logic [127:0]                       acc_a_wdata,
  output logic [127:0]                       acc_a_rdata,
  input  logic                               acc_b_en,
  input  logic [15:0]                        acc_b_we,
  input  logic [$clog2(AMEM_BYTES/16)-1:0]   acc_b_addr,
  input  logic [127:0]                       acc_b_wdata,
  output logic [127:0]                       acc_b_rdata
);
  localparam int unsigned IW = $clog2(IMEM_BYTES/16);
  localparam int unsigned DW = $clog2(DMEM_BYTES/16);
  localparam int unsigned PW = $clog2(PMEM_BYTES/16);

  // 32-bit lane helpers
  function automatic logic [15:0] lane_we(logic [3:0] we, logic [1:0] lane);
    return 16'(we) << (lane * 4);
  endfunction
  function automatic logic [127:0] lane_data(logic [31:0] d);
    return {4{d}};
  endfunction

  // ---------------- IMEM ----------------
  logic [127:0] imem_a_rdata, imem_b_rdata;
  logic [1:0]   i_lane_q;

  tdp_ram #(.W(128), .WORDS(IMEM_BYTES/16), .LAT(1)) u_imem (
    .clk,
    .a_en(i_req), .a_we('0), .a_addr(i_addr[$clog2(IMEM_BYTES)-1:4]), .a_wdata('0), .a_rdata(imem_a_rdata),
    .b_en(dma_i_en), .b_we(dma_i_we), .b_addr(dma_i_addr), .b_wdata(dma_i_wdata), .b_rdata(imem_b_rdata)
  );

  // ---------------- DMEM ----------------
  logic [127:0] dmem_a_rdata;
  logic [1:0]   d_lane_q;

  tdp_ram #(.W(128), .WORDS(DMEM_BYTES/16), .LAT(1)) u_dmem (
    .clk,
    .a_en(d_req), .a_we(lane_we(d_we, d_addr[3:2])), .a_addr(d_addr[$clog2(DMEM_BYTES)-1:4]),
    .a_wdata(lane_data(d_wdata)), .a_rdata(dmem_a_rdata),
    .b_en(dma_d_en), .b_we(dma_d_we), .b_addr(dma_d_addr), .b_wdata(dma_d_wdata), .b_rdata(dma_d_rdata)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      i_rvalid <= 1'b0;
      d_rvalid <= 1'b0;
    end else begin
      i_rvalid <= i_req;
      d_rvalid <= d_req && d_we == '0;
    end
    i_lane_q <= i_addr[3:2];
    d_lane_q <= d_addr[3:2];
  end
  assign i_rdata = imem_a_rdata[i_lane_q*32 +: 32];
  assign d_rdata = dmem_a_rdata[d_lane_q*32 +: 32];

  // ---------------- PMEM ----------------
  logic          pa_en;
  logic [15:0]   pa_we;
  logic [PW-1:0] pa_addr;
  logic [127:0]  pa_wdata, pa_rdata;
  // read-owner pipeline: {valid, core, lane}
  logic [PMEM_LAT-1:0]      own_v, own_core;
  logic [PMEM_LAT-1:0][1:0] own_lane;

  assign dma_p_gnt = dma_p_req && !p_req;
  always_comb begin
    if (p_req) begin
      pa_en    = 1'b1;
      pa_we    = lane_we(p_we, p_addr[3:2]);
      pa_addr  = p_addr[$clog2(PMEM_BYTES)-1:4];
      pa_wdata = lane_data(p_wdata);
    end else begin
      pa_en    = dma_p_req;
      pa_we    = dma_p_we;
      pa_addr  = dma_p_addr;
      pa_wdata = dma_p_wdata;
    end
  end

  tdp_ram #(.W(128), .WORDS(PMEM_BYTES/16), .LAT(PMEM_LAT)) u_pmem (
    .clk,
    .a_en(pa_en), .a_we(pa_we), .a_addr(pa_addr), .a_wdata(pa_wdata), .a_rdata(pa_rdata),
    .b_en(acc_p_en), .b_we(acc_p_we), .b_addr(acc_p_addr), .b_wdata(acc_p_wdata), .b_rdata(acc_p_rdata)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      own_v <= '0;
    end else begin
      own_v[0]    <= pa_en && pa_we == '0;
      own_core[0] <= p_req;
      own_lane[0] <= p_addr[3:2];
      for (int s = 1; s < int'(PMEM_LAT); s++) begin
        own_v[s]    <= own_v[s-1];
        own_core[s] <= own_core[s-1];
        own_lane[s] <= own_lane[s-1];
      end
    end
  end
  assign p_rvalid     = own_v[PMEM_LAT-1] &&  own_core[PMEM_LAT-1];
  assign dma_p_rvalid = own_v[PMEM_LAT-1] && !own_core[PMEM_LAT-1];
  assign p_rdata      = pa_rdata[own_lane[PMEM_LAT-1]*32 +: 32];
  assign dma_p_rdata  = pa_rdata;

  // ---------------- AMEM ----------------
  logic          ab_en;
  logic [15:0]   ab_we;
  logic [$clog2(AMEM_BYTES/16)-1:0] ab_addr;
  logic [127:0]  ab_wdata;

  assign ab_en    = dma_a_en ? 1'b1        : acc_b_en;
  assign ab_we    = dma_a_en ? dma_a_we    : acc_b_we;
  assign ab_addr  = dma_a_en ? dma_a_addr  : acc_b_addr;
  assign ab_wdata = dma_a_en ? dma_a_wdata : acc_b_wdata;

  tdp_ram #(.W(128), .WORDS(AMEM_BYTES/16), .LAT(1)) u_amem (
    .clk,
    .a_en(acc_a_en), .a_we(acc_a_we), .a_addr(acc_a_addr), .a_wdata(acc_a_wdata), .a_rdata(acc_a_rdata),
    .b_en(ab_en), .b_we(ab_we), .b_addr(ab_addr), .b_wdata(ab_wdata), .b_rdata(acc_b_rdata)
  );

  // the core never waits for packet memory
  a_core_first: assert property (@(posedge clk) disable iff (rst) p_req |-> !dma_p_gnt);
endmodule
