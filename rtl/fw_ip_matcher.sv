// fw_ip_matcher: the blacklist IP checker accelerator of the firewall.
//
// Holds NUM_RULES blacklisted /24 prefixes (24-bit). The core writes a
// packet's source IP into SRC_IP; the accelerator first compares the top 9
// bits of the address with the top 9 bits of every rule (cycle 1) and then,
// for the rules that matched, the remaining 15 bits (cycle 2), and sets the
// MATCH flag. A read of MATCH issued before the result is ready is held
// (no grant) until it is, so firmware can read it right after the write.
//
// The rule list is loaded at run time: the host writes it into the
// accelerator's local memory (4 rules per 128-bit word, rule k in bits
// [32*(k%4) +: 32] of word k/4, bit 31 = valid, bits 23:0 = prefix), and
// the core writes the rule count to LOAD, which copies the rules into the
// matcher's registers at one 128-bit word (4 rules) every two cycles.
//
// MMIO (offsets in the accelerator page): 0x00 W SRC_IP; 0x04 R MATCH
// (bit 0); 0x08 W LOAD (rule count); 0x0C R BUSY (loading); 0x10 R rule
// count loaded.
// From the paper: 1050 rules, the 9-then-15-bit two-cycle check, SRC_IP at
// 0x00 and MATCH at 0x04. The paper generates the rules into the logic as
// constants; loading them from local memory is this design's choice, made
// because the original list is not part of this RTL.
module fw_ip_matcher #(
  parameter int unsigned NUM_RULES  = 1050,
  parameter int unsigned AMEM_WORDS = 1024
) (
  input  logic                          clk,
  input  logic                          rst,
  // MMIO from the core
  input  logic                          mmio_req,
  input  logic                          mmio_we,
  input  logic [7:0]                    mmio_addr,
  input  logic [31:0]                   mmio_wdata,
  output logic                          mmio_gnt,
  output logic                          mmio_rvalid,
  output logic [31:0]                   mmio_rdata,
  // accelerator local memory, read port
  output logic                          amem_en,
  output logic [$clog2(AMEM_WORDS)-1:0] amem_addr,
  input  logic [127:0]                  amem_rdata
);
  localparam int unsigned CW = $clog2(NUM_RULES + 1);

  logic [23:0]          rule [NUM_RULES];
  logic [NUM_RULES-1:0] rule_v;
  logic [CW-1:0]        n_rules;

  // ---------------- lookup pipeline ----------------
  logic                 s0_v, s1_v, res_v;
  logic [31:0]          ip0;
  logic [14:0]          low1;
  logic [NUM_RULES-1:0] hit9;
  logic                 match;

  logic wr_ip, rd_match;
  assign wr_ip    = mmio_req && mmio_we && mmio_addr == 8'h00;
  assign rd_match = mmio_req && !mmio_we && mmio_addr == 8'h04;

  always_ff @(posedge clk) begin
    if (rst) begin
      s0_v  <= 1'b0;
      s1_v  <= 1'b0;
      res_v <= 1'b0;
      match <= 1'b0;
    end else begin
      // stage 0: capture the address
      s0_v <= wr_ip;
      if (wr_ip) begin
        ip0   <= mmio_wdata;
        res_v <= 1'b0;
      end
      // stage 1: first 9 bits
      s1_v <= s0_v;
      if (s0_v) begin
        for (int i = 0; i < int'(NUM_RULES); i++)
          hit9[i] <= rule_v[i] && rule[i][23:15] == ip0[31:23];
        low1 <= ip0[22:8];
      end
      // stage 2: remaining 15 bits
      if (s1_v) begin
        logic m;
        m = 1'b0;
        for (int i = 0; i < int'(NUM_RULES); i++)
          m |= hit9[i] && rule[i][14:0] == low1;
        match <= m;
        res_v <= 1'b1;
      end
    end
  end

  // ---------------- rule loading ----------------
  logic                          loading, rd_pend;
  logic [CW-1:0]                 load_n;
  logic [$clog2(AMEM_WORDS)-1:0] word;
  logic [$clog2(AMEM_WORDS)-1:0] rd_word;

  assign amem_en   = loading && !rd_pend;
  assign amem_addr = word;

  always_ff @(posedge clk) begin
    if (rst) begin
      loading <= 1'b0;
      rd_pend <= 1'b0;
      rule_v  <= '0;
      n_rules <= '0;
    end else begin
      if (mmio_req && mmio_we && mmio_addr == 8'h08 && !loading) begin
        load_n  <= (mmio_wdata > NUM_RULES) ? CW'(NUM_RULES) : CW'(mmio_wdata);
        n_rules <= '0;
        rule_v  <= '0;
        word    <= '0;
        loading <= (mmio_wdata != 0);
      end
      if (amem_en) begin
        rd_pend <= 1'b1;
        rd_word <= word;
      end
      if (rd_pend) begin
        rd_pend <= 1'b0;
        for (int k = 0; k < 4; k++) begin
          int unsigned idx;
          idx = 32'(rd_word) * 4 + k;
          if (idx < 32'(load_n) && idx < NUM_RULES) begin
            rule[idx]   <= amem_rdata[32*k +: 24];
            rule_v[idx] <= amem_rdata[32*k + 31];
          end
        end
        if ((32'(rd_word) + 1) * 4 >= 32'(load_n)) begin
          loading <= 1'b0;
          n_rules <= load_n;
        end else begin
          word <= rd_word + 1'b1;
        end
      end
    end
  end

  // ---------------- MMIO ----------------
  assign mmio_gnt = mmio_req && (!rd_match || (res_v && !wr_ip));

  always_ff @(posedge clk) begin
    if (rst) begin
      mmio_rvalid <= 1'b0;
    end else begin
      mmio_rvalid <= mmio_gnt && !mmio_we;
      if (mmio_gnt && !mmio_we) begin
        unique case (mmio_addr)
          8'h04:   mmio_rdata <= 32'(match);
          8'h0C:   mmio_rdata <= 32'(loading);
          8'h10:   mmio_rdata <= 32'(n_rules);
          default: mmio_rdata <= '0;
        endcase
      end
    end
  end
endmodule
