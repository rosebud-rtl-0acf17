// rr_arbiter: round-robin arbiter.
//
// Combinationally picks, among the asserted req bits, the first one at or
// after the position following the last winner. `advance` (asserted by the
// user when the grant is consumed, e.g. at the end of a packet) moves the
// priority pointer past the current winner. grant_valid is low when no bit is
// requested. The round-robin policy is the default arbitration named for the
// switches; the pointer update rule is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N-1:0]                req,
  input  logic                        advance,
  output logic                        grant_valid,
  output logic [(N>1?$clog2(N):1)-1:0] grant_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;   // highest priority position

  always_comb begin
    grant_valid = 1'b0;
    grant_idx   = '0;
    for (int k = 0; k < int'(N); k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (!grant_valid && req[idx]) begin
        grant_valid = 1'b1;
        grant_idx   = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else if (advance && grant_valid)
      ptr <= (grant_idx == IW'(N-1)) ? '0 : grant_idx + 1'b1;
  end
endmodule
