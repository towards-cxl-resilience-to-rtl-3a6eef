// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters per cycle, combinationally from req. The
// priority pointer moves to the requester after the granted one whenever the
// grant is used (advance = 1), so every persistent requester is served within
// N grants. Used by the CN egress (cores and Logging Unit sharing the CXL
// port) and by each output of the switch. The paper does not describe any
// arbitration; round-robin is my own choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);

  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % N;
      if (req[idx]) begin
        gnt     = '0;
        gnt[idx] = 1'b1;
        gnt_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                ptr_q <= '0;
    else if (advance && |req)  ptr_q <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end

endmodule
