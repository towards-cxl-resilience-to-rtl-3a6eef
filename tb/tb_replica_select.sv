// tb_replica_select: checks the Replica Group choice against a reference
// model written here, and checks the group's properties: NR distinct CNs,
// all in range, none equal to the requester, and the same group for every
// requester outside it.
//
// Interface and timing: the block is combinational; 3,000 random (line,
// requester) pairs are applied, one per 1 ns step. What is checked from the
// paper: N_r replicas that are other CNs and one group per line. The reference
// hash and the saver rule are my own choices, mirrored here.
module tb_replica_select;
  import recxl_pkg::*;

  localparam int unsigned NCN = 16;
  localparam int unsigned NR  = 3;

  line_addr_t line;
  cn_id_t     req;
  cn_id_t     reps [NR];
  rank_t      srank;
  int checks = 0, failures = 0;

  replica_select #(.NCN(NCN), .NR(NR)) dut (
    .line_addr(line), .req_cn(req), .replica_cn(reps), .saver_rank(srank));

  function automatic int ref_base(line_addr_t l);
    int f = 0;
    for (int i = 0; i < 6; i++) f ^= int'((l >> (8 * i)) & 44'hff);
    return f % NCN;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int b;
      int exp_rep [NR];
      line = {$urandom(), $urandom()};
      req  = cn_id_t'($urandom_range(0, NCN - 1));
      if (t < 16) begin line = 44'h123_4567_89ab; req = cn_id_t'(t); end
      #1;
      b = ref_base(line);
      for (int k = 0; k < NR; k++) begin
        exp_rep[k] = (b + k) % NCN;
        if (exp_rep[k] == int'(req)) exp_rep[k] = (b + NR) % NCN;
      end
      for (int k = 0; k < NR; k++) begin
        checks++;
        if (int'(reps[k]) != exp_rep[k] || int'(reps[k]) >= NCN || reps[k] == req) begin
          failures++;
          $display("FAIL line=%h req=%0d rank %0d: got %0d want %0d", line, req, k, reps[k], exp_rep[k]);
        end
        for (int m = 0; m < k; m++) begin
          checks++;
          if (reps[m] == reps[k]) begin failures++; $display("FAIL duplicate replica"); end
        end
      end
      checks++;
      if (int'(srank) != int'(line[7:0]) % NR) begin failures++; $display("FAIL saver rank"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
