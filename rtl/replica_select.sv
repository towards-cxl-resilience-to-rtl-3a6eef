// replica_select: chooses the Replica Group of a cache line.
//
// Every remote store is logged in NR Logging Units on other CNs. The group is
// derived from the line address by a hash, so all updates of a line go to the
// same group (the paper specifies "a hash function on the line address" but not
// which one). This block is purely combinational.
//
// Hash (own choice): the 44-bit line address is XOR-folded into 8 bits and the
// result taken modulo NCN; that is the group base b. The group is the NR CNs
// b, b+1, ..., b+NR-1 (mod NCN). Because the paper sends replicas to *other*
// CNs, a requester that falls inside its own line's group is replaced by CN
// b+NR (mod NCN); so the group is the same for every requester outside it.
//
// saver_rank names the group member that copies this line's log entries to
// the memory nodes during the periodic dump (the paper has the members of a
// group split the work by physical address range): rank = line[7:0] mod NR.
//
// Interface: line_addr, req_cn in; replica_cn[0..NR-1] and saver_rank out.
// Requires NCN > NR.
module replica_select
  import recxl_pkg::*;
#(
  parameter int unsigned NCN = 16,
  parameter int unsigned NR  = 3
) (
  input  line_addr_t line_addr,
  input  cn_id_t     req_cn,
  output cn_id_t     replica_cn [NR],
  output rank_t      saver_rank
);

  logic [7:0]  fold;
  logic [7:0]  base;

  always_comb begin
    fold = '0;
    for (int i = 0; i < LINE_ADDR_W; i += 8) begin
      for (int b = 0; b < 8; b++) begin
        if (i + b < LINE_ADDR_W) fold[b] = fold[b] ^ line_addr[i+b];
      end
    end
    base = 8'(fold % 8'(NCN));
  end

  always_comb begin
    for (int k = 0; k < NR; k++) begin
      logic [8:0] m;
      m = (9'(base) + 9'(k)) % 9'(NCN);
      if (m[CN_ID_W-1:0] == req_cn)
        m = (9'(base) + 9'(NR)) % 9'(NCN);
      replica_cn[k] = cn_id_t'(m);
    end
    saver_rank = rank_t'(line_addr[7:0] % 8'(NR));
  end

endmodule
