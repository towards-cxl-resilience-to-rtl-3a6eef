// tb_store_buffer_repl: drives random remote stores into one store buffer and
// plays the replicas and the L1 around it.
//
// Replicas answer every REPL with a REPL_ACK after a random delay; the L1
// grants write permission for the head line after a random delay. Checks:
//  * every REPL goes to the replica of its rank (reference hash written
//    here), and the NR REPLs of one entry carry the same line, mask and data;
//  * commits come in program order, each covering a run of consecutive stores
//    to one line and distinct words, with the stored values;
//  * a commit follows NR REPL_ACKs and NR VALs to the right replicas, and a
//    VAL leaves only while the L1 holds the head line;
//  * REPLs of younger entries leave while older ones still wait (proactive
//    overlap), stores coalesce, REPLs are also sent at the head, and a full
//    SB stalls the core: each must happen at least once;
//  * latency: a lone store into an idle SB, with immediate ACKs and a ready
//    L1, sends its REPLs in cycles 1..NR after it enters and commits NR
//    cycles after the last ACK.
//
// Interface and timing: a clocked harness plays the L1 (coh_ready held until
// the commit) and N_r replica Logging Units that return REPL_ACKs after random
// delays. From the paper: coalescing of consecutive same-line stores, REPLs
// before commit, commit only after every REPL_ACK and the coherence
// transaction, VALs at commit. Own choices checked too: the slot tag and the
// rank in every message.
module tb_store_buffer_repl;
  import recxl_pkg::*;

  localparam int unsigned NCN = 16, NR = 3, DEPTH = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cn_id_t my_cn = 5'd6;
  logic st_valid, st_ready;
  line_addr_t st_line;
  logic [WIDX_W-1:0] st_widx;
  word_t st_data;
  logic coh_req_valid, coh_ready;
  line_addr_t coh_req_line;
  logic msg_valid, msg_ready;
  msg_t msg;
  logic ack_valid;
  msg_t ack;
  logic commit_valid;
  line_addr_t commit_line;
  mask_t commit_mask;
  logic [WORDS-1:0][WORD_W-1:0] commit_data;
  logic ev_coalesce, ev_repl_at_head, ev_full_stall, busy;

  store_buffer_repl #(.NCN(NCN), .NR(NR), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .my_cn, .my_core(5'd2),
    .st_valid, .st_ready, .st_line, .st_widx, .st_data,
    .coh_req_valid, .coh_req_line, .coh_ready,
    .msg_valid, .msg_ready, .msg, .ack_valid, .ack,
    .commit_valid, .commit_line, .commit_mask, .commit_data,
    .ev_coalesce, .ev_repl_at_head, .ev_full_stall, .busy);

  int checks = 0, failures = 0;
  int n_coal = 0, n_head = 0, n_full = 0, n_overlap = 0, n_commit = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    $display("FAIL @%0d: %s", cyc, s);
  endtask

  function automatic int ref_rep(line_addr_t l, int k);
    int f = 0, r;
    for (int i = 0; i < 6; i++) f ^= int'((l >> (8 * i)) & 44'hff);
    f = f % NCN;
    r = (f + k) % NCN;
    if (r == int'(my_cn)) r = (f + NR) % NCN;
    return r;
  endfunction

  // program-order stores accepted by the SB
  typedef struct { line_addr_t line; int w; word_t d; } st_t;
  st_t stq[$];

  // one record per entry that has sent REPLs, in SB order
  typedef struct { int tag; line_addr_t line; mask_t mask; logic [WORDS-1:0][WORD_W-1:0] data;
                   int nrepl; int nack; int nval; } rec_t;
  rec_t recs[$];

  // pending acks
  typedef struct { longint due; int tag; int rank; } pa_t;
  pa_t pend[$];
  int ack_lo = 1, ack_hi = 30;

  // L1 model
  int coh_wait = 0, coh_need = 0;
  line_addr_t coh_last = '1;
  logic coh_always = 0;
  assign coh_ready = coh_always || (coh_req_valid && coh_req_line == coh_last && coh_wait >= coh_need);
  always @(posedge clk) begin
    if (coh_req_valid && coh_req_line != coh_last) begin
      coh_last <= coh_req_line; coh_wait <= 0; coh_need <= $urandom_range(0, 12);
    end else if (coh_req_valid) coh_wait <= coh_wait + 1;
  end

  int rdy_pct = 75;
  always @(negedge clk) msg_ready = ($urandom_range(0, 99) < rdy_pct);

  // ack driver
  always @(negedge clk) begin
    ack_valid = 0;
    ack = '0;
    for (int i = 0; i < pend.size(); i++) begin
      if (pend[i].due <= cyc) begin
        ack.mtype = MSG_REPL_ACK;
        ack.tag = tag_t'(pend[i].tag);
        ack.rank = rank_t'(pend[i].rank);
        ack_valid = 1;
        pend.delete(i);
        break;
      end
    end
  end

  // monitor
  longint t_acc;
  always @(posedge clk) if (rst_n) begin
    if (st_valid && st_ready) t_acc = cyc;
    if (ev_coalesce) n_coal++;
    if (ev_repl_at_head) n_head++;
    if (ev_full_stall) n_full++;
    if (ack_valid) begin
      for (int i = 0; i < recs.size(); i++)
        if (recs[i].tag == int'(ack.tag) && recs[i].nrepl > 0 && recs[i].nack < NR) begin
          recs[i].nack++; break;
        end
    end
    if (commit_valid) begin
      int k;
      k = $countones(commit_mask);
      n_commit++;
      checks++;
      if (recs.size() == 0) fail("commit with no record");
      else begin
        if (recs[0].nval != NR) fail("commit before all VALs");
        if (recs[0].line != commit_line || recs[0].mask != commit_mask || recs[0].data != commit_data)
          fail("commit differs from its REPL");
        void'(recs.pop_front());
      end
      for (int i = 0; i < k; i++) begin
        st_t s;
        checks++;
        if (stq.size() == 0) begin fail("commit of a store never made"); break; end
        s = stq.pop_front();
        if (s.line != commit_line || !commit_mask[s.w] || commit_data[s.w] != s.d)
          fail($sformatf("commit out of program order: store line %h w %0d d %h, commit line %h mask %h d %h", s.line, s.w, s.d, commit_line, commit_mask, commit_data[s.w]));
      end
    end
    if (msg_valid && msg_ready) begin
      if (msg.mtype == MSG_REPL) begin
        int idx;
        idx = -1;
        checks++;
        if (int'(msg.dst) != ref_rep(msg.line, int'(msg.rank)))
          fail($sformatf("REPL rank %0d to CN %0d, want %0d", msg.rank, msg.dst, ref_rep(msg.line, int'(msg.rank))));
        if (msg.req.cn != my_cn || msg.req.core != 5'd2) fail("REPL requester id");
        if (msg.rank == 0) begin
          rec_t r;
          r.tag = int'(msg.tag); r.line = msg.line; r.mask = msg.mask; r.data = msg.data;
          r.nrepl = 1; r.nack = 0; r.nval = 0;
          if (recs.size() > 0 && recs[0].nack < NR) n_overlap++;
          recs.push_back(r);
        end else begin
          for (int i = recs.size() - 1; i >= 0; i--) if (recs[i].tag == int'(msg.tag)) begin idx = i; break; end
          checks++;
          if (idx < 0) fail("REPL rank>0 without rank 0");
          else begin
            if (recs[idx].line != msg.line || recs[idx].mask != msg.mask || recs[idx].data != msg.data)
              fail("REPLs of one entry differ");
            recs[idx].nrepl++;
          end
        end
        pend.push_back('{cyc + $urandom_range(ack_lo, ack_hi), int'(msg.tag), int'(msg.rank)});
      end else if (msg.mtype == MSG_VAL) begin
        checks++;
        if (recs.size() == 0) fail("VAL with nothing outstanding");
        else begin
          if (int'(msg.tag) != recs[0].tag || msg.line != recs[0].line) fail($sformatf("VAL not for the head entry: tag %0d line %h, rec tag %0d line %h nrecs %0d head %0d rp %0d", msg.tag, msg.line, recs[0].tag, recs[0].line, recs.size(), dut.head_q, dut.rp_q));
          if (recs[0].nack != NR || recs[0].nrepl != NR) fail($sformatf("VAL before all acks (%0d)", recs[0].nack));
          if (int'(msg.dst) != ref_rep(msg.line, recs[0].nval)) fail("VAL destination");
          if (!coh_ready || coh_req_line != msg.line) fail("VAL without write permission");
          recs[0].nval++;
        end
      end else fail("unexpected message type");
    end
  end

  initial begin
    #2000000;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stores are driven after the falling edge and sampled at the rising edge
  logic acc;
  always @(posedge clk) acc <= st_valid && st_ready;
  task automatic put_store(line_addr_t l, int w, word_t d);
    @(negedge clk);
    st_valid = 1; st_line = l; st_widx = WIDX_W'(w); st_data = d;
    stq.push_back('{l, w, d});
    do @(negedge clk); while (!acc);
    st_valid = 0;
  endtask

  line_addr_t lines [4] = '{44'h00a_0000_0040, 44'h00a_0000_0041, 44'h123_0000_1000, 44'h7ff_ffff_fff3};

  initial begin
    st_valid = 0; st_line = '0; st_widx = '0; st_data = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // ---- directed latency check: lone store, immediate acks, L1 ready ----
    begin
      longint t0, trepl [NR], tack_last, tcommit;
      int nr = 0;
      coh_always = 1; rdy_pct = 100; ack_lo = 1; ack_hi = 1;
      put_store(lines[2], 3, 32'hcafe_0001);
      t0 = t_acc;
      fork
        begin
          while (nr < NR) begin
            @(posedge clk);
            if (msg_valid && msg_ready && msg.mtype == MSG_REPL) begin trepl[nr] = cyc; nr++; end
          end
        end
      join
      while (!commit_valid) @(posedge clk);
      tcommit = cyc;
      checks++;
      if (trepl[0] - t0 != 1 || trepl[NR-1] - t0 != NR)
        fail($sformatf("REPL timing %0d..%0d after the store", trepl[0] - t0, trepl[NR-1] - t0));
      // last ack arrives 1 cycle after the last REPL is sampled; NR VAL cycles; commit registered
      tack_last = trepl[NR-1] + 2;
      checks++;
      if (tcommit - tack_last > NR + 1 || tcommit - tack_last < NR - 1)
        fail($sformatf("commit %0d cycles after the last ack", tcommit - tack_last));
      coh_always = 0; rdy_pct = 75; ack_lo = 1; ack_hi = 30;
    end

    // ---- random traffic with runs that coalesce ----
    for (int n = 0; n < 600; n++) begin
      int l, run;
      l = $urandom_range(0, 3);
      run = ($urandom_range(0, 3) == 0) ? $urandom_range(2, 5) : 1;
      for (int r = 0; r < run; r++) put_store(lines[l], $urandom_range(0, 15), $urandom());
      if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 40)) @(posedge clk);
    end
    // ---- burst against slow acks to fill the SB ----
    ack_lo = 60; ack_hi = 90;
    for (int n = 0; n < 40; n++) put_store(lines[n % 4], n % 16, $urandom());
    ack_lo = 1; ack_hi = 30;

    while (stq.size() != 0 && cyc < 150000) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++; if (stq.size() != 0) fail($sformatf("%0d stores never committed", stq.size()));
    checks++; if (n_coal == 0) fail("no store coalesced");
    checks++; if (n_head == 0) fail("no REPL sent at the SB head");
    checks++; if (n_full == 0) fail("SB never full");
    checks++; if (n_overlap == 0) fail("no overlapped REPL round trips");
    $display("commits=%0d coalesced=%0d repl_at_head=%0d full_stall_cycles=%0d overlapped=%0d",
             n_commit, n_coal, n_head, n_full, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
