// tb_compute_node: one CN with the rest of the cluster modelled here.
//
// CN 1 of four, two cores, N_r = 3, 4-entry store buffers, a 16-entry SRAM
// Log Buffer and a 64-slot DRAM log (dram_log_model). The model answers every
// REPL the CN sends with a REPL_ACK from the addressed replica after a random
// delay, and acts as the other CNs: it sends REPLs to the CN's Logging Unit
// and, after their REPL_ACKs, the VALs with per-source timestamps. Checks:
//  * REPLs leave on the request lane, go to the replicas of the reference
//    hash, carry the store data, and no response leaves on that lane;
//  * VALs leave only after all REPL_ACKs of their store, with timestamps
//    1, 2, ... per destination; a store commits after its last VAL;
//  * commits write the cores' stores in program order (merged when
//    consecutive, same line, different words);
//  * REPL_ACKs from the Logging Unit name the REPL's requester, tag and rank;
//    every word of every validated remote store reaches the DRAM log once;
//  * after halt the CN sends nothing and shows no link activity.
//
// Interface and timing: the same ports as in the cluster; the rest of the
// cluster answers REPLs with REPL_ACKs after random delays and sends REPLs and
// VALs in. The ReCXL rules come from the paper; the two lanes, the arbiters
// and ACK routing by core ID are my own choices.
module tb_compute_node;
  import recxl_pkg::*;
  localparam int unsigned NCN = 4, NCORE = 2, NR = 3, SBD = 4, LBE = 16, LOGN = 64, PERIOD = 500;
  localparam int unsigned AW = $clog2(LOGN);
  localparam int ME = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cn_id_t my_cn = cn_id_t'(ME);
  logic halt = 0;
  logic [NCORE-1:0] st_valid, st_ready, coh_req_valid, coh_ready, commit_valid;
  line_addr_t st_line [NCORE];
  logic [WIDX_W-1:0] st_widx [NCORE];
  word_t st_data [NCORE];
  line_addr_t coh_req_line [NCORE];
  line_addr_t commit_line [NCORE];
  mask_t commit_mask [NCORE];
  logic [WORDS-1:0][WORD_W-1:0] commit_data [NCORE];
  logic req_out_valid, req_out_ready, req_in_valid, req_in_ready;
  msg_t req_out_msg, req_in_msg;
  logic out_valid, out_ready, in_valid, in_ready, link_alive;
  msg_t out_msg, in_msg;
  logic dw_valid, dw_ready, dr_valid, dr_ready, drr_valid;
  logic [AW-1:0] dw_addr, dr_addr;
  dram_entry_t dw_data, drr_data;
  logic dm_valid, dm_ready, sync_req, sync_ack;
  logic [DUMP_MSG_W-1:0] dm_data;
  logic rec_interrupt = 0, rec_interrupt_resp, recov_end = 0, recov_end_resp, lu_paused;
  logic [NCORE-1:0] ev_coalesce, ev_repl_at_head, ev_sb_full;
  logic ev_buf_full, ev_ts_hold, ev_dump_done, ev_log_full;

  compute_node #(.NCN(NCN), .NCORE(NCORE), .NR(NR), .SB_DEPTH(SBD), .LOG_BUF_ENTRIES(LBE),
                 .LOG_ENTRIES(LOGN), .DUMP_PERIOD(PERIOD)) dut (.*);
  dram_log_model #(.ENTRIES(LOGN), .LAT(2)) u_dram (.*);

  int checks = 0, failures = 0;
  int n_store = 0, n_commit = 0, n_repl = 0, n_val = 0, n_rrepl = 0, n_lack = 0, n_log = 0, n_words = 0;
  task automatic fail(string s);
    failures++;
    $display("%0t FAIL %s", $time, s);
  endtask

  function automatic int ref_rep(line_addr_t l, int req, int k);
    int f, r;
    f = 0;
    for (int i = 0; i < 6; i++) f ^= int'((l >> (8 * i)) & 44'hff);
    f = f % NCN;
    r = (f + k) % NCN;
    if (r == req) r = (f + NR) % NCN;
    return r;
  endfunction

  typedef struct { line_addr_t line; int widx; word_t data; } store_t;
  store_t stq [NCORE][$];
  typedef struct { msg_t m; longint due; } timed_t;
  timed_t ackq [$];                 // REPL_ACKs the replicas will send
  int     acks_sent [bit [15:0]];   // per core/tag: REPL_ACKs delivered
  int     vals_seen [bit [15:0]];
  int     tsc [NCN];
  msg_t   rq_pending [$];           // remote REPLs not yet acknowledged by the LU
  msg_t   rq_acked [$];             // remote REPLs acknowledged, VAL to send
  int     rts [NCN];
  int     rtag = 0;
  longint cyc = 0;
  logic   acc_rq;
  logic   stim = 1;

  always @(posedge clk) cyc <= cyc + 1;

  // ---- stimulus ----
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCORE; c++) begin
      st_valid[c] = stim && !halt && $urandom_range(0, 99) < 40;
      if ($urandom_range(0, 2) == 0) st_line[c] = line_addr_t'($urandom_range(0, 15) << 3);
      st_widx[c] = 4'($urandom());
      st_data[c] = $urandom();
      coh_ready[c] = coh_req_valid[c] && ((coh_ready[c] && !commit_valid[c]) || $urandom_range(0, 2) == 0);
    end
    req_out_ready = $urandom_range(0, 3) != 0;
    out_ready = $urandom_range(0, 3) != 0;
    dm_ready = 1'b1;
    sync_ack = sync_req;
    // response lane into the CN: a due REPL_ACK, else a VAL for a remote store
    in_valid = 1'b0;
    if (ackq.size() != 0 && ackq[0].due <= cyc) begin
      in_msg = ackq[0].m; in_valid = 1'b1; void'(ackq.pop_front());
      acks_sent[{8'(in_msg.req.core), 8'(in_msg.tag)}]++;
    end else if (rq_acked.size() != 0 && $urandom_range(0, 1) == 0) begin
      msg_t r;
      int s;
      r = rq_acked.pop_front();
      s = int'(r.req.cn);
      rts[s] = (rts[s] + 1) % 128;
      in_msg = r; in_msg.mtype = MSG_VAL; in_msg.ts = ts_t'(rts[s]);
      in_valid = 1'b1;
    end
    // request lane into the CN: remote REPLs
    if (!req_in_valid || acc_rq) begin
      req_in_valid = 1'b0;
      if (stim && !halt && $urandom_range(0, 4) == 0) begin
        msg_t m;
        m = '0;
        m.mtype = MSG_REPL;
        m.req.cn = cn_id_t'(($urandom_range(0, 1) == 0) ? 0 : $urandom_range(2, NCN - 1));
        m.req.core = 5'($urandom_range(0, 3));
        m.src = m.req.cn; m.dst = my_cn; m.tag = 7'(rtag++); m.rank = 2'($urandom_range(0, 2));
        m.line = line_addr_t'($urandom());
        m.mask[$urandom_range(0, 15)] = 1'b1;
        m.mask[$urandom_range(0, 15)] = 1'b1;
        for (int w = 0; w < WORDS; w++) m.data[w] = $urandom();
        req_in_msg = m; req_in_valid = 1'b1;
      end
    end
    acc_rq = 1'b0;
  end

  // ---- checks ----
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCORE; c++) begin
      if (commit_valid[c]) begin
        int k;
        mask_t m;
        bit [15:0] key;
        k = $countones(commit_mask[c]);
        m = '0;
        n_commit++;
        checks++;
        if (k == 0 || stq[c].size() < k) fail("commit without stores");
        else begin
          for (int i = 0; i < k; i++) begin
            if (stq[c][i].line != commit_line[c] || m[stq[c][i].widx]
                || commit_data[c][stq[c][i].widx] != stq[c][i].data) fail("commit differs from stores");
            m[stq[c][i].widx] = 1'b1;
          end
          if (m != commit_mask[c]) fail("commit mask");
          for (int i = 0; i < k; i++) void'(stq[c].pop_front());
        end
      end
      if (st_valid[c] && st_ready[c]) begin
        store_t s;
        s.line = st_line[c]; s.widx = int'(st_widx[c]); s.data = st_data[c];
        stq[c].push_back(s); n_store++;
      end
    end
    if (req_out_valid && req_out_ready) begin
      timed_t t;
      n_repl++;
      checks++;
      if (req_out_msg.mtype != MSG_REPL || req_out_msg.src != my_cn) fail("non-REPL on the request lane");
      if (ref_rep(req_out_msg.line, ME, int'(req_out_msg.rank)) != int'(req_out_msg.dst)) fail("REPL to a wrong replica");
      t.m = '0;
      t.m.mtype = MSG_REPL_ACK; t.m.dst = my_cn; t.m.src = req_out_msg.dst; t.m.req = req_out_msg.req;
      t.m.tag = req_out_msg.tag; t.m.rank = req_out_msg.rank;
      t.due = cyc + $urandom_range(2, 30);
      ackq.push_back(t);
      ackq.sort with (item.due);
    end
    if (out_valid && out_ready) begin
      bit [15:0] key;
      int d;
      d = int'(out_msg.dst);
      checks++;
      if (out_msg.mtype == MSG_VAL) begin
        n_val++;
        key = {8'(out_msg.req.core), 8'(out_msg.tag)};
        if (!acks_sent.exists(key) || acks_sent[key] < NR) fail("VAL before all REPL_ACKs");
        if (int'(out_msg.ts) != (tsc[d] + 1) % 128) fail("VAL timestamp");
        tsc[d] = int'(out_msg.ts);
        vals_seen[key]++;
        if (vals_seen[key] == NR) begin acks_sent.delete(key); vals_seen.delete(key); end
      end else if (out_msg.mtype == MSG_REPL_ACK) begin
        msg_t r;
        n_lack++;
        if (rq_pending.size() == 0) fail("REPL_ACK without REPL");
        else begin
          r = rq_pending.pop_front();
          if (out_msg.dst != r.req.cn || out_msg.req != r.req || out_msg.tag != r.tag || out_msg.rank != r.rank)
            fail("REPL_ACK fields");
          rq_acked.push_back(r);
        end
      end else fail("REPL on the response lane");
    end
    if (req_in_valid && req_in_ready) begin
      acc_rq = 1'b1;
      if (!halt) begin
        n_rrepl++;
        rq_pending.push_back(req_in_msg);
        n_words += $countones(req_in_msg.mask);
      end
    end
    if (dw_valid && dw_ready) n_log++;
    if (halt) begin
      checks++;
      if (out_valid || req_out_valid || link_alive) fail("halted CN still active");
    end
  end

  initial begin
    #20000000;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    st_valid = '0; coh_ready = '0; req_in_valid = 0; in_valid = 0; acc_rq = 0;
    for (int c = 0; c < NCORE; c++) begin st_line[c] = '0; st_widx[c] = '0; st_data[c] = '0; end
    for (int d = 0; d < NCN; d++) begin tsc[d] = 0; rts[d] = 0; end
    in_msg = '0; req_in_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (6000) @(posedge clk);
    // drain: no new stores or remote REPLs
    begin
      int w;
      w = 0;
      while (w < 6000) begin
        @(negedge clk);
        stim = 0;
        w++;
      end
    end
    checks++;
    if (stq[0].size() != 0 || stq[1].size() != 0) fail("stores left uncommitted");
    checks++;
    if (n_log != n_words) fail($sformatf("%0d words logged, %0d sent", n_log, n_words));
    checks++;
    if (n_commit == 0 || n_lack == 0 || n_val == 0) fail("no traffic");
    // fail-stop: a halted CN goes silent (checked every cycle above)
    @(negedge clk);
    halt = 1'b1;
    stim = 1;
    repeat (100) @(posedge clk);
    $display("stores=%0d commits=%0d REPL=%0d VAL=%0d remote REPL=%0d LU ACK=%0d logged=%0d",
             n_store, n_commit, n_repl, n_val, n_rrepl, n_lack, n_log);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

