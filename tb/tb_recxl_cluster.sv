// tb_recxl_cluster: end-to-end test of the ReCXL cluster at reduced size.
//
// Five CNs with two cores each, N_r = 3, 4-entry store buffers, a 32-entry
// SRAM Log Buffer, a 64-slot DRAM log dumped every 700 cycles and a 64-cycle
// link timeout. Each CN's DRAM log sits in a dram_log_model; the MNs' side
// of the dump (dm_ready, sync_ack) and the L1s' coherence answers
// (coh_ready) are driven at random.
//
// Phases: (A) random stores from all cores, many to a few lines so that
// they coalesce; (B) stores stop and everything must commit and be logged;
// (C) CN 4 fails (cn_halt): its Viral_Status bit must rise within the timeout
// and an MSI must name it to the lowest live CN; the recovery handler's
// InterruptSignal goes to the live Logging Units, each must answer and pause,
// a store issued meanwhile must not be logged until RecovEnd, then it must
// complete; (D) a store whose Replica Group contains the failed CN has its
// REPL dropped by the switch (the store then waits for good, since no
// reconfiguration is modelled).
//
// Checks, all against models kept here:
//  * every commit writes the next stores of its core, in program order,
//    merged only when consecutive, to the same line and to different words;
//  * VAL timestamps count 1, 2, ... per source/destination pair;
//  * every REPL goes to the replicas given by a reference hash;
//  * each Logging Unit's DRAM log receives, for each source CN, the words of
//    that source's validated stores in VAL order (words of one store in any
//    order), nothing else and nothing twice;
//  * every dumped entry is one its Logging Unit must save (reference saver);
//  * all the above mechanisms and the buffer/log full and TS-hold cases are
//    counted, and each must have happened at least once.
//
// Interface and timing: the top's ports only, with the MNs, L1s and DRAMs
// modelled here. The protocol rules checked are the paper's; the sizes are
// reduced (my choice) so that every full/overflow case happens within a short
// run.
module tb_recxl_cluster;
  import recxl_pkg::*;
  localparam int unsigned NCN = 5, NCORE = 2, NR = 3, SBD = 4, LBE = 32,
                          LOGN = 64, PERIOD = 700, FTO = 64;
  localparam int unsigned AW = $clog2(LOGN);
  localparam int FAILED = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCN-1:0]   cn_halt;
  logic [NCORE-1:0] st_valid [NCN];
  logic [NCORE-1:0] st_ready [NCN];
  line_addr_t       st_line  [NCN][NCORE];
  logic [WIDX_W-1:0] st_widx [NCN][NCORE];
  word_t            st_data  [NCN][NCORE];
  logic [NCORE-1:0] coh_req_valid [NCN];
  line_addr_t       coh_req_line  [NCN][NCORE];
  logic [NCORE-1:0] coh_ready     [NCN];
  logic [NCORE-1:0] commit_valid  [NCN];
  line_addr_t       commit_line   [NCN][NCORE];
  mask_t            commit_mask   [NCN][NCORE];
  logic [WORDS-1:0][WORD_W-1:0] commit_data [NCN][NCORE];
  logic [NCN-1:0]   dw_valid, dw_ready, dr_valid, dr_ready, drr_valid;
  logic [AW-1:0]    dw_addr [NCN];
  logic [AW-1:0]    dr_addr [NCN];
  dram_entry_t      dw_data [NCN];
  dram_entry_t      drr_data [NCN];
  logic [NCN-1:0]   dm_valid, dm_ready, sync_req, sync_ack;
  logic [DUMP_MSG_W-1:0] dm_data [NCN];
  logic [NCN-1:0]   rec_interrupt, rec_interrupt_resp, recov_end, recov_end_resp, lu_paused;
  logic [NCN-1:0]   viral_status;
  logic             msi_valid, msi_ready;
  cn_id_t           msi_dst, msi_failed_cn;
  logic [NCORE-1:0] ev_coalesce [NCN];
  logic [NCORE-1:0] ev_repl_at_head [NCN];
  logic [NCORE-1:0] ev_sb_full [NCN];
  logic [NCN-1:0]   ev_buf_full, ev_ts_hold, ev_dump_done, ev_log_full;
  logic             ev_drop;

  recxl_cluster #(.NCN(NCN), .NCORE(NCORE), .NR(NR), .SB_DEPTH(SBD), .LOG_BUF_ENTRIES(LBE),
                  .LOG_ENTRIES(LOGN), .DUMP_PERIOD(PERIOD), .FAIL_TIMEOUT(FTO)) dut (.*);

  for (genvar n = 0; n < NCN; n++) begin : g_dram
    dram_log_model #(.ENTRIES(LOGN), .LAT(2 + n)) u_dram (
      .clk, .dw_valid(dw_valid[n]), .dw_ready(dw_ready[n]), .dw_addr(dw_addr[n]),
      .dw_data(dw_data[n]), .dr_valid(dr_valid[n]), .dr_ready(dr_ready[n]),
      .dr_addr(dr_addr[n]), .drr_valid(drr_valid[n]), .drr_data(drr_data[n]));
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    $display("%0t FAIL %s", $time, s);
  endtask

  // ---- reference replica hash --------------------------------------------------
  function automatic int ref_base(line_addr_t l);
    int f = 0;
    for (int i = 0; i < 6; i++) f ^= int'((l >> (8 * i)) & 44'hff);
    return f % NCN;
  endfunction
  function automatic int ref_rep(line_addr_t l, int req, int k);
    int b, r;
    b = ref_base(l);
    r = (b + k) % NCN;
    if (r == req) r = (b + NR) % NCN;
    return r;
  endfunction
  function automatic bit in_group(line_addr_t l, int req, int cn);
    for (int k = 0; k < NR; k++) if (ref_rep(l, req, k) == cn) return 1;
    return 0;
  endfunction

  // ---- mechanism counters ------------------------------------------------------
  int n_store = 0, n_commit = 0, n_coal = 0, n_head = 0, n_sbfull = 0;
  int n_repl = 0, n_ack = 0, n_val = 0, n_logged = 0, n_buffull = 0, n_tshold = 0;
  int n_dump = 0, n_dumped = 0, n_logfull = 0, n_drop = 0, n_msi = 0;
  int n_intr = 0, n_recov = 0, n_viral = 0;

  // ---- models --------------------------------------------------------------------
  typedef struct {
    line_addr_t line;
    int         widx;
    word_t      data;
  } store_t;
  store_t stq [NCN][NCORE][$];

  typedef struct {
    dram_entry_t e;
    int          grp;
  } lent_t;
  lent_t  expq [NCN][NCN][$];        // [logger][source]
  msg_t   repls [bit [31:0]];        // REPLs seen, by source/core/tag/rank
  int     tsc [NCN][NCN];            // last VAL timestamp per source/destination
  int     grp_id = 0;
  logic   stop_log_check = 0;        // set while the Logging Units are paused
  int     dw_while_paused = 0;

  function automatic bit [31:0] rkey(int s, int core, int tag, int rank);
    return {8'(s), 8'(core), 8'(tag), 8'(rank)};
  endfunction

  // stores accepted, commits
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NCN; n++) for (int c = 0; c < NCORE; c++) begin
      if (commit_valid[n][c]) begin
        int k;
        mask_t m;
        k = $countones(commit_mask[n][c]);
        m = '0;
        n_commit++;
        checks++;
        if (k == 0 || stq[n][c].size() < k) fail($sformatf("CN%0d core%0d commit of %0d words, %0d stores pending", n, c, k, stq[n][c].size()));
        else begin
          for (int i = 0; i < k; i++) begin
            store_t s;
            s = stq[n][c][i];
            if (s.line != commit_line[n][c] || !commit_mask[n][c][s.widx] || m[s.widx]
                || commit_data[n][c][s.widx] != s.data)
              fail($sformatf("CN%0d core%0d commit differs from store %0d", n, c, i));
            m[s.widx] = 1'b1;
          end
          if (m != commit_mask[n][c]) fail("commit mask differs");
          for (int i = 0; i < k; i++) void'(stq[n][c].pop_front());
        end
      end
      if (st_valid[n][c] && st_ready[n][c] && !cn_halt[n]) begin
        store_t s;
        s.line = st_line[n][c]; s.widx = int'(st_widx[n][c]); s.data = st_data[n][c];
        stq[n][c].push_back(s);
        n_store++;
      end
      if (ev_coalesce[n][c]) n_coal++;
      if (ev_repl_at_head[n][c]) n_head++;
      if (ev_sb_full[n][c]) n_sbfull++;
    end
    n_buffull += $countones(ev_buf_full);
    n_tshold  += $countones(ev_ts_hold);
    n_dump    += $countones(ev_dump_done);
    n_logfull += $countones(ev_log_full);
    if (ev_drop) n_drop++;
  end

  // messages entering the switch
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2 * NCN; p++) if (dut.up_valid[p] && dut.up_ready[p]) begin
      int s;
      msg_t m;
      int d;
      s = p % NCN;
      m = dut.up_msg[p];
      d = int'(m.dst);
      checks++;
      if (int'(m.src) != s) fail("wrong source field");
      case (m.mtype)
        MSG_REPL: begin
          n_repl++;
          if (ref_rep(m.line, s, int'(m.rank)) != d) fail($sformatf("REPL from CN%0d to CN%0d, hash says CN%0d", s, d, ref_rep(m.line, s, int'(m.rank))));
          repls[rkey(s, int'(m.req.core), int'(m.tag), int'(m.rank))] = m;
        end
        MSG_REPL_ACK: n_ack++;
        MSG_VAL: begin
          bit [31:0] key;
          n_val++;
          key = rkey(s, int'(m.req.core), int'(m.tag), int'(m.rank));
          if (int'(m.ts) != (tsc[s][d] + 1) % 128) fail($sformatf("VAL CN%0d->CN%0d TS %0d after %0d", s, d, m.ts, tsc[s][d]));
          tsc[s][d] = int'(m.ts);
          if (!repls.exists(key)) fail("VAL without REPL");
          else begin
            msg_t r;
            r = repls[key];
            if (r.line != m.line || ref_rep(m.line, s, int'(m.rank)) != d) fail("VAL does not match its REPL");
            grp_id++;
            if (!viral_status[d])
              for (int w = 0; w < WORDS; w++) if (r.mask[w]) begin
                lent_t le;
                le.e.req = r.req; le.e.waddr = word_addr(r.line, 4'(w));
                le.e.value = r.data[w]; le.e.valid = 1'b1; le.grp = grp_id;
                expq[d][s].push_back(le);
              end
            repls.delete(key);
          end
        end
        default: fail("unknown message type");
      endcase
    end
  end

  // log writes and dump messages
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NCN; n++) begin
      if (dw_valid[n] && dw_ready[n]) begin
        dram_entry_t e;
        int s, i;
        bit found;
        e = dw_data[n];
        s = int'(e.req.cn);
        n_logged++;
        if (stop_log_check) dw_while_paused++;
        checks++;
        found = 0;
        if (s < NCN) begin
          i = 0;
          while (i < expq[n][s].size() && expq[n][s][i].grp == expq[n][s][0].grp && !found) begin
            if (expq[n][s][i].e == e) found = 1;
            else i++;
          end
        end
        if (!found) fail($sformatf("CN%0d logged an entry of CN%0d out of order or unknown", n, s));
        else expq[n][s].delete(i);
      end
      if (dm_valid[n] && dm_ready[n]) begin
        int cnt;
        cnt = int'(dm_data[n][DUMP_PER_MSG*DRAM_ENTRY_W +: DUMP_CNT_W]);
        checks++;
        if (cnt < 1 || cnt > DUMP_PER_MSG) fail("dump message count");
        for (int k = 0; k < cnt && k < DUMP_PER_MSG; k++) begin
          dram_entry_t e;
          line_addr_t l;
          e = dram_entry_t'(dm_data[n][k*DRAM_ENTRY_W +: DRAM_ENTRY_W]);
          l = line_of_waddr(e.waddr);
          n_dumped++;
          checks++;
          if (!e.valid || ref_rep(l, int'(e.req.cn), int'(l[7:0]) % NR) != n)
            fail($sformatf("CN%0d dumped an entry it does not save", n));
        end
      end
    end
  end

  // ---- stimulus ------------------------------------------------------------------
  logic traffic = 0;
  logic [NCORE-1:0] force_st [NCN];
  line_addr_t       force_line [NCN][NCORE];
  line_addr_t       last_line [NCN][NCORE];
  int               hot;

  always @(negedge clk) begin
    for (int n = 0; n < NCN; n++) begin
      for (int c = 0; c < NCORE; c++) begin
        // the L1 keeps write permission from when it is granted until the commit
        coh_ready[n][c] = coh_req_valid[n][c] && ((coh_ready[n][c] && !commit_valid[n][c]) || ($urandom_range(0, 3) == 0));
        if (force_st[n][c]) begin
          st_valid[n][c] = 1'b1;
          st_line[n][c]  = force_line[n][c];
          st_widx[n][c]  = 4'($urandom());
          st_data[n][c]  = $urandom();
        end else if (traffic && !cn_halt[n] && $urandom_range(0, 99) < 45) begin
          st_valid[n][c] = 1'b1;
          if ($urandom_range(0, 2) != 0) st_line[n][c] = last_line[n][c];
          else st_line[n][c] = line_addr_t'({$urandom_range(0, 1), $urandom()}) & 44'h3_0000_003f
                                | line_addr_t'($urandom_range(0, 7) << 6);
          st_widx[n][c] = 4'($urandom());
          st_data[n][c] = $urandom();
          last_line[n][c] = st_line[n][c];
        end else begin
          st_valid[n][c] = 1'b0;
        end
      end
      dm_ready[n] = ($urandom_range(0, 3) != 0);
      sync_ack[n] = sync_req[n] && ($urandom_range(0, 9) == 0);
    end
    msi_ready = ($urandom_range(0, 1) == 0);
  end

  // MSI and Viral_Status
  logic [NCN-1:0] viral_seen = '0;
  longint t_halt = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NCN; n++) if (viral_status[n] && !viral_seen[n]) begin
      viral_seen[n] = 1'b1;
      n_viral++;
      checks++;
      if (n != FAILED || cyc - t_halt > FTO + 4) fail($sformatf("Viral_Status of CN%0d set %0d cycles after the halt", n, cyc - t_halt));
    end
    if (msi_valid && msi_ready) begin
      int low;
      low = 0;
      while (low < NCN && viral_status[low]) low++;
      n_msi++;
      checks++;
      if (int'(msi_failed_cn) != FAILED || int'(msi_dst) != low) fail("MSI fields");
    end
    for (int n = 0; n < NCN; n++) begin
      if (rec_interrupt_resp[n]) n_intr++;
      if (recov_end_resp[n]) n_recov++;
    end
  end

  function automatic bit all_done();
    for (int n = 0; n < NCN; n++) begin
      for (int c = 0; c < NCORE; c++) if (stq[n][c].size() != 0) return 0;
      for (int s = 0; s < NCN; s++) if (!viral_status[n] && expq[n][s].size() != 0) return 0;
    end
    return 1;
  endfunction

  function automatic line_addr_t pick_line(int req, bit with_failed);
    line_addr_t l;
    do l = line_addr_t'($urandom_range(0, 4095) << 2);
    while (in_group(l, req, FAILED) != with_failed);
    return l;
  endfunction

  initial begin
    #20000000;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int waitc;
    int dw0;
    cn_halt = '0; rec_interrupt = '0; recov_end = '0;
    for (int n = 0; n < NCN; n++) begin
      force_st[n] = '0; st_valid[n] = '0; coh_ready[n] = '0;
      for (int c = 0; c < NCORE; c++) begin
        last_line[n][c] = '0; st_line[n][c] = '0; st_widx[n][c] = '0; st_data[n][c] = '0;
        force_line[n][c] = '0;
      end
      for (int d = 0; d < NCN; d++) tsc[n][d] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // (A) random traffic
    traffic = 1;
    repeat (8000) @(posedge clk);
    traffic = 0;
    // (B) everything commits and is logged
    waitc = 0;
    while (!all_done() && waitc < 20000) begin @(posedge clk); waitc++; end
    checks++; if (!all_done()) fail("stores not committed or not logged after traffic stopped");
    $display("phase B done at %0d", cyc);

    // (C) CN failure, detection, recovery handshake
    @(negedge clk);
    cn_halt[FAILED] = 1'b1;
    t_halt = cyc;
    repeat (FTO + 10) @(posedge clk);
    checks++; if (!viral_status[FAILED]) fail("failed CN not detected");
    waitc = 0;
    while (n_msi == 0 && waitc < 100) begin @(posedge clk); waitc++; end
    checks++; if (n_msi != 1) fail("no MSI");
    @(negedge clk);
    for (int n = 0; n < NCN; n++) if (n != FAILED) rec_interrupt[n] = 1'b1;
    @(negedge clk);
    rec_interrupt = '0;
    waitc = 0;
    while (n_intr < NCN - 1 && waitc < 2000) begin @(posedge clk); waitc++; end
    checks++; if (n_intr != NCN - 1) fail($sformatf("%0d InterruptResp of %0d", n_intr, NCN - 1));
    checks++; if (lu_paused != (NCN)'((1 << (NCN - 1)) - 1)) fail("Logging Units not paused");
    // a store while paused: not logged before RecovEnd
    stop_log_check = 1;
    dw0 = n_logged;
    @(negedge clk);
    force_line[0][0] = pick_line(0, 0);
    force_st[0][0] = 1'b1;
    @(negedge clk);
    force_st[0][0] = 1'b0;
    repeat (300) @(posedge clk);
    checks++; if (n_logged != dw0 || stq[0][0].size() != 1) fail("progress while the Logging Units are paused");
    stop_log_check = 0;
    @(negedge clk);
    for (int n = 0; n < NCN; n++) if (n != FAILED) recov_end[n] = 1'b1;
    @(negedge clk);
    recov_end = '0;
    waitc = 0;
    while (!all_done() && waitc < 5000) begin @(posedge clk); waitc++; end
    checks++; if (n_recov != NCN - 1) fail("RecovEndResp missing");
    checks++; if (!all_done()) fail("store after RecovEnd not completed");

    // (D) a store whose group holds the failed CN: its REPL is dropped
    @(negedge clk);
    force_line[1][1] = pick_line(1, 1);
    force_st[1][1] = 1'b1;
    @(negedge clk);
    force_st[1][1] = 1'b0;
    repeat (200) @(posedge clk);
    checks++; if (n_drop == 0) fail("REPL to the failed CN not dropped");
    checks++; if (stq[1][1].size() != 1) fail("store committed without all its REPL_ACKs");

    // every mechanism must have happened
    checks++; if (n_coal == 0)    fail("no store coalescing");
    checks++; if (n_head == 0)    fail("no REPL sent at the SB head");
    checks++; if (n_sbfull == 0)  fail("SB never full");
    checks++; if (n_buffull == 0) fail("SRAM Log Buffer never full");
    checks++; if (n_tshold == 0)  fail("no entry held for TS order");
    checks++; if (n_dump == 0 || n_dumped == 0) fail("no log dump");
    checks++; if (n_logfull == 0) fail("DRAM log never full");
    checks++; if (dw_while_paused != 0) fail("log written while paused");
    $display("stores=%0d commits=%0d coalesced=%0d repl_at_head=%0d sb_full=%0d", n_store, n_commit, n_coal, n_head, n_sbfull);
    $display("REPL=%0d REPL_ACK=%0d VAL=%0d logged=%0d buf_full=%0d ts_hold=%0d", n_repl, n_ack, n_val, n_logged, n_buffull, n_tshold);
    $display("dumps=%0d dumped=%0d log_full=%0d viral=%0d msi=%0d intr_resp=%0d recov_resp=%0d drops=%0d",
             n_dump, n_dumped, n_logfull, n_viral, n_msi, n_intr, n_recov, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
