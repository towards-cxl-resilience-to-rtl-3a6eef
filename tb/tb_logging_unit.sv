// tb_logging_unit: drives one Logging Unit with REPLs and VALs from several
// source CNs and exercises the recovery handshake.
//
// Four CNs, unit = CN 2, an 8-entry SRAM Log Buffer, a 32-slot DRAM log
// (dram_log_model) dumped every 300 cycles. Each REPL carries 1..4 random
// words; its VAL is sent some cycles after its REPL_ACK, with the next
// timestamp of its source CN, so VALs of different stores arrive in an order
// different from their REPLs. Checks:
//  * one REPL_ACK per REPL, to the requester, with the REPL's tag and rank;
//  * the DRAM log receives, per source CN, the words of each store in TS
//    order (words of one store in any order) with the TS stripped;
//  * Interrupt: rec_interrupt_resp comes once, only when nothing can still be
//    moved; until RecovEnd no REPL is taken, nothing is written to the DRAM
//    log and no dump message is sent; RecovEnd is answered the next cycle;
//  * buffer full, TS hold, DRAM log full and dumps each happen.
//
// Interface and timing: REPL/VAL/ACK ports as in the switch; Interrupt and
// RecovEnd are one-cycle pulses. From the paper: complete outstanding work,
// answer InterruptResp, pause; RecovEndResp, then resume. Own choices: VALs
// are still taken while paused, and a dump may run while draining.
module tb_logging_unit;
  import recxl_pkg::*;
  localparam int unsigned NCN = 4, NR = 3, LBE = 8, LOGN = 32, PERIOD = 300;
  localparam int unsigned AW = $clog2(LOGN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cn_id_t my_cn = 5'd2;
  logic repl_valid, repl_ready, val_valid, ack_valid, ack_ready;
  msg_t repl, val, ack;
  logic dw_valid, dw_ready, dr_valid, dr_ready, drr_valid;
  logic [AW-1:0] dw_addr, dr_addr;
  dram_entry_t dw_data, drr_data;
  logic dm_valid, dm_ready, sync_req, sync_ack;
  logic [DUMP_MSG_W-1:0] dm_data;
  logic rec_interrupt, rec_interrupt_resp, recov_end, recov_end_resp, paused;
  logic [$clog2(LBE+1)-1:0] buf_occupancy;
  logic [$clog2(LOGN+1)-1:0] log_fill;
  logic ev_buf_full, ev_ts_hold, ev_dump_done, ev_log_full;

  logging_unit #(.NCN(NCN), .NR(NR), .LOG_BUF_ENTRIES(LBE), .LOG_ENTRIES(LOGN),
                 .DUMP_PERIOD(PERIOD)) dut (.*);
  dram_log_model #(.ENTRIES(LOGN), .LAT(3)) u_dram (.*);

  int checks = 0, failures = 0;
  int n_repl = 0, n_ack = 0, n_val = 0, n_log = 0, n_full = 0, n_hold = 0, n_dump = 0, n_lfull = 0;
  int n_intr = 0, n_resp = 0, n_rend = 0;

  typedef struct { dram_entry_t e; int grp; } lent_t;
  lent_t expq [NCN][$];
  msg_t  acked [$];          // REPLs acknowledged, VAL not yet sent
  int    tsn [NCN];
  int    grp = 0;
  logic  in_pause = 0;       // between rec_interrupt_resp and recov_end
  logic  stop_stim = 0;
  logic  acc_r;

  function automatic msg_t new_repl();
    msg_t m;
    m = '0;
    m.mtype = MSG_REPL;
    do m.req.cn = cn_id_t'($urandom_range(0, NCN - 1)); while (m.req.cn == my_cn);
    m.req.core = 5'($urandom_range(0, 3));
    m.src = m.req.cn;
    m.dst = my_cn;
    m.tag = 7'($urandom());
    m.rank = 2'($urandom_range(0, NR - 1));
    m.line = line_addr_t'({$urandom_range(0, 3), $urandom()});
    for (int k = 0; k < 4; k++) if (k == 0 || $urandom_range(0, 1) == 0) m.mask[$urandom_range(0, 15)] = 1'b1;
    for (int w = 0; w < WORDS; w++) if (m.mask[w]) m.data[w] = $urandom();
    return m;
  endfunction

  // a (cn, core, tag) may only be in flight once
  function automatic bit busy_tag(msg_t m);
    foreach (acked[i]) if (acked[i].req == m.req && acked[i].tag == m.tag) return 1;
    if (repl_valid && repl.req == m.req && repl.tag == m.tag) return 1;
    return 0;
  endfunction

  always @(negedge clk) if (rst_n) begin
    msg_t m;
    if (!repl_valid || acc_r) begin
      repl_valid = 1'b0;
      if (!stop_stim && $urandom_range(0, 2) == 0) begin
        m = new_repl();
        if (!busy_tag(m)) begin repl = m; repl_valid = 1'b1; end
      end
    end
    acc_r = 1'b0;
    ack_ready = $urandom_range(0, 3) != 0;
    dm_ready = $urandom_range(0, 2) != 0;
    sync_ack = sync_req && $urandom_range(0, 5) == 0;
    // VAL of a random acknowledged store
    val_valid = 1'b0;
    if (!in_pause && acked.size() != 0 && $urandom_range(0, 2) == 0) begin
      int i, s;
      i = $urandom_range(0, acked.size() - 1);
      m = acked[i];
      acked.delete(i);
      s = int'(m.req.cn);
      tsn[s] = (tsn[s] + 1) % 128;
      val = '0;
      val.mtype = MSG_VAL; val.req = m.req; val.src = m.req.cn; val.dst = my_cn;
      val.tag = m.tag; val.rank = m.rank; val.line = m.line; val.ts = ts_t'(tsn[s]);
      val_valid = 1'b1;
      grp++;
      for (int w = 0; w < WORDS; w++) if (m.mask[w]) begin
        lent_t le;
        le.e.req = m.req; le.e.waddr = word_addr(m.line, 4'(w)); le.e.value = m.data[w];
        le.e.valid = 1'b1; le.grp = grp;
        expq[s].push_back(le);
      end
      n_val++;
    end
  end

  msg_t pend_ack [$];
  logic prev_dp = 0;       // drain_pending at the previous edge
  always @(posedge clk) if (rst_n) begin
    if (repl_valid && repl_ready) begin
      acc_r = 1'b1;
      n_repl++;
      pend_ack.push_back(repl);
      checks++;
      if (in_pause) begin failures++; $display("%0t FAIL REPL taken while paused", $time); end
    end
    if (ack_valid && ack_ready) begin
      msg_t r;
      n_ack++;
      checks++;
      if (pend_ack.size() == 0) begin failures++; $display("%0t FAIL REPL_ACK without REPL", $time); end
      else begin
        r = pend_ack.pop_front();
        if (ack.mtype != MSG_REPL_ACK || ack.dst != r.req.cn || ack.req != r.req || ack.tag != r.tag
            || ack.rank != r.rank || ack.src != my_cn) begin
          failures++; $display("%0t FAIL REPL_ACK fields", $time);
        end
        acked.push_back(r);
      end
    end
    if (dw_valid && dw_ready) begin
      int s, i;
      bit found;
      s = int'(dw_data.req.cn);
      n_log++;
      checks++;
      if (in_pause) begin failures++; $display("%0t FAIL DRAM log written while paused", $time); end
      found = 0; i = 0;
      if (s < NCN)
        while (!found && i < expq[s].size() && expq[s][i].grp == expq[s][0].grp)
          if (expq[s][i].e == dw_data) found = 1; else i++;
      if (!found) begin failures++; $display("%0t FAIL logged entry of CN%0d out of TS order", $time, s); end
      else expq[s].delete(i);
    end
    if (dm_valid && in_pause) begin failures++; $display("%0t FAIL dump while paused", $time); end
    if (ev_buf_full) n_full++;
    if (ev_ts_hold) n_hold++;
    if (ev_dump_done) n_dump++;
    if (ev_log_full) n_lfull++;
    if (rec_interrupt_resp) begin
      n_resp++;
      checks++;
      if (prev_dp || dut.sb_busy || !paused) begin failures++; $display("%0t FAIL InterruptResp too early", $time); end
    end
    if (recov_end_resp) n_rend++;
    prev_dp = dut.drain_pending;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repl_valid = 0; val_valid = 0; repl = '0; val = '0; rec_interrupt = 0; recov_end = 0;
    ack_ready = 0; dm_ready = 0; sync_ack = 0; acc_r = 0;
    for (int s = 0; s < NCN; s++) tsn[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      int w;
      repeat ($urandom_range(1500, 2500)) @(posedge clk);
      // recovery handshake
      @(negedge clk); rec_interrupt = 1; n_intr++;
      @(negedge clk); rec_interrupt = 0;
      w = 0;
      while (!rec_interrupt_resp && w < 5000) begin @(posedge clk); w++; end
      checks++; if (!rec_interrupt_resp) begin failures++; $display("FAIL no InterruptResp"); end
      @(negedge clk);
      in_pause = 1;
      repeat ($urandom_range(50, 400)) @(posedge clk);
      @(negedge clk);
      in_pause = 0;
      recov_end = 1;
      @(posedge clk);
      @(negedge clk); recov_end = 0;
      checks++; if (!recov_end_resp || paused) begin failures++; $display("FAIL RecovEndResp"); end
    end
    // let everything drain
    stop_stim = 1;
    begin
      int w;
      w = 0;
      while ((acked.size() != 0 || pend_ack.size() != 0 || repl_valid) && w < 20000) begin @(posedge clk); w++; end
      repeat (3 * PERIOD) @(posedge clk);
    end
    for (int s = 0; s < NCN; s++) begin
      checks++;
      if (expq[s].size() != 0) begin failures++; $display("FAIL %0d words of CN%0d never logged", expq[s].size(), s); end
    end
    checks++;
    if (n_resp != n_intr || n_rend != n_intr) begin failures++; $display("FAIL handshake counts"); end
    checks++;
    if (n_full == 0 || n_hold == 0 || n_dump == 0 || n_lfull == 0) begin failures++; $display("FAIL a case never happened"); end
    $display("REPL=%0d ACK=%0d VAL=%0d logged=%0d buf_full=%0d ts_hold=%0d dumps=%0d log_full=%0d interrupts=%0d",
             n_repl, n_ack, n_val, n_log, n_full, n_hold, n_dump, n_lfull, n_intr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
