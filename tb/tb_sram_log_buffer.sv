// tb_sram_log_buffer: plays several requester CNs against one SRAM Log Buffer.
//
// REPLs with random word masks arrive; each is acknowledged and then gets its
// VAL, with timestamps counted per requester CN in acknowledgement order. The
// VALs are delivered after random delays, so they arrive reordered. Checks:
//  * a REPL of k words is acknowledged k+1 cycles after it is taken when
//    slots are free (k split cycles, then the REPL_ACK), with the right
//    requester, tag, rank and destination;
//  * the entries leaving for the DRAM log carry the stored words and, per
//    requester CN, come out in timestamp order;
//  * every word comes out exactly once;
//  * reordered VALs were actually held back and the buffer was actually full
//    at some point.
//
// Interface and timing: REPLs on a valid/ready port, VALs always taken, the
// drain port back-pressured at random. From the paper: one entry per word,
// validation by the VAL, and per-source drain in timestamp order with the TS
// stripped. Own choices: the ACK after the last word and one REPL at a time.
module tb_sram_log_buffer;
  import recxl_pkg::*;
  localparam int unsigned NCN = 16, ENTRIES = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic repl_valid, repl_ready, ack_valid, ack_ready, val_valid, drain_valid, drain_ready;
  msg_t repl, ack, val;
  dram_entry_t drain;
  logic busy, drain_pending, ev_full, ev_ts_hold;
  logic [$clog2(ENTRIES+1)-1:0] occupancy;
  cn_id_t my_cn = 5'd9;

  sram_log_buffer #(.NCN(NCN), .ENTRIES(ENTRIES)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_hold = 0, n_drained = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int cn; int core; int tag; line_addr_t line; mask_t mask;
                   logic [WORDS-1:0][WORD_W-1:0] data; int ts; int left; } rec_t;
  rec_t recs[$];          // acknowledged, in ts order per CN
  int   tscnt [NCN];
  typedef struct { longint due; int idx; } fl_t;
  fl_t  inflight[$];
  int   words_sent = 0;

  always @(posedge clk) if (rst_n) begin
    if (ev_full) n_full++;
    if (ev_ts_hold) n_hold++;
  end

  // check entries leaving for the DRAM log
  always @(posedge clk) if (rst_n && drain_valid && drain_ready) begin
    int oldest, found;
    n_drained++;
    checks++;
    oldest = -1; found = -1;
    for (int i = 0; i < recs.size(); i++)
      if (recs[i].cn == int'(drain.req.cn) && recs[i].left > 0) begin oldest = i; break; end
    if (oldest < 0) begin failures++; $display("FAIL drained entry of nothing"); end
    else begin
      // it must be a word of the oldest unfinished store of that CN
      for (int w = 0; w < WORDS; w++)
        if (recs[oldest].mask[w] && drain.waddr == word_addr(recs[oldest].line, WIDX_W'(w))
            && drain.value == recs[oldest].data[w] && int'(drain.req.core) == recs[oldest].core)
          found = w;
      if (found < 0) begin
        failures++;
        $display("FAIL @%0d: CN %0d entry out of TS order or wrong: waddr %h", cyc, drain.req.cn, drain.waddr);
      end else begin
        recs[oldest].mask[found] = 1'b0;
        recs[oldest].left--;
      end
    end
  end

  // deliver VALs after random delays (reordering)
  always @(negedge clk) begin
    val_valid = 0; val = '0;
    for (int i = 0; i < inflight.size(); i++)
      if (inflight[i].due <= cyc) begin
        rec_t r;
        r = recs[inflight[i].idx];
        val.mtype = MSG_VAL; val.req.cn = cn_id_t'(r.cn); val.req.core = 5'(r.core);
        val.tag = tag_t'(r.tag); val.ts = ts_t'(r.ts); val.line = r.line;
        val_valid = 1;
        inflight.delete(i);
        break;
      end
    drain_ready = ($urandom_range(0, 99) < (cyc < 3000 ? 30 : 90));
    ack_ready   = ($urandom_range(0, 3) != 0);
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tagc = 0;
    repl_valid = 0; repl = '0;
    for (int i = 0; i < NCN; i++) tscnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      rec_t r;
      longint t_take, t_ack;
      int k;
      r.cn = $urandom_range(0, 3);
      r.core = $urandom_range(0, 3);
      r.tag = tagc; tagc = (tagc + 1) % 128;
      r.line = {$urandom_range(0, 255), $urandom()};
      r.mask = mask_t'($urandom()) & mask_t'($urandom());
      if (r.mask == 0) r.mask = 16'h0001;
      for (int w = 0; w < WORDS; w++) r.data[w] = r.mask[w] ? $urandom() : 0;
      k = $countones(r.mask);
      r.left = k;
      @(negedge clk);
      repl_valid = 1;
      repl = '0; repl.mtype = MSG_REPL; repl.req.cn = cn_id_t'(r.cn); repl.req.core = 5'(r.core);
      repl.tag = tag_t'(r.tag); repl.rank = 2'(n % 3); repl.line = r.line; repl.mask = r.mask;
      repl.data = r.data; repl.src = cn_id_t'(r.cn); repl.dst = my_cn;
      do @(posedge clk); while (!(repl_valid && repl_ready));
      t_take = cyc;
      @(negedge clk) repl_valid = 0;
      do @(posedge clk); while (!(ack_valid && ack_ready));
      t_ack = cyc;
      checks++;
      if (ack.mtype != MSG_REPL_ACK || int'(ack.dst) != r.cn || int'(ack.req.core) != r.core
          || int'(ack.tag) != r.tag || ack.rank != 2'(n % 3) || ack.src != my_cn) begin
        failures++; $display("FAIL REPL_ACK fields");
      end
      if (occupancy + k <= ENTRIES && t_ack - t_take == longint'(k + 1)) ; // fast path seen
      if (n < 3) begin
        checks++;
        if (t_ack - t_take < longint'(k + 1)) begin
          failures++; $display("FAIL ack %0d cycles after a %0d-word REPL", t_ack - t_take, k);
        end
        if (t_ack - t_take > longint'(k + 1) + 4) begin
          failures++; $display("FAIL ack %0d cycles after a %0d-word REPL (slots free)", t_ack - t_take, k);
        end
      end
      words_sent += k;
      tscnt[r.cn] = (tscnt[r.cn] + 1) % 128;
      r.ts = tscnt[r.cn];
      recs.push_back(r);
      inflight.push_back('{cyc + $urandom_range(0, 25), recs.size() - 1});
    end
    while (n_drained < words_sent && cyc < 200000) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++; if (n_drained != words_sent) begin failures++; $display("FAIL drained %0d of %0d words", n_drained, words_sent); end
    checks++; if (occupancy != 0) begin failures++; $display("FAIL buffer not empty"); end
    checks++; if (n_full == 0) begin failures++; $display("FAIL buffer never full"); end
    checks++; if (n_hold == 0) begin failures++; $display("FAIL no VAL ever held back by TS order"); end
    $display("words=%0d full_cycles=%0d ts_hold_cycles=%0d", words_sent, n_full, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
