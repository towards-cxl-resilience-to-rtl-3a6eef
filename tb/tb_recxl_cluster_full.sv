// tb_recxl_cluster_full: the cluster at the paper's size, default parameters
// (16 CNs x 4 cores, N_r = 3, 72-entry store buffers, 4 KB SRAM Log Buffers,
// 18 MB DRAM logs dumped every 2.5 ms at 500 MHz, 1024-cycle link timeout).
//
// A few stores are followed end to end: CN 0 core 0 writes three words of
// one line (they coalesce into one store-buffer entry), CN 5 core 2 and
// CN 15 core 3 write one word each. Checks: each store commits once with its
// data; each replica of the reference hash appends exactly the store's words
// to its DRAM log, and no other CN logs anything; the log dump that follows
// one period later sends every logged word from exactly one member of its
// Replica Group (the reference saver), and every Logging Unit completes the
// dump. The DRAM logs are dram_log_model instances of full size (sparse).
//
// Interface and timing: the top with no parameter overrides, at the paper's
// sizes; stores enter through the core ports, and the DRAMs and MNs are
// modelled here. The checked behaviour is the paper's; the particular stores
// are my own choice.
module tb_recxl_cluster_full;
  import recxl_pkg::*;
  localparam int unsigned NCN = 16, NCORE = 4, NR = 3, LOGN = 1572864, PERIOD = 1250000;
  localparam int unsigned AW = $clog2(LOGN);

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [NCN-1:0]   cn_halt = '0;
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
  logic [NCN-1:0]   rec_interrupt = '0, rec_interrupt_resp, recov_end = '0, recov_end_resp, lu_paused;
  logic [NCN-1:0]   viral_status;
  logic             msi_valid, msi_ready = 1'b1;
  cn_id_t           msi_dst, msi_failed_cn;
  logic [NCORE-1:0] ev_coalesce [NCN];
  logic [NCORE-1:0] ev_repl_at_head [NCN];
  logic [NCORE-1:0] ev_sb_full [NCN];
  logic [NCN-1:0]   ev_buf_full, ev_ts_hold, ev_dump_done, ev_log_full;
  logic             ev_drop;

  recxl_cluster dut (.*);

  for (genvar n = 0; n < NCN; n++) begin : g_dram
    dram_log_model #(.ENTRIES(LOGN), .LAT(8)) u_dram (
      .clk, .dw_valid(dw_valid[n]), .dw_ready(dw_ready[n]), .dw_addr(dw_addr[n]),
      .dw_data(dw_data[n]), .dr_valid(dr_valid[n]), .dr_ready(dr_ready[n]),
      .dr_addr(dr_addr[n]), .drr_valid(drr_valid[n]), .drr_data(drr_data[n]));
  end

  int checks = 0, failures = 0;
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

  // the stores: {cn, core, line, word, value}
  typedef struct { int cn; int core; line_addr_t line; int widx; word_t data; } st_t;
  st_t sts [5];
  dram_entry_t exp_log [NCN][$];
  dram_entry_t exp_dump [$];
  int n_commit = 0, n_logged = 0, n_dumped = 0, n_dump_done = 0;
  logic [NCN-1:0] done_seen = '0;
  logic [4:0]     covered = '0;    // store i written to L1

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NCN; n++) begin
      for (int c = 0; c < NCORE; c++) if (commit_valid[n][c]) begin
        n_commit++;
        checks++;
        for (int w = 0; w < WORDS; w++) if (commit_mask[n][c][w]) begin
          int k;
          k = -1;
          for (int i = 0; i < 5; i++)
            if (sts[i].cn == n && sts[i].core == c && sts[i].line == commit_line[n][c] && sts[i].widx == w) k = i;
          if (k < 0 || covered[k] || commit_data[n][c][w] != sts[k].data) fail("commit differs");
          else covered[k] = 1'b1;
        end
      end
      if (dw_valid[n] && dw_ready[n]) begin
        int k;
        n_logged++;
        checks++;
        k = -1;
        foreach (exp_log[n][i]) if (exp_log[n][i] == dw_data[n]) k = i;
        if (k < 0) fail($sformatf("CN%0d logged an unexpected entry", n));
        else exp_log[n].delete(k);
      end
      if (dm_valid[n] && dm_ready[n]) begin
        int cnt;
        cnt = int'(dm_data[n][DUMP_PER_MSG*DRAM_ENTRY_W +: DUMP_CNT_W]);
        for (int k = 0; k < cnt; k++) begin
          dram_entry_t e;
          line_addr_t l;
          int j;
          e = dram_entry_t'(dm_data[n][k*DRAM_ENTRY_W +: DRAM_ENTRY_W]);
          l = line_of_waddr(e.waddr);
          n_dumped++;
          checks++;
          if (ref_rep(l, int'(e.req.cn), int'(l[7:0]) % NR) != n) fail("dumped by a CN that is not the saver");
          j = -1;
          foreach (exp_dump[i]) if (exp_dump[i] == e) j = i;
          if (j < 0) fail("dumped entry unknown or dumped twice");
          else exp_dump.delete(j);
        end
      end
      if (ev_dump_done[n]) begin n_dump_done++; done_seen[n] = 1'b1; end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < NCN; n++) begin
      coh_ready[n] = coh_req_valid[n];
      dm_ready[n] = 1'b1;
      sync_ack[n] = sync_req[n];
    end
  end

  initial begin
    #20000000;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sts[0] = '{0, 0, 44'h0_1234_5670, 3, 32'hcafe_0003};
    sts[1] = '{0, 0, 44'h0_1234_5670, 7, 32'hcafe_0007};
    sts[2] = '{0, 0, 44'h0_1234_5670, 12, 32'hcafe_000c};
    sts[3] = '{5, 2, 44'h0_0bad_0c01, 0, 32'h5555_0000};
    sts[4] = '{15, 3, 44'h0_7777_0044, 15, 32'hffff_000f};
    for (int i = 0; i < 5; i++) begin
      dram_entry_t e;
      e.req.cn = 5'(sts[i].cn); e.req.core = 5'(sts[i].core);
      e.waddr = word_addr(sts[i].line, 4'(sts[i].widx)); e.value = sts[i].data; e.valid = 1'b1;
      for (int k = 0; k < NR; k++) exp_log[ref_rep(sts[i].line, sts[i].cn, k)].push_back(e);
      exp_dump.push_back(e);
    end
    for (int n = 0; n < NCN; n++) begin
      st_valid[n] = '0; coh_ready[n] = '0;
      for (int c = 0; c < NCORE; c++) begin st_line[n][c] = '0; st_widx[n][c] = '0; st_data[n][c] = '0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // three back-to-back stores of CN 0 core 0 to one line, one store elsewhere
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      st_valid[0][0] = 1'b1; st_line[0][0] = sts[i].line; st_widx[0][0] = 4'(sts[i].widx); st_data[0][0] = sts[i].data;
      if (i == 0) begin
        st_valid[5][2] = 1'b1; st_line[5][2] = sts[3].line; st_widx[5][2] = 4'(sts[3].widx); st_data[5][2] = sts[3].data;
        st_valid[15][3] = 1'b1; st_line[15][3] = sts[4].line; st_widx[15][3] = 4'(sts[4].widx); st_data[15][3] = sts[4].data;
      end else begin
        st_valid[5][2] = 1'b0; st_valid[15][3] = 1'b0;
      end
    end
    @(negedge clk);
    st_valid[0][0] = 1'b0;
    repeat (300) @(posedge clk);
    checks++; if (covered != '1) fail($sformatf("stores committed: %b", covered));
    for (int n = 0; n < NCN; n++) begin
      checks++;
      if (exp_log[n].size() != 0) fail($sformatf("CN%0d: %0d words not logged", n, exp_log[n].size()));
    end
    // wait for the first periodic dump
    while (done_seen != '1) @(posedge clk);
    checks++; if (exp_dump.size() != 0) fail($sformatf("%0d words never dumped", exp_dump.size()));
    $display("commits=%0d logged=%0d dumped=%0d dumps done=%0d", n_commit, n_logged, n_dumped, n_dump_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
