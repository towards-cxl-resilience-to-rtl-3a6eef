// tb_dram_log_ctrl: appends random log entries, lets the controller dump them
// and checks the dump against a model kept here.
//
// A small log (64 slots) and a short dump period (600 cycles) are used.
// Checks: entries are written to consecutive, wrapping DRAM slots; every dump
// starts DUMP_PERIOD cycles after the previous one ended; the dump messages
// carry exactly the entries present at its start that this CN must save
// (reference hash written here), oldest first, five per message with the
// right count; after sync_ack the dumped entries are freed; a full log
// stalls the input.
//
// Interface and timing: the DRAM is tb/dram_log_model.sv; dump messages and
// sync_ack are back-pressured at random. From the paper: the log is read
// oldest to newest, each unit saves only its share of addresses, and sync
// happens before the free. Own choices: 5 entries per 64-byte message, no
// gzip, only the dumped part freed.
module tb_dram_log_ctrl;
  import recxl_pkg::*;
  localparam int unsigned NCN = 16, NR = 3, LOGN = 64, PERIOD = 600;
  localparam int unsigned AW = $clog2(LOGN);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cn_id_t my_cn = 5'd3;
  logic pause = 0;
  logic in_valid, in_ready;
  dram_entry_t in_entry;
  logic dw_valid, dw_ready, dr_valid, dr_ready, drr_valid;
  logic [AW-1:0] dw_addr, dr_addr;
  dram_entry_t dw_data, drr_data;
  logic dm_valid, dm_ready;
  logic [DUMP_MSG_W-1:0] dm_data;
  logic sync_req, sync_ack;
  logic dumping, ev_dump_done, ev_log_full;
  logic [$clog2(LOGN+1)-1:0] fill;

  dram_log_ctrl #(.NCN(NCN), .NR(NR), .LOG_ENTRIES(LOGN), .DUMP_PERIOD(PERIOD)) dut (.*);
  dram_log_model #(.ENTRIES(LOGN), .LAT(3)) u_dram (.*);

  int checks = 0, failures = 0, n_full = 0, n_dumps = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int ref_saver(line_addr_t l, int req);
    int f = 0, r, k;
    for (int i = 0; i < 6; i++) f ^= int'((l >> (8 * i)) & 44'hff);
    f = f % NCN;
    k = int'(l[7:0]) % NR;
    r = (f + k) % NCN;
    if (r == req) r = (f + NR) % NCN;
    return r;
  endfunction

  dram_entry_t logq[$];     // entries in the log, oldest first
  dram_entry_t expq[$];     // entries the running dump must send
  int          snap_n = 0;
  int          wr_ptr = 0;
  longint      last_end = 0;
  int          sz_last = 0;   // log size before the previous edge's append

  always @(posedge clk) if (rst_n) begin
    if (ev_log_full) n_full++;
    if (dw_valid && dw_ready) begin
      checks++;
      if (int'(dw_addr) != wr_ptr || dw_data != in_entry) begin
        failures++; $display("%0t FAIL write slot %0d want %0d", $time, dw_addr, wr_ptr);
      end
      wr_ptr = (wr_ptr + 1) % LOGN;
    end
    // dump start
    if (dumping && !$past(dumping)) begin
      checks++;
      if (cyc - last_end < PERIOD - 1 || cyc - last_end > PERIOD + 1) begin
        failures++; $display("%0t FAIL dump started %0d cycles after the last", $time, cyc - last_end);
      end
      expq.delete();
      // the controller noted its tail one edge earlier
      snap_n = sz_last;
      for (int i = 0; i < snap_n; i++)
        if (ref_saver(line_of_waddr(logq[i].waddr), int'(logq[i].req.cn)) == int'(my_cn))
          expq.push_back(logq[i]);
    end
    if (dm_valid && dm_ready) begin
      int cnt;
      cnt = int'(dm_data[DUMP_PER_MSG*DRAM_ENTRY_W +: DUMP_CNT_W]);
      checks++;
      if (cnt < 1 || cnt > 5 || (cnt < 5 && expq.size() != cnt)) begin
        failures++; $display("%0t FAIL message count %0d with %0d expected left", $time, cnt, expq.size());
      end
      for (int k = 0; k < cnt; k++) begin
        dram_entry_t e;
        e = dram_entry_t'(dm_data[k*DRAM_ENTRY_W +: DRAM_ENTRY_W]);
        checks++;
        if (expq.size() == 0 || e != expq[0]) begin
          failures++; $display("%0t FAIL dumped entry %0d differs", $time, k);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
    end
    if (sync_req && sync_ack) begin
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0t FAIL %0d entries not dumped", $time, expq.size()); end
      for (int i = 0; i < snap_n; i++) void'(logq.pop_front());
      n_dumps++;
      last_end = cyc + 1;
    end
    sz_last = logq.size();
    if (in_valid && in_ready) logq.push_back(in_entry);
  end

  always @(negedge clk) begin
    dm_ready = ($urandom_range(0, 3) != 0);
    sync_ack = sync_req && ($urandom_range(0, 7) == 0);
    in_valid = ($urandom_range(0, 99) < ((cyc / 1500) % 2 == 0 ? 5 : 60));
    in_entry.req.cn = cn_id_t'($urandom_range(0, NCN - 1));
    in_entry.req.core = 5'($urandom_range(0, 3));
    in_entry.waddr = word_addr({$urandom_range(0, 15), $urandom()}, 4'($urandom()));
    in_entry.value = $urandom();
    in_entry.valid = 1'b1;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    last_end = cyc + 1;
    while (n_dumps < 10) @(posedge clk);
    checks++; if (n_full == 0) begin failures++; $display("%0t FAIL log never full", $time); end
    checks++; if (int'(fill) != logq.size()) begin failures++; $display("%0t FAIL fill %0d model %0d", $time, fill, logq.size()); end
    $display("dumps=%0d full_cycles=%0d", n_dumps, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
