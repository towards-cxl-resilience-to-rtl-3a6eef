// sram_log_buffer: the SRAM Log Buffer of a Logging Unit.
//
// A REPL carries one store or several coalesced stores to one line. The
// buffer splits it into one log entry per updated word (Requester ID, word
// address, word value), writing one entry per cycle into free slots, and then
// returns a REPL_ACK to the requester. The entries stay not-valid until the
// VAL for the same store arrives; the VAL sets their Valid bit and writes its
// Logical TS into them. Valid entries are moved to the DRAM log in the
// background, one per cycle, but for each requester CN strictly in TS order:
// the buffer keeps the next expected TS of every CN and only moves an entry
// whose TS equals it, so VALs that the fabric reordered cannot reorder the
// log. The TS is stripped on the way out. The expected TS of a CN advances
// after the last entry carrying that TS has left.
//
// Timing: repl_* valid/ready (ready only when no REPL is being split);
// a REPL of k words takes k cycles if slots are free, then ack_* (valid/ready)
// carries the REPL_ACK; val_* is always accepted and takes effect in one
// cycle; drain_* is valid/ready towards the DRAM log controller.
//
// Capacity: 4 KB of 96-bit log entries (10+7+46+32+1 bits) = 341 entries.
// Each slot also holds the store-buffer tag and an allocation flag (own
// choice, used to match the VAL). If no slot is free the split waits
// (ev_full pulses each such cycle). Expected TS values reset to 1, matching
// the requester's counters. A VAL whose entries are not present (the paper's
// fabric never produces one) is ignored.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module sram_log_buffer
  import recxl_pkg::*;
#(
  parameter int unsigned NCN     = 16,
  parameter int unsigned ENTRIES = 341
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cn_id_t      my_cn,
  // REPL in
  input  logic        repl_valid,
  output logic        repl_ready,
  input  msg_t        repl,
  // REPL_ACK out
  output logic        ack_valid,
  input  logic        ack_ready,
  output msg_t        ack,
  // VAL in
  input  logic        val_valid,
  input  msg_t        val,
  // entries towards the DRAM log
  output logic        drain_valid,
  input  logic        drain_ready,
  output dram_entry_t drain,
  // status
  output logic        busy,          // a REPL is being split or acknowledged
  output logic        drain_pending, // some entry could be moved now
  output logic        ev_full,
  output logic        ev_ts_hold,    // a valid entry waits for an older TS
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(NCN);

  // Per-entry control fields are flip-flops (searched every cycle); the word
  // address and value sit in a plain memory read only at the drain index.
  logic [ENTRIES-1:0] used_q, valid_q;
  tag_t        tag_q [ENTRIES];
  req_id_t     req_q [ENTRIES];
  ts_t         ts_q  [ENTRIES];
  logic [LOG_WADDR_W-1:0] waddr_m [ENTRIES];
  word_t       value_m [ENTRIES];
  ts_t         exp_ts_q [NCN];

  typedef enum logic [1:0] {S_IDLE, S_SPLIT, S_ACK} st_e;
  st_e   st_q;
  msg_t  hold_q;
  mask_t left_q;

  // ---- free slot and next word to split ------------------------------------
  logic          free_found;
  logic [IW-1:0] free_idx;
  logic [WIDX_W-1:0] wsel;
  always_comb begin
    free_found = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!used_q[i]) begin free_found = 1'b1; free_idx = IW'(i); end
    wsel = '0;
    for (int w = WORDS - 1; w >= 0; w--)
      if (left_q[w]) wsel = WIDX_W'(w);
  end

  // ---- entry eligible for the DRAM log ---------------------------------------
  logic          dr_found, dr_more;
  logic [IW-1:0] dr_idx;
  logic [ENTRIES-1:0] elig, valid_wait, same;
  req_id_t       dr_req;
  ts_t           dr_ts;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      elig[i] = used_q[i] && valid_q[i] && (ts_q[i] == exp_ts_q[req_q[i].cn[CW-1:0]]);
      valid_wait[i] = used_q[i] && valid_q[i] && !elig[i];
    end
    dr_found = 1'b0; dr_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (elig[i]) begin dr_found = 1'b1; dr_idx = IW'(i); end
    dr_req = req_q[dr_idx];
    dr_ts  = ts_q[dr_idx];
    // is there another entry of the same requester CN with the same TS?
    for (int i = 0; i < ENTRIES; i++)
      same[i] = elig[i] && IW'(i) != dr_idx && req_q[i].cn == dr_req.cn && ts_q[i] == dr_ts;
    dr_more = |same;
  end

  assign drain_valid = dr_found;
  assign drain       = '{req: dr_req, waddr: waddr_m[dr_idx], value: value_m[dr_idx], valid: 1'b1};
  assign drain_pending = dr_found;
  assign ev_ts_hold  = |valid_wait;

  assign repl_ready = (st_q == S_IDLE);
  assign ack_valid  = (st_q == S_ACK);
  always_comb begin
    ack       = '0;
    ack.mtype = MSG_REPL_ACK;
    ack.src   = my_cn;
    ack.dst   = hold_q.req.cn;
    ack.req   = hold_q.req;
    ack.tag   = hold_q.tag;
    ack.rank  = hold_q.rank;
    ack.line  = hold_q.line;
  end
  assign busy    = (st_q != S_IDLE);
  assign ev_full = (st_q == S_SPLIT) && !free_found;
  assign occupancy = ($clog2(ENTRIES+1))'($countones(used_q));

  logic do_write, do_drain;
  assign do_write = (st_q == S_SPLIT) && free_found;
  assign do_drain = dr_found && drain_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      hold_q <= '0;
      left_q <= '0;
      used_q <= '0;
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        tag_q[i] <= '0; req_q[i] <= '0; ts_q[i] <= '0;
      end
      for (int c = 0; c < NCN; c++) exp_ts_q[c] <= ts_t'(1);
    end else begin
      case (st_q)
        S_IDLE: if (repl_valid) begin
          hold_q <= repl;
          left_q <= repl.mask;
          st_q   <= (repl.mask == '0) ? S_ACK : S_SPLIT;
        end
        S_SPLIT: if (do_write) begin
          left_q[wsel] <= 1'b0;
          if ((left_q & ~(mask_t'(1) << wsel)) == '0) st_q <= S_ACK;
        end
        S_ACK: if (ack_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase

      for (int i = 0; i < ENTRIES; i++) begin
        // VAL: validate and timestamp every entry of that store
        if (val_valid && used_q[i] && !valid_q[i] && req_q[i] == val.req && tag_q[i] == val.tag) begin
          valid_q[i] <= 1'b1;
          ts_q[i]    <= val.ts;
        end
        if (do_drain && dr_idx == IW'(i)) begin
          used_q[i]  <= 1'b0;
          valid_q[i] <= 1'b0;
        end
        if (do_write && free_idx == IW'(i)) begin
          used_q[i]  <= 1'b1;
          valid_q[i] <= 1'b0;
          tag_q[i]   <= hold_q.tag;
          req_q[i]   <= hold_q.req;
          ts_q[i]    <= '0;
        end
      end

      if (do_drain && !dr_more)
        exp_ts_q[dr_req.cn[CW-1:0]] <= exp_ts_q[dr_req.cn[CW-1:0]] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_write) begin
      waddr_m[free_idx] <= word_addr(hold_q.line, wsel);
      value_m[free_idx] <= hold_q.data[wsel];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   repl_valid && repl_ready |-> repl.mtype == MSG_REPL);
  assert property (@(posedge clk) disable iff (!rst_n)
                   val_valid |-> val.mtype == MSG_VAL);

endmodule
