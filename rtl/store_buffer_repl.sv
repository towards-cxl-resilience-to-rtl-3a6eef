// store_buffer_repl: one core's TSO store buffer (SB) with ReCXL-proactive
// replication and store coalescing.
//
// Retired stores enter at the tail and leave (commit) from the head, in order
// and one at a time. Replication follows the proactive scheme of the paper,
// modified for coalescing:
//   * a store entering the SB is merged into the youngest entry if that entry
//     is to the same line, has not yet sent its REPLs and does not yet hold the
//     word; otherwise it takes a new entry;
//   * an entry sends its REPLs (one per replica, carrying the word mask and the
//     values of every store merged into it) as soon as a younger entry exists,
//     or when it reaches the head without having sent them. REPLs leave in SB
//     order, but the REPL -> REPL_ACK round trips of different entries overlap;
//   * the head commits when (a) the L1 reports that it holds the line with
//     write permission (coherence transaction done, coh_ready) and (b) every
//     replica has returned its REPL_ACK. It then sends one VAL per replica and,
//     once the last VAL is handed to the port, writes the line to L1
//     (commit_* pulse) and frees the entry.
//
// Interface timing: st_* is a valid/ready port, ready whenever an entry is
// free (own choice: a full SB stalls even a store that could be merged). msg_*
// is a valid/ready port, one REPL or VAL per cycle; VALs win over REPLs.
// ack_* is always accepted; tag = SB slot, rank = replica index. coh_req_* is
// a level request for the head line; coh_ready is a level answer from the L1.
// The best case from an empty SB: REPLs leave 1..NR cycles after the store
// enters; with acks back and coh_ready high, the VALs take NR cycles and the
// commit pulse comes with the last one.
//
// Own choices (the paper is silent): one store per cycle; SB depth defaults to
// the 72-entry store queue of the evaluated core (the paper treats SQ and SB as
// logical parts of one structure); the slot tag in each message.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module store_buffer_repl
  import recxl_pkg::*;
#(
  parameter int unsigned NCN   = 16,
  parameter int unsigned NR    = 3,
  parameter int unsigned DEPTH = 72
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cn_id_t                 my_cn,
  input  logic [CORE_ID_W-1:0]   my_core,
  // retiring stores
  input  logic                   st_valid,
  output logic                   st_ready,
  input  line_addr_t             st_line,
  input  logic [WIDX_W-1:0]      st_widx,
  input  word_t                  st_data,
  // coherence transaction of the head store (handled by the cache hierarchy)
  output logic                   coh_req_valid,
  output line_addr_t             coh_req_line,
  input  logic                   coh_ready,
  // outgoing REPL / VAL
  output logic                   msg_valid,
  input  logic                   msg_ready,
  output msg_t                   msg,
  // incoming REPL_ACK
  input  logic                   ack_valid,
  input  msg_t                   ack,
  // commit to L1
  output logic                   commit_valid,
  output line_addr_t             commit_line,
  output mask_t                  commit_mask,
  output logic [WORDS-1:0][WORD_W-1:0] commit_data,
  // event pulses for statistics
  output logic                   ev_coalesce,
  output logic                   ev_repl_at_head,
  output logic                   ev_full_stall,
  output logic                   busy
);

  localparam int unsigned PW = $clog2(DEPTH + 1);

  logic [DEPTH-1:0]           v_q, sent_q;
  line_addr_t                 line_q [DEPTH];
  mask_t                      mask_q [DEPTH];
  word_t                      data_q [DEPTH][WORDS];
  logic [NR-1:0]              acks_q [DEPTH];

  logic [TAG_W-1:0]           head_q, tail_q, rp_q;
  logic [PW-1:0]              count_q, unsent_q;
  logic [RANK_W:0]            rk_q, vk_q;

  function automatic logic [TAG_W-1:0] inc(logic [TAG_W-1:0] p);
    return (p == TAG_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  logic [TAG_W-1:0] last;
  assign last = (tail_q == '0) ? TAG_W'(DEPTH - 1) : tail_q - 1'b1;

  // replica lists for the REPL pointer entry and the head entry
  cn_id_t rp_reps [NR];
  cn_id_t hd_reps [NR];
  rank_t  unused_rank_a, unused_rank_b;

  replica_select #(.NCN(NCN), .NR(NR)) u_sel_rp (
    .line_addr(line_q[rp_q]), .req_cn(my_cn), .replica_cn(rp_reps), .saver_rank(unused_rank_a));
  replica_select #(.NCN(NCN), .NR(NR)) u_sel_hd (
    .line_addr(line_q[head_q]), .req_cn(my_cn), .replica_cn(hd_reps), .saver_rank(unused_rank_b));

  // ---- control decisions -------------------------------------------------
  logic repl_want, val_want, repl_fire, val_fire, last_val, last_repl;
  logic head_ok, coalesce, alloc, st_fire;

  assign head_ok   = (count_q != 0) && sent_q[head_q] && (&acks_q[head_q]) && coh_ready;
  assign val_want  = head_ok;
  assign repl_want = (unsent_q != 0) && ((unsent_q > 1) || (rp_q == head_q));
  assign msg_valid = val_want || repl_want;
  assign val_fire  = val_want && msg_ready;
  assign repl_fire = !val_want && repl_want && msg_ready;
  assign last_val  = val_fire && (vk_q == (RANK_W+1)'(NR - 1));
  assign last_repl = repl_fire && (rk_q == (RANK_W+1)'(NR - 1));

  assign st_ready  = (count_q < PW'(DEPTH));
  assign st_fire   = st_valid && st_ready;
  // merge into the youngest entry if it is still open
  assign coalesce  = st_fire && (count_q != 0) && !sent_q[last] && (line_q[last] == st_line)
                   && !mask_q[last][st_widx]
                   && !((rp_q == last) && ((rk_q != 0) || repl_fire));
  assign alloc     = st_fire && !coalesce;

  always_comb begin
    msg      = '0;
    msg.req  = '{cn: my_cn, core: my_core};
    msg.src  = my_cn;
    if (val_want) begin
      msg.mtype = MSG_VAL;
      msg.dst   = hd_reps[vk_q[RANK_W-1:0]];
      msg.tag   = head_q;
      msg.rank  = rank_t'(vk_q);
      msg.line  = line_q[head_q];
    end else begin
      msg.mtype = MSG_REPL;
      msg.dst   = rp_reps[rk_q[RANK_W-1:0]];
      msg.tag   = rp_q;
      msg.rank  = rank_t'(rk_q);
      msg.line  = line_q[rp_q];
      msg.mask  = mask_q[rp_q];
      for (int w = 0; w < WORDS; w++) msg.data[w] = mask_q[rp_q][w] ? data_q[rp_q][w] : '0;
    end
  end

  assign coh_req_valid = (count_q != 0);
  assign coh_req_line  = line_q[head_q];

  // ---- state ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0; sent_q <= '0;
      head_q <= '0; tail_q <= '0; rp_q <= '0;
      count_q <= '0; unsent_q <= '0;
      rk_q <= '0; vk_q <= '0;
      commit_valid <= 1'b0;
      commit_line <= '0; commit_mask <= '0; commit_data <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        acks_q[i] <= '0; line_q[i] <= '0; mask_q[i] <= '0;
      end
    end else begin
      commit_valid <= 1'b0;

      // REPL sending, in SB order
      if (repl_fire) begin
        if (last_repl) begin
          rk_q <= '0;
          sent_q[rp_q] <= 1'b1;
          rp_q <= inc(rp_q);
        end else begin
          rk_q <= rk_q + 1'b1;
        end
      end

      // REPL_ACK
      if (ack_valid) acks_q[ack.tag][ack.rank] <= 1'b1;

      // VALs and commit of the head
      if (val_fire) begin
        if (last_val) begin
          vk_q <= '0;
          v_q[head_q] <= 1'b0;
          sent_q[head_q] <= 1'b0;
          head_q <= inc(head_q);
          commit_valid <= 1'b1;
          commit_line  <= line_q[head_q];
          commit_mask  <= mask_q[head_q];
          for (int w = 0; w < WORDS; w++) commit_data[w] <= mask_q[head_q][w] ? data_q[head_q][w] : '0;
        end else begin
          vk_q <= vk_q + 1'b1;
        end
      end

      // new store
      if (coalesce) begin
        mask_q[last][st_widx] <= 1'b1;
      end else if (alloc) begin
        v_q[tail_q]    <= 1'b1;
        sent_q[tail_q] <= 1'b0;
        line_q[tail_q] <= st_line;
        mask_q[tail_q] <= mask_t'(1) << st_widx;
        acks_q[tail_q] <= '0;
        tail_q         <= inc(tail_q);
      end

      count_q  <= count_q + PW'(alloc) - PW'(last_val);
      unsent_q <= unsent_q + PW'(alloc) - PW'(last_repl);
    end
  end

  // store data: a plain memory, one word written per store
  always_ff @(posedge clk) begin
    if (coalesce)   data_q[last][st_widx]   <= st_data;
    else if (alloc) data_q[tail_q][st_widx] <= st_data;
  end

  assign ev_coalesce     = coalesce;
  assign ev_repl_at_head = repl_fire && (rk_q == 0) && (rp_q == head_q);
  assign ev_full_stall   = st_valid && !st_ready;
  assign busy            = (count_q != 0);

  // ---- protocol rules ------------------------------------------------------
  // a REPL_ACK must belong to an entry that has sent (or is sending) REPLs
  assert property (@(posedge clk) disable iff (!rst_n)
                   ack_valid |-> v_q[ack.tag] && (ack.mtype == MSG_REPL_ACK));
  // a message, once offered, stays until taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   msg_valid && !msg_ready |=> msg_valid);

endmodule
