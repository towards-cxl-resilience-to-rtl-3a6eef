// compute_node: the ReCXL hardware of one compute node (CN).
//
// A CN has NCORE cores. Each core's store buffer (store_buffer_repl) turns
// remote stores into REPL and VAL messages and takes back REPL_ACKs. The CN's
// CXL port has two lanes (own choice, in the manner of CXL's separate message
// classes): a request lane carrying REPLs and a response lane carrying
// REPL_ACKs and VALs. Responses are always accepted by the receiving CN, so a
// REPL waiting for a busy Logging Unit can never block the REPL_ACK that
// would free it (with one shared lane the CNs deadlock). Each lane merges its
// sources with a round-robin arbiter; the response lane stamps outgoing VALs
// with the per-destination logical timestamp (val_timestamper). Incoming
// REPLs and VALs go to the Logging Unit, REPL_ACKs to the store buffer of the
// core named in the Requester ID.
//
// The cores themselves, their caches and the coherence transaction are not
// part of this block: stores enter through st_*, the head store's coherence
// request leaves on coh_req_* and coh_ready says the line is held with write
// permission; committed lines leave on commit_*. The Logging Unit's DRAM
// device, its dump path to the MNs and the recovery handshake are ports.
//
// halt models a fail-stop failure of the whole CN: from that cycle on the CN
// sends nothing, its link shows no activity (link_alive low) and whatever
// arrives is absorbed unanswered.
//
// Lint note: the Logging Unit's buf_occupancy and log_fill status outputs
// are left unconnected on purpose (PINCONNECTEMPTY); the node exposes only
// the paused flag and the event pulses.
module compute_node
  import recxl_pkg::*;
#(
  parameter int unsigned NCN             = 16,
  parameter int unsigned NCORE           = 4,
  parameter int unsigned NR              = 3,
  parameter int unsigned SB_DEPTH        = 72,
  parameter int unsigned LOG_BUF_ENTRIES = 341,
  parameter int unsigned LOG_ENTRIES     = 1572864,
  parameter int unsigned DUMP_PERIOD     = 1250000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cn_id_t               my_cn,
  input  logic                 halt,
  // cores
  input  logic [NCORE-1:0]     st_valid,
  output logic [NCORE-1:0]     st_ready,
  input  line_addr_t           st_line [NCORE],
  input  logic [WIDX_W-1:0]    st_widx [NCORE],
  input  word_t                st_data [NCORE],
  output logic [NCORE-1:0]     coh_req_valid,
  output line_addr_t           coh_req_line [NCORE],
  input  logic [NCORE-1:0]     coh_ready,
  output logic [NCORE-1:0]     commit_valid,
  output line_addr_t           commit_line [NCORE],
  output mask_t                commit_mask [NCORE],
  output logic [WORDS-1:0][WORD_W-1:0] commit_data [NCORE],
  // CXL port, request lane (REPL)
  output logic                 req_out_valid,
  input  logic                 req_out_ready,
  output msg_t                 req_out_msg,
  input  logic                 req_in_valid,
  output logic                 req_in_ready,
  input  msg_t                 req_in_msg,
  // CXL port, response lane (REPL_ACK, VAL); always accepted
  output logic                 out_valid,
  input  logic                 out_ready,
  output msg_t                 out_msg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  msg_t                 in_msg,
  output logic                 link_alive,
  // Logging Unit DRAM
  output logic                 dw_valid,
  input  logic                 dw_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dw_addr,
  output dram_entry_t          dw_data,
  output logic                 dr_valid,
  input  logic                 dr_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dr_addr,
  input  logic                 drr_valid,
  input  dram_entry_t          drr_data,
  // Logging Unit dump and recovery handshake
  output logic                 dm_valid,
  input  logic                 dm_ready,
  output logic [DUMP_MSG_W-1:0] dm_data,
  output logic                 sync_req,
  input  logic                 sync_ack,
  input  logic                 rec_interrupt,
  output logic                 rec_interrupt_resp,
  input  logic                 recov_end,
  output logic                 recov_end_resp,
  output logic                 lu_paused,
  // statistics
  output logic [NCORE-1:0]     ev_coalesce,
  output logic [NCORE-1:0]     ev_repl_at_head,
  output logic [NCORE-1:0]     ev_sb_full,
  output logic                 ev_buf_full,
  output logic                 ev_ts_hold,
  output logic                 ev_dump_done,
  output logic                 ev_log_full
);

  localparam int unsigned NSRC = NCORE + 1;   // cores, then the Logging Unit
  localparam int unsigned SW   = $clog2(NSRC);
  localparam int unsigned QW   = $clog2(NCORE > 1 ? NCORE : 2);

  // response-lane sources: the cores' VALs, then the Logging Unit's REPL_ACKs
  logic [NSRC-1:0] src_valid, src_ready, gnt;
  logic [SW-1:0]   gidx;
  msg_t            src_msg [NSRC];
  // the cores' store-buffer ports and the request-lane arbiter
  logic [NCORE-1:0] sb_valid, sb_ready, sb_is_repl, rq_valid, rq_gnt;
  logic [QW-1:0]    rq_idx;
  msg_t             sb_msg [NCORE];

  // ---- ingress sorting ---------------------------------------------------------
  logic lu_repl_valid, lu_repl_ready, lu_val_valid;
  logic [NCORE-1:0] ack_valid;
  always_comb begin
    lu_val_valid  = 1'b0;
    ack_valid     = '0;
    if (in_valid && !halt) begin
      if (in_msg.mtype == MSG_VAL)      lu_val_valid = 1'b1;
      if (in_msg.mtype == MSG_REPL_ACK) ack_valid[in_msg.req.core[QW-1:0]] = 1'b1;
    end
  end
  assign in_ready      = 1'b1;
  assign lu_repl_valid = req_in_valid && !halt;
  assign req_in_ready  = lu_repl_ready || halt;

  // ---- cores' store buffers ------------------------------------------------------
  for (genvar c = 0; c < NCORE; c++) begin : g_core
    logic busy_unused;
    store_buffer_repl #(.NCN(NCN), .NR(NR), .DEPTH(SB_DEPTH)) u_sb (
      .clk, .rst_n, .my_cn, .my_core(CORE_ID_W'(c)),
      .st_valid(st_valid[c] && !halt), .st_ready(st_ready[c]),
      .st_line(st_line[c]), .st_widx(st_widx[c]), .st_data(st_data[c]),
      .coh_req_valid(coh_req_valid[c]), .coh_req_line(coh_req_line[c]), .coh_ready(coh_ready[c]),
      .msg_valid(sb_valid[c]), .msg_ready(sb_ready[c]), .msg(sb_msg[c]),
      .ack_valid(ack_valid[c]), .ack(in_msg),
      .commit_valid(commit_valid[c]), .commit_line(commit_line[c]),
      .commit_mask(commit_mask[c]), .commit_data(commit_data[c]),
      .ev_coalesce(ev_coalesce[c]), .ev_repl_at_head(ev_repl_at_head[c]),
      .ev_full_stall(ev_sb_full[c]), .busy(busy_unused));
  end

  // ---- Logging Unit ----------------------------------------------------------------
  logging_unit #(.NCN(NCN), .NR(NR), .LOG_BUF_ENTRIES(LOG_BUF_ENTRIES),
                 .LOG_ENTRIES(LOG_ENTRIES), .DUMP_PERIOD(DUMP_PERIOD)) u_lu (
    .clk, .rst_n, .my_cn,
    .repl_valid(lu_repl_valid), .repl_ready(lu_repl_ready), .repl(req_in_msg),
    .val_valid(lu_val_valid), .val(in_msg),
    .ack_valid(src_valid[NCORE]), .ack_ready(src_ready[NCORE]), .ack(src_msg[NCORE]),
    .dw_valid, .dw_ready, .dw_addr, .dw_data,
    .dr_valid, .dr_ready, .dr_addr, .drr_valid, .drr_data,
    .dm_valid, .dm_ready, .dm_data, .sync_req, .sync_ack,
    .rec_interrupt, .rec_interrupt_resp, .recov_end, .recov_end_resp, .paused(lu_paused), .buf_occupancy(), .log_fill(),
    .ev_buf_full, .ev_ts_hold, .ev_dump_done, .ev_log_full);

  // ---- egress: each core's message goes to the lane of its type -------------------------
  for (genvar c = 0; c < NCORE; c++) begin : g_lane
    assign sb_is_repl[c] = (sb_msg[c].mtype == MSG_REPL);
    assign rq_valid[c]   = sb_valid[c] && sb_is_repl[c];
    assign src_valid[c]  = sb_valid[c] && !sb_is_repl[c];
    assign src_msg[c]    = sb_msg[c];
    assign sb_ready[c]   = sb_is_repl[c] ? (rq_gnt[c] && req_out_ready && !halt) : src_ready[c];
  end

  rr_arbiter #(.N(NCORE)) u_rq_arb (
    .clk, .rst_n, .req(rq_valid), .advance(req_out_ready && !halt), .gnt(rq_gnt), .gnt_idx(rq_idx));
  assign req_out_valid = (|rq_valid) && !halt;
  assign req_out_msg   = sb_msg[rq_idx];

  // ---- response lane: arbiter and VAL timestamps ------------------------------------------
  logic ts_in_ready, ts_out_valid;
  rr_arbiter #(.N(NSRC)) u_arb (
    .clk, .rst_n, .req(src_valid), .advance(ts_in_ready), .gnt, .gnt_idx(gidx));

  assign src_ready = gnt & {NSRC{ts_in_ready}};

  val_timestamper #(.NCN(NCN)) u_ts (
    .clk, .rst_n,
    .in_valid(|src_valid), .in_ready(ts_in_ready), .in_msg(src_msg[gidx]),
    .out_valid(ts_out_valid), .out_ready(out_ready && !halt), .out_msg);

  assign out_valid  = ts_out_valid && !halt;
  assign link_alive = !halt;

endmodule
