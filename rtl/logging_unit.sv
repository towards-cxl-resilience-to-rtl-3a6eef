// logging_unit: the per-CN Logging Unit.
//
// It joins the SRAM Log Buffer (REPL split, REPL_ACK, VAL validation,
// timestamp-ordered draining) to the DRAM log controller (append, periodic
// filtered dump to the MNs), and adds the Logging Unit's part of the recovery
// handshake:
//   * Interrupt (a one-cycle pulse on rec_interrupt): the unit stops taking new
//     REPLs, finishes the REPL it is splitting and its REPL_ACK, moves every
//     entry that can be moved to the DRAM log and lets a running dump finish
//     (a dump may still start meanwhile, so a full DRAM log cannot block this).
//     It then pulses rec_interrupt_resp (InterruptResp) and stays paused: no REPL
//     is taken, nothing is appended to the DRAM log and no new dump starts, so
//     the log holds still while the recovery software reads it. VALs are
//     still taken throughout; entries they validate wait in the buffer.
//   * RecovEnd (recov_end pulse): the unit resumes and pulses recov_end_resp
//     (RecovEndResp) one cycle later.
// Entries of the failed CN that never got their VAL stay in the buffer; the
// recovery software reads the logs (not part of this block).
//
// The paper leaves the handshake's details open; what "outstanding
// operations" covers above is this design's choice.
module logging_unit
  import recxl_pkg::*;
#(
  parameter int unsigned NCN             = 16,
  parameter int unsigned NR              = 3,
  parameter int unsigned LOG_BUF_ENTRIES = 341,
  parameter int unsigned LOG_ENTRIES     = 1572864,
  parameter int unsigned DUMP_PERIOD     = 1250000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cn_id_t               my_cn,
  // messages from the CXL port
  input  logic                 repl_valid,
  output logic                 repl_ready,
  input  msg_t                 repl,
  input  logic                 val_valid,
  input  msg_t                 val,
  output logic                 ack_valid,
  input  logic                 ack_ready,
  output msg_t                 ack,
  // DRAM
  output logic                 dw_valid,
  input  logic                 dw_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dw_addr,
  output dram_entry_t          dw_data,
  output logic                 dr_valid,
  input  logic                 dr_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dr_addr,
  input  logic                 drr_valid,
  input  dram_entry_t          drr_data,
  // dump to MNs
  output logic                 dm_valid,
  input  logic                 dm_ready,
  output logic [DUMP_MSG_W-1:0] dm_data,
  output logic                 sync_req,
  input  logic                 sync_ack,
  // recovery handshake
  input  logic                 rec_interrupt,
  output logic                 rec_interrupt_resp,
  input  logic                 recov_end,
  output logic                 recov_end_resp,
  output logic                 paused,
  output logic [$clog2(LOG_BUF_ENTRIES+1)-1:0] buf_occupancy,
  output logic [$clog2(LOG_ENTRIES+1)-1:0]     log_fill,
  // statistics
  output logic                 ev_buf_full,
  output logic                 ev_ts_hold,
  output logic                 ev_dump_done,
  output logic                 ev_log_full
);

  typedef enum logic [1:0] {P_RUN, P_DRAINING, P_PAUSED} pst_e;
  pst_e pst_q;

  logic        sb_busy, drain_pending, dumping;
  logic        drain_valid, drain_ready;
  dram_entry_t drain;
  logic        buf_repl_ready;

  assign repl_ready = buf_repl_ready && (pst_q == P_RUN);

  sram_log_buffer #(.NCN(NCN), .ENTRIES(LOG_BUF_ENTRIES)) u_buf (
    .clk, .rst_n, .my_cn,
    .repl_valid(repl_valid && pst_q == P_RUN), .repl_ready(buf_repl_ready), .repl,
    .ack_valid, .ack_ready, .ack,
    .val_valid, .val,
    .drain_valid, .drain_ready(drain_ready && pst_q != P_PAUSED), .drain,
    .busy(sb_busy), .drain_pending, .ev_full(ev_buf_full), .ev_ts_hold,
    .occupancy(buf_occupancy));

  dram_log_ctrl #(.NCN(NCN), .NR(NR), .LOG_ENTRIES(LOG_ENTRIES), .DUMP_PERIOD(DUMP_PERIOD)) u_dlog (
    .clk, .rst_n, .my_cn, .pause(pst_q == P_PAUSED),
    .in_valid(drain_valid && pst_q != P_PAUSED), .in_ready(drain_ready), .in_entry(drain),
    .dw_valid, .dw_ready, .dw_addr, .dw_data,
    .dr_valid, .dr_ready, .dr_addr, .drr_valid, .drr_data,
    .dm_valid, .dm_ready, .dm_data, .sync_req, .sync_ack,
    .dumping, .ev_dump_done, .ev_log_full, .fill(log_fill));

  assign paused = (pst_q == P_PAUSED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst_q <= P_RUN;
      rec_interrupt_resp <= 1'b0;
      recov_end_resp <= 1'b0;
    end else begin
      rec_interrupt_resp <= 1'b0;
      recov_end_resp <= 1'b0;
      case (pst_q)
        P_RUN:      if (rec_interrupt) pst_q <= P_DRAINING;
        P_DRAINING: if (!sb_busy && !drain_pending && !dumping) begin
          pst_q <= P_PAUSED;
          rec_interrupt_resp <= 1'b1;
        end
        P_PAUSED:   if (recov_end) begin
          pst_q <= P_RUN;
          recov_end_resp <= 1'b1;
        end
        default:    pst_q <= P_RUN;
      endcase
    end
  end

endmodule
