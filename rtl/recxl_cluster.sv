// recxl_cluster: a CXL cluster of NCN compute nodes with ReCXL, joined by one
// CXL switch.
//
// Every CN (compute_node) holds its cores' store buffers with proactive
// replication, its CXL port with VAL timestamps and its Logging Unit. The
// switch (cxl_switch) routes REPL, REPL_ACK and VAL messages between the CNs,
// watches every CN's link, keeps the Viral_Status bits and sends the MSI that
// starts a recovery.
//
// Everything the paper takes from elsewhere is reached through ports: the
// cores (st_*), the cache hierarchy and the memory-node directory that run
// the coherence transaction (coh_*), the L1 write at commit (commit_*), each
// Logging Unit's DRAM device (dw_*, dr_*, drr_*), the path of the dumped logs
// to the memory nodes (dm_*, sync_*), and the recovery software, which drives
// the Logging Units' Interrupt / RecovEnd handshakes. cn_halt stops a CN
// (fail-stop) for fault injection.
//
// Defaults are the evaluated configuration: 16 CNs of 4 cores, N_r = 3,
// 4 KB SRAM Log Buffer (341 entries), 18 MB DRAM log (1,572,864 slots of
// 12 bytes) and a 2.5 ms dump period at the 500 MHz Logging Unit clock. The
// store-buffer depth (72), the failure timeout (1024 cycles) and the use of a
// single clock for cores, ports and Logging Units are this design's choices.
module recxl_cluster
  import recxl_pkg::*;
#(
  parameter int unsigned NCN             = 16,
  parameter int unsigned NCORE           = 4,
  parameter int unsigned NR              = 3,
  parameter int unsigned SB_DEPTH        = 72,
  parameter int unsigned LOG_BUF_ENTRIES = 341,
  parameter int unsigned LOG_ENTRIES     = 1572864,
  parameter int unsigned DUMP_PERIOD     = 1250000,
  parameter int unsigned FAIL_TIMEOUT    = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NCN-1:0]       cn_halt,
  // cores
  input  logic [NCORE-1:0]     st_valid [NCN],
  output logic [NCORE-1:0]     st_ready [NCN],
  input  line_addr_t           st_line  [NCN][NCORE],
  input  logic [WIDX_W-1:0]    st_widx  [NCN][NCORE],
  input  word_t                st_data  [NCN][NCORE],
  output logic [NCORE-1:0]     coh_req_valid [NCN],
  output line_addr_t           coh_req_line  [NCN][NCORE],
  input  logic [NCORE-1:0]     coh_ready     [NCN],
  output logic [NCORE-1:0]     commit_valid  [NCN],
  output line_addr_t           commit_line   [NCN][NCORE],
  output mask_t                commit_mask   [NCN][NCORE],
  output logic [WORDS-1:0][WORD_W-1:0] commit_data [NCN][NCORE],
  // Logging Unit DRAM devices
  output logic [NCN-1:0]       dw_valid,
  input  logic [NCN-1:0]       dw_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dw_addr [NCN],
  output dram_entry_t          dw_data [NCN],
  output logic [NCN-1:0]       dr_valid,
  input  logic [NCN-1:0]       dr_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dr_addr [NCN],
  input  logic [NCN-1:0]       drr_valid,
  input  dram_entry_t          drr_data [NCN],
  // log dump to the memory nodes
  output logic [NCN-1:0]       dm_valid,
  input  logic [NCN-1:0]       dm_ready,
  output logic [DUMP_MSG_W-1:0] dm_data [NCN],
  output logic [NCN-1:0]       sync_req,
  input  logic [NCN-1:0]       sync_ack,
  // recovery handshake with the Logging Units
  input  logic [NCN-1:0]       rec_interrupt,
  output logic [NCN-1:0]       rec_interrupt_resp,
  input  logic [NCN-1:0]       recov_end,
  output logic [NCN-1:0]       recov_end_resp,
  output logic [NCN-1:0]       lu_paused,
  // failure detection
  output logic [NCN-1:0]       viral_status,
  output logic                 msi_valid,
  input  logic                 msi_ready,
  output cn_id_t               msi_dst,
  output cn_id_t               msi_failed_cn,
  // statistics
  output logic [NCORE-1:0]     ev_coalesce     [NCN],
  output logic [NCORE-1:0]     ev_repl_at_head [NCN],
  output logic [NCORE-1:0]     ev_sb_full      [NCN],
  output logic [NCN-1:0]       ev_buf_full,
  output logic [NCN-1:0]       ev_ts_hold,
  output logic [NCN-1:0]       ev_dump_done,
  output logic [NCN-1:0]       ev_log_full,
  output logic                 ev_drop
);

  // switch ports: [n] request lane of CN n, [NCN+n] its response lane
  logic [2*NCN-1:0] up_valid, up_ready, dn_valid, dn_ready;
  logic [NCN-1:0]   link_alive;
  msg_t             up_msg [2*NCN];
  msg_t             dn_msg [2*NCN];

  for (genvar n = 0; n < NCN; n++) begin : g_cn
    compute_node #(.NCN(NCN), .NCORE(NCORE), .NR(NR), .SB_DEPTH(SB_DEPTH),
                   .LOG_BUF_ENTRIES(LOG_BUF_ENTRIES), .LOG_ENTRIES(LOG_ENTRIES),
                   .DUMP_PERIOD(DUMP_PERIOD)) u_cn (
      .clk, .rst_n, .my_cn(cn_id_t'(n)), .halt(cn_halt[n]),
      .st_valid(st_valid[n]), .st_ready(st_ready[n]),
      .st_line(st_line[n]), .st_widx(st_widx[n]), .st_data(st_data[n]),
      .coh_req_valid(coh_req_valid[n]), .coh_req_line(coh_req_line[n]), .coh_ready(coh_ready[n]),
      .commit_valid(commit_valid[n]), .commit_line(commit_line[n]),
      .commit_mask(commit_mask[n]), .commit_data(commit_data[n]),
      .req_out_valid(up_valid[n]), .req_out_ready(up_ready[n]), .req_out_msg(up_msg[n]),
      .req_in_valid(dn_valid[n]), .req_in_ready(dn_ready[n]), .req_in_msg(dn_msg[n]),
      .out_valid(up_valid[NCN+n]), .out_ready(up_ready[NCN+n]), .out_msg(up_msg[NCN+n]),
      .in_valid(dn_valid[NCN+n]), .in_ready(dn_ready[NCN+n]), .in_msg(dn_msg[NCN+n]),
      .link_alive(link_alive[n]),
      .dw_valid(dw_valid[n]), .dw_ready(dw_ready[n]), .dw_addr(dw_addr[n]), .dw_data(dw_data[n]),
      .dr_valid(dr_valid[n]), .dr_ready(dr_ready[n]), .dr_addr(dr_addr[n]),
      .drr_valid(drr_valid[n]), .drr_data(drr_data[n]),
      .dm_valid(dm_valid[n]), .dm_ready(dm_ready[n]), .dm_data(dm_data[n]),
      .sync_req(sync_req[n]), .sync_ack(sync_ack[n]),
      .rec_interrupt(rec_interrupt[n]), .rec_interrupt_resp(rec_interrupt_resp[n]),
      .recov_end(recov_end[n]), .recov_end_resp(recov_end_resp[n]), .lu_paused(lu_paused[n]),
      .ev_coalesce(ev_coalesce[n]), .ev_repl_at_head(ev_repl_at_head[n]),
      .ev_sb_full(ev_sb_full[n]), .ev_buf_full(ev_buf_full[n]), .ev_ts_hold(ev_ts_hold[n]),
      .ev_dump_done(ev_dump_done[n]), .ev_log_full(ev_log_full[n]));
  end

  cxl_switch #(.NCN(NCN), .TIMEOUT(FAIL_TIMEOUT)) u_sw (
    .clk, .rst_n,
    .in_valid(up_valid), .in_ready(up_ready), .in_msg(up_msg),
    .out_valid(dn_valid), .out_ready(dn_ready), .out_msg(dn_msg),
    .link_alive, .viral_status,
    .msi_valid, .msi_ready, .msi_dst, .msi_failed_cn, .ev_drop);

endmodule
