// dram_log_ctrl: DRAM log of a Logging Unit and its periodic dump to the
// memory nodes (MNs).
//
// Entries leaving the SRAM Log Buffer are appended to a log kept in DRAM (an
// external DRAM device reached through dw_* and dr_*). The log is a circular
// array of LOG_ENTRIES slots with head (oldest) and tail (next free) pointers.
//
// Every DUMP_PERIOD cycles (2.5 ms at the 500 MHz Logging Unit clock) the
// controller saves the log: it notes the current tail, reads the entries from
// head to that tail (oldest to newest, one read outstanding), and keeps only
// the entries this unit is in charge of. Members of a Replica Group split the
// work by address: an entry is kept when this CN is the group member named by
// replica_select's saver_rank for the entry's line and requester. Kept
// entries are packed five to a 64-byte message (5 x 89 bits, entry count in
// bits 447:445) and sent on dm_*. When all are sent, sync_req is raised
// until the MNs answer sync_ack, which stands for the paper's
// synchronisation of the group's Logging Units; then the dumped entries are
// freed by moving head to the noted tail.
//
// Departures from the paper, by choice: the paper compresses the entries with
// gzip before sending them; no compressor is built here, the entries are sent
// packed but uncompressed. The paper clears the whole log after the dump;
// here only the dumped part is freed, so entries appended while the dump ran
// are kept for the next one. When the log is full, in_ready falls and the
// SRAM Log Buffer holds its entries (ev_log_full).
//
// Interface timing: in_*, dw_*, dr_* and dm_* are valid/ready; drr_valid
// returns read data any number of cycles after the request. pause (from the
// recovery handshake) keeps a new dump from starting; dumping tells whether
// one is running.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// 'disable iff' of the protocol assertions, which Verilator reports as
// SYNCASYNCNET; the assertions are not synthesized, so this is harmless.
module dram_log_ctrl
  import recxl_pkg::*;
#(
  parameter int unsigned NCN         = 16,
  parameter int unsigned NR          = 3,
  parameter int unsigned LOG_ENTRIES = 1572864,  // 18 MB / 12-byte slots
  parameter int unsigned DUMP_PERIOD = 1250000   // 2.5 ms at 500 MHz
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cn_id_t               my_cn,
  input  logic                 pause,
  // entries from the SRAM Log Buffer
  input  logic                 in_valid,
  output logic                 in_ready,
  input  dram_entry_t          in_entry,
  // DRAM write port
  output logic                 dw_valid,
  input  logic                 dw_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dw_addr,
  output dram_entry_t          dw_data,
  // DRAM read port
  output logic                 dr_valid,
  input  logic                 dr_ready,
  output logic [$clog2(LOG_ENTRIES)-1:0] dr_addr,
  input  logic                 drr_valid,
  input  dram_entry_t          drr_data,
  // 64-byte dump messages to the MNs
  output logic                 dm_valid,
  input  logic                 dm_ready,
  output logic [DUMP_MSG_W-1:0] dm_data,
  // synchronisation through the MNs
  output logic                 sync_req,
  input  logic                 sync_ack,
  // status
  output logic                 dumping,
  output logic                 ev_dump_done,
  output logic                 ev_log_full,
  output logic [$clog2(LOG_ENTRIES+1)-1:0] fill
);

  localparam int unsigned AW = $clog2(LOG_ENTRIES);
  localparam int unsigned FW = $clog2(LOG_ENTRIES + 1);
  localparam int unsigned TW = $clog2(DUMP_PERIOD + 1);

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(LOG_ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  logic [AW-1:0] head_q, tail_q, snap_q, rd_q;
  logic [FW-1:0] fill_q, left_q, snapn_q;  // entries stored / still to read / in the dump
  logic [TW-1:0] timer_q;

  typedef enum logic [2:0] {D_IDLE, D_REQ, D_WAIT, D_SEND, D_SYNC} dst_e;
  dst_e dst_q;
  logic [DUMP_PER_MSG-1:0][DRAM_ENTRY_W-1:0] pack_q;
  logic [DUMP_CNT_W-1:0] pcnt_q;
  logic                  last_q;     // the entry being packed was the last one

  // ---- append ---------------------------------------------------------------
  logic full, wr_fire;
  assign full     = (fill_q == FW'(LOG_ENTRIES));
  assign in_ready = !full && dw_ready;
  assign dw_valid = in_valid && !full;
  assign dw_addr  = tail_q;
  assign dw_data  = in_entry;
  assign wr_fire  = in_valid && in_ready;
  assign ev_log_full = in_valid && full;

  // ---- who saves a read entry ------------------------------------------------
  cn_id_t reps [NR];
  rank_t  srank;
  replica_select #(.NCN(NCN), .NR(NR)) u_sel (
    .line_addr(line_of_waddr(drr_data.waddr)), .req_cn(drr_data.req.cn),
    .replica_cn(reps), .saver_rank(srank));
  logic mine;
  assign mine = drr_data.valid && (reps[srank] == my_cn);

  assign dr_valid = (dst_q == D_REQ);
  assign dr_addr  = rd_q;
  assign dm_valid = (dst_q == D_SEND);
  always_comb begin
    dm_data = '0;
    dm_data[DUMP_PER_MSG*DRAM_ENTRY_W-1:0] = pack_q;
    dm_data[DUMP_PER_MSG*DRAM_ENTRY_W +: DUMP_CNT_W] = pcnt_q;
  end
  assign sync_req = (dst_q == D_SYNC);
  assign dumping  = (dst_q != D_IDLE);
  assign fill     = fill_q;

  logic free_fire;
  assign free_fire = (dst_q == D_SYNC) && sync_ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q <= '0; tail_q <= '0; snap_q <= '0; rd_q <= '0;
      fill_q <= '0; timer_q <= '0; left_q <= '0; snapn_q <= '0;
      dst_q <= D_IDLE; pack_q <= '0; pcnt_q <= '0; last_q <= 1'b0;
      ev_dump_done <= 1'b0;
    end else begin
      ev_dump_done <= 1'b0;
      if (wr_fire) tail_q <= nxt(tail_q);
      fill_q <= fill_q + FW'(wr_fire)
                - (free_fire ? snapn_q : '0);

      if (dst_q == D_IDLE && timer_q != TW'(DUMP_PERIOD - 1)) timer_q <= timer_q + 1'b1;

      case (dst_q)
        D_IDLE: if (timer_q == TW'(DUMP_PERIOD - 1) && !pause) begin
          timer_q <= '0;
          snap_q  <= tail_q;
          rd_q    <= head_q;
          pcnt_q  <= '0;
          snapn_q <= fill_q;
          left_q  <= fill_q;
          dst_q   <= (fill_q == '0) ? D_SYNC : D_REQ;
        end
        D_REQ: if (dr_ready) dst_q <= D_WAIT;
        D_WAIT: if (drr_valid) begin
          logic [DUMP_CNT_W-1:0] n;
          logic                  lst;
          n   = pcnt_q;
          lst = (left_q == FW'(1));
          if (mine) begin
            pack_q[n] <= drr_data;
            n = n + 1'b1;
          end
          pcnt_q <= n;
          rd_q   <= nxt(rd_q);
          left_q <= left_q - 1'b1;
          last_q <= lst;
          if (n == DUMP_CNT_W'(DUMP_PER_MSG) || (lst && n != '0)) dst_q <= D_SEND;
          else if (lst)                                           dst_q <= D_SYNC;
          else                                                    dst_q <= D_REQ;
        end
        D_SEND: if (dm_ready) begin
          pcnt_q <= '0;
          pack_q <= '0;
          dst_q  <= last_q ? D_SYNC : D_REQ;
        end
        D_SYNC: if (sync_ack) begin
          head_q <= snap_q;
          ev_dump_done <= 1'b1;
          dst_q <= D_IDLE;
        end
        default: dst_q <= D_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) dm_valid && !dm_ready |=> dm_valid);

endmodule
