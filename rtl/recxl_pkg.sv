// recxl_pkg: message formats, log-entry formats and shared constants of the
// ReCXL replication hardware.
//
// Field widths printed in the paper's message and log-entry layouts are used
// as they are: Requester ID 10 bits ({CN, core}), Word Mask 16 bits, Line
// physical address 44 bits, Updated Word Values up to 512 bits (16 words of
// 32 bits, a 64-byte line), Logical TS 7 bits, log-entry word address 46 bits,
// word value 32 bits, Valid 1 bit.
//
// Own choices: the 10-bit Requester ID is split 5 bits CN / 5 bits core; every
// REPL, REPL_ACK and VAL also carries a store-buffer slot tag and the rank of
// the replica, so that a REPL_ACK finds its store and a VAL finds its log
// entries even when the fabric reorders messages. The log-entry word address
// (46 bits) is formed from the low 42 bits of the line address and the 4-bit
// word index, so line addresses are assumed to fit in 42 bits (a 48-bit
// physical address); the 44-bit line field of the messages keeps 2 spare bits.
package recxl_pkg;

  localparam int unsigned CN_ID_W     = 5;    // CN part of the Requester ID
  localparam int unsigned CORE_ID_W   = 5;    // core part of the Requester ID
  localparam int unsigned REQ_ID_W    = CN_ID_W + CORE_ID_W;  // 10 bits
  localparam int unsigned WORDS       = 16;   // words per 64-byte line
  localparam int unsigned WIDX_W      = 4;
  localparam int unsigned WORD_W      = 32;
  localparam int unsigned LINE_ADDR_W = 44;
  localparam int unsigned LOG_WADDR_W = 46;
  localparam int unsigned TS_W        = 7;
  localparam int unsigned TAG_W       = 7;    // store-buffer slot tag (up to 128 slots)
  localparam int unsigned RANK_W      = 2;    // replica rank, N_r <= 4

  typedef logic [CN_ID_W-1:0]     cn_id_t;
  typedef logic [LINE_ADDR_W-1:0] line_addr_t;
  typedef logic [WORD_W-1:0]      word_t;
  typedef logic [TS_W-1:0]        ts_t;
  typedef logic [TAG_W-1:0]       tag_t;
  typedef logic [RANK_W-1:0]      rank_t;
  typedef logic [WORDS-1:0]       mask_t;

  typedef struct packed {
    logic [CN_ID_W-1:0]   cn;
    logic [CORE_ID_W-1:0] core;
  } req_id_t;

  typedef enum logic [1:0] {
    MSG_REPL     = 2'd0,
    MSG_REPL_ACK = 2'd1,
    MSG_VAL      = 2'd2
  } msg_type_e;

  // One message on the CN-to-CN fabric. REPL uses mask/line/data; VAL uses
  // line/ts; REPL_ACK only the routing fields. src/dst are routing fields.
  typedef struct packed {
    msg_type_e                   mtype;
    cn_id_t                      dst;
    cn_id_t                      src;
    req_id_t                     req;
    tag_t                        tag;
    rank_t                       rank;
    ts_t                         ts;
    mask_t                       mask;
    line_addr_t                  line;
    logic [WORDS-1:0][WORD_W-1:0] data;
  } msg_t;

  // Entry of the SRAM Log Buffer (log-entry layout plus the slot tag and an
  // "allocated" flag that are not part of the logged record).
  typedef struct packed {
    logic                    used;
    tag_t                    tag;
    req_id_t                 req;
    ts_t                     ts;
    logic [LOG_WADDR_W-1:0]  waddr;
    word_t                   value;
    logic                    valid;
  } sram_entry_t;

  // Entry of the DRAM log: the log entry with its timestamp stripped.
  typedef struct packed {
    req_id_t                 req;
    logic [LOG_WADDR_W-1:0]  waddr;
    word_t                   value;
    logic                    valid;
  } dram_entry_t;

  localparam int unsigned DRAM_ENTRY_W = $bits(dram_entry_t);   // 89 bits
  localparam int unsigned DUMP_MSG_W   = 512;                   // 64-byte message
  localparam int unsigned DUMP_PER_MSG = 5;                     // 5 x 89 = 445 bits
  localparam int unsigned DUMP_CNT_W   = 3;

  function automatic logic [LOG_WADDR_W-1:0] word_addr(line_addr_t line,
                                                       logic [WIDX_W-1:0] w);
    return {line[LOG_WADDR_W-WIDX_W-1:0], w};
  endfunction

  function automatic line_addr_t line_of_waddr(logic [LOG_WADDR_W-1:0] wa);
    return line_addr_t'(wa[LOG_WADDR_W-1:WIDX_W]);
  endfunction

endpackage
