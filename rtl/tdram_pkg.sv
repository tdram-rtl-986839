// tdram_pkg: types, field widths and timing constants shared by the TDRAM
// channel logic.
//
// All timing is counted in cycles of the 2 GHz core clock (0.5 ns), so every
// nanosecond value of the device timing table is doubled here. The DQ, CA
// and HM buses run at 8 Gbps per pin, that is 4 unit intervals per core
// clock; the RTL therefore moves one "beat" per clock that already holds the
// 4 unit intervals of every pin (DQ: 32 pins x 4 = 128 bits, CA: 8 x 4 = 32
// bits, HM: 4 x 4 = 16 bits). Serialisation to the pins is the PHY's job.
//
// Follows the paper: clock, data rate, all tag and data timing values, the
// 14-bit tag, the 3-byte tag entry, 32 channels, 32 columns of 32 B per row,
// 64 B lines split over an even/odd bank-group pair, the 16-entry flush
// buffer. Own choices: the CA packet and HM packet layouts, the SECDED code
// of the tag entry, 4 bank groups of 4 banks, tRTW_int, tRFC and the
// scaled-down row count (see ROWS_DEFAULT).
package tdram_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned NUM_CHANNELS   = 32;  // 32 independent channels
  localparam int unsigned NUM_BG         = 4;   // bank groups per channel
  localparam int unsigned BANKS_PER_BG   = 4;   // banks per bank group
  localparam int unsigned NUM_LBANKS     = NUM_BG / 2 * BANKS_PER_BG; // logical (paired) banks
  localparam int unsigned LBANK_W        = $clog2(NUM_LBANKS);
  localparam int unsigned COLS           = 32;  // columns (cache lines) per row
  localparam int unsigned COL_W          = $clog2(COLS);
  // A channel of the 64 GiB device holds 2 GiB = 2^25 lines, i.e. 2^17 rows
  // per logical bank. The storage arrays are scaled to 2^11 rows so that the
  // whole device can still be elaborated (see the README).
  localparam int unsigned ROWS_PAPER     = 131072;
  localparam int unsigned ROWS_DEFAULT   = 2048;
  localparam int unsigned ROW_ADDR_W     = 17;  // row field width on the CA bus

  localparam int unsigned TAG_W          = 14;  // 1 PB address space, 64 GiB cache
  localparam int unsigned TAG_ECC_W      = 6;   // SECDED over 16 bits
  localparam int unsigned TAG_ENTRY_W    = 24;  // 3 B of tag, metadata and ECC

  localparam int unsigned DQ_BEAT_W      = 128; // 32 DQ pins x 4 UI per clock
  localparam int unsigned HALF_LINE_W    = 256; // 32 B per bank
  localparam int unsigned LINE_W         = 512; // 64 B cache line
  localparam int unsigned BEATS_PER_LINE = LINE_W / DQ_BEAT_W; // 4 = tBURST
  localparam int unsigned CA_BEAT_W      = 32;  // 8 CA pins x 4 UI per clock
  localparam int unsigned HM_BEAT_W      = 16;  // 4 HM pins x 4 UI per clock

  localparam int unsigned FB_DEPTH       = 16;  // flush buffer entries
  localparam int unsigned FB_CNT_W       = $clog2(FB_DEPTH + 1);

  // ------------------------------------------------- timing (2 GHz cycles)
  localparam int unsigned T_BURST    = 4;   // 2 ns
  localparam int unsigned T_RCD      = 24;  // 12 ns
  localparam int unsigned T_RCD_WR   = 12;  // 6 ns
  localparam int unsigned T_CCD_L    = 4;   // 2 ns
  localparam int unsigned T_RP       = 28;  // 14 ns
  localparam int unsigned T_RAS      = 56;  // 28 ns
  localparam int unsigned T_CL       = 36;  // 18 ns (tRL)
  localparam int unsigned T_CWL      = 14;  // 7 ns (tWL)
  localparam int unsigned T_RRD      = 4;   // 2 ns, even/odd bank stagger
  localparam int unsigned T_RL_CORE  = 4;   // 2 ns
  localparam int unsigned T_HM       = 15;  // 7.5 ns
  localparam int unsigned T_HM_INT   = 5;   // 2.5 ns
  localparam int unsigned T_RCD_TAG  = 15;  // 7.5 ns
  localparam int unsigned T_RTP_TAG  = 5;   // 2.5 ns
  localparam int unsigned T_WR_TAG   = 2;   // 1 ns
  localparam int unsigned T_RTW_TAG  = 2;   // 1 ns
  localparam int unsigned T_RC_TAG   = 24;  // 12 ns
  localparam int unsigned T_RTW_INT  = T_CCD_L;   // not given: one tCCD_L
  localparam int unsigned T_RC       = T_RAS + T_RP;

  // Derived offsets from the cycle a command is decoded (cycle 0).
  localparam int unsigned OFS_TAG_RD   = T_RCD_TAG;                 // tag column read
  localparam int unsigned OFS_TAG_WR   = T_RCD_TAG + T_RTW_TAG;     // tag update
  localparam int unsigned OFS_HM_INT   = T_RCD_TAG + T_HM_INT;      // result at data banks
  localparam int unsigned OFS_HM_BUS   = T_RCD_TAG + T_HM;          // first HM beat on pins
  localparam int unsigned OFS_RD_EVEN  = T_RCD;                     // even bank column read
  localparam int unsigned OFS_RD_ODD   = T_RRD + T_RCD;             // odd bank column read
  localparam int unsigned OFS_WR_EVEN  = T_RCD + T_RTW_INT;         // even bank column write
  localparam int unsigned OFS_WR_ODD   = T_RRD + T_RCD + T_RTW_INT; // odd bank column write
  localparam int unsigned OFS_FB_PUSH  = OFS_RD_ODD + T_RL_CORE;    // dirty line into flush buffer
  localparam int unsigned OFS_DQ_RD    = T_RRD + T_RCD + T_CL;      // first read beat on DQ
  localparam int unsigned OFS_DQ_WR    = T_CWL;                     // first write beat on DQ
  localparam int unsigned OFS_DQ_FB    = T_CL;                      // flush read / refresh unload
  localparam int unsigned MAIN_BUSY    = T_RRD + T_RC;              // logical bank busy time
  localparam int unsigned TAG_BUSY     = T_RC_TAG;                  // tag mat busy time
  localparam int unsigned T_RFC_DEFAULT = 700;                      // 350 ns, not given

  // ----------------------------------------------------------------- types
  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACTRD = 3'd1,  // activate + read, auto precharge
    CMD_ACTWR = 3'd2,  // activate + write, auto precharge
    CMD_PROBE = 3'd3,  // tag-only check (PROBE slot)
    CMD_FLRD  = 3'd4,  // explicit read from the flush buffer
    CMD_REF   = 3'd5   // refresh: DQ idle, flush buffer unloaded
  } cmd_op_e;

  typedef enum logic [1:0] {
    HM_HIT          = 2'd0,
    HM_MISS_CLEAN   = 2'd1,
    HM_MISS_DIRTY   = 2'd2,
    HM_MISS_INVALID = 2'd3
  } hm_result_e;

  typedef enum logic [1:0] {
    KIND_RD    = 2'd0,
    KIND_WR    = 2'd1,
    KIND_PROBE = 2'd2
  } hm_kind_e;

  // Decoded command. Field layout on the CA bus (64 bits over two beats,
  // beat 0 = bits 63:32): op[63:61] dirty[60] bank[59:57] row[56:40]
  // col[39:35] tag[34:21] count[20:16] reserved[15:0].
  typedef struct packed {
    cmd_op_e                 op;
    logic                    dirty;  // metadata dirty bit stored by ActWr
    logic [LBANK_W-1:0]      bank;   // logical bank: {bg pair, bank in bg}
    logic [ROW_ADDR_W-1:0]   row;
    logic [COL_W-1:0]        col;
    logic [TAG_W-1:0]        tag;
    logic [4:0]              count;  // flush-read entries requested
  } tdram_cmd_t;

  // Tag entry payload before ECC.
  typedef struct packed {
    logic             dirty;
    logic             valid;
    logic [TAG_W-1:0] tag;
  } tag_meta_t;

  // Result of a tag check, as produced inside a bank pair.
  typedef struct packed {
    hm_kind_e           kind;
    hm_result_e         result;
    logic               ecc_err;   // uncorrectable tag entry
    logic [LBANK_W-1:0] bank;
    logic [TAG_W-1:0]   tag;       // stored tag (the dirty tag on a dirty miss)
  } tag_result_t;

  // HM packet, 32 bits in two HM beats (beat 0 = bits 31:16):
  // start[31] kind[30:29] result[28:27] fb_data[26] ecc_err[25]
  // bank[24:22] tag[21:8] reserved[7:0].
  typedef struct packed {
    logic               start;
    hm_kind_e           kind;
    hm_result_e         result;
    logic               fb_data;   // the DQ slot of this access carries flush data
    logic               ecc_err;
    logic [LBANK_W-1:0] bank;
    logic [TAG_W-1:0]   tag;
    logic [7:0]         rsvd;
  } hm_packet_t;

  // Flush buffer entry: the evicted line and where it lived.
  typedef struct packed {
    logic [LBANK_W-1:0]    bank;
    logic [ROW_ADDR_W-1:0] row;
    logic [COL_W-1:0]      col;
    logic [TAG_W-1:0]      tag;
    logic [LINE_W-1:0]     data;
  } fb_entry_t;

endpackage
