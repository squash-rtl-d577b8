// squash_pkg: types and constants shared by the SQUASH memory scheduler.
//
// The scheduler ranks every requestor (CPU core or hardware accelerator) with a
// priority key. A key is a 3-bit group code followed by a 32-bit tie-break
// value; the numerically smaller key wins. The six groups and their order
// follow the paper's overall scheduling policy. The tie-break values (deadline
// period, cycles left in the period, intensity rank) are this design's encoding
// of the paper's "priority within each group".
//
// Counters are 32 bits wide, matching the paper's 4-byte counters. DRAM timing
// is given in controller clock cycles; the controller is assumed to run at the
// CPU clock (2.66 GHz), four times the DDR3-1333 command clock (1.5 ns).
package squash_pkg;

  localparam int unsigned CW     = 32;  // counter width (4-byte counters)
  localparam int unsigned SRC_W  = 5;   // requestor id width (up to 32 requestors)
  localparam int unsigned TAG_W  = 8;   // requestor tag carried back on completion
  localparam int unsigned ADDR_W = 32;  // physical address width
  localparam int unsigned BANK_W = 3;   // 8 banks per rank
  localparam int unsigned ROW_W  = 15;
  localparam int unsigned COL_W  = 7;   // 64-byte lines in an 8 KB row
  localparam int unsigned LINE_B = 6;   // 64-byte requests

  typedef logic [CW-1:0] cnt_t;

  // Priority groups, lowest code = highest priority.
  typedef enum logic [2:0] {
    GRP_SDP_URGENT    = 3'd0,  // 1: urgent short-deadline-period HWAs (shorter period first)
    GRP_LDP_URGENT    = 3'd1,  // 2: urgent long-deadline-period HWAs (earlier deadline first)
    GRP_CPU_NONINT    = 3'd2,  // 3: memory-non-intensive CPUs (lower intensity first)
    GRP_LDP_NONURGENT = 3'd3,  // 4: non-urgent LDP-HWAs (earlier deadline first)
    GRP_CPU_INT       = 3'd4,  // 5: memory-intensive CPUs (shuffled)
    GRP_HWA_LOW       = 3'd5   // 6: other non-urgent HWAs (earlier deadline first)
  } group_e;

  typedef struct packed {
    group_e grp;
    cnt_t   sub;
  } prio_key_t;

  localparam prio_key_t KEY_LOWEST = '{grp: GRP_HWA_LOW, sub: '1};

  // A request as a requestor presents it.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  // A request after address decode, as held in a channel's request buffer.
  typedef struct packed {
    logic [SRC_W-1:0]  src;
    logic              we;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [TAG_W-1:0]  tag;
  } chan_req_t;

  // A completed request returned to its requestor.
  typedef struct packed {
    logic [SRC_W-1:0] src;
    logic [TAG_W-1:0] tag;
  } cpl_t;

  // Row-buffer state a request found when it was issued.
  typedef enum logic [1:0] {ROW_HIT = 2'd0, ROW_CLOSED = 2'd1, ROW_CONFLICT = 2'd2} row_kind_e;

  // A request issued to the DRAM, with the times of its commands.
  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic              we;
    row_kind_e         kind;
    cnt_t              act_time;   // ACTIVATE time (meaningless for a row hit)
    cnt_t              col_time;   // READ/WRITE time
    cnt_t              done_time;  // end of the data burst
  } dram_cmd_t;

  // DDR3-1333 (9-9-9) timing in controller cycles (4 per DRAM clock).
  localparam int unsigned T_RCD = 36;   // 9 tCK
  localparam int unsigned T_RP  = 36;   // 9 tCK
  localparam int unsigned T_CL  = 36;   // 9 tCK
  localparam int unsigned T_BL  = 16;   // burst of 8 = 4 tCK
  localparam int unsigned T_RAS = 96;   // 36 ns = 24 tCK
  localparam int unsigned T_RC  = 132;  // 49.5 ns = 33 tCK
  localparam int unsigned T_RTP = 20;   // 7.5 ns = 5 tCK, READ to PRECHARGE

  // Wrap-safe time comparison: a is at or after b.
  function automatic logic time_reached(cnt_t a, cnt_t b);
    cnt_t d;
    d = a - b;
    return !d[CW-1];
  endfunction

  function automatic cnt_t time_max(cnt_t a, cnt_t b);
    return time_reached(a, b) ? a : b;
  endfunction

endpackage
