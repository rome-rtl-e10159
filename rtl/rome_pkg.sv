// rome_pkg: types and default constants shared by the row-granularity (RoMe)
// memory controller, the logic-die command generator and the cube top.
//
// The design runs on one clock of 1 ns period, so every timing value below is
// both nanoseconds and cycles. The ten row-command timing values (tR2RS/R,
// tR2WS/R, tW2RS/R, tW2WS/R, tRD_row, tWR_row) and the HBM4 core timings
// (tRCD=16, tCCDS=1, tCCDL=2, tRRDS=2, tRP=16, tRAS=29, tRC=45, tWR=16,
// tCL=16) are the paper's evaluated values; tRFCpb=280 and tRREFD=8 are its
// refresh example. tRTP, the write latency, the per-bank refresh interval and
// all field widths are this design's own choices and are marked as such.
package rome_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int SID_W    = 2;   // 4 stack IDs per channel (paper)
  localparam int VBA_W    = 3;   // 8 virtual banks per stack ID: 32 VBAs/channel (paper: 32 banks/channel)
  localparam int ROW_W    = 13;  // own arithmetic: 1 GB per channel / 128 banks / 1 KB rows = 8192 rows
  localparam int BG_W     = 2;   // HBM4 bank groups per SID and PC
  localparam int BA_W     = 2;   // banks per bank group
  localparam int COL_W    = 5;   // 1 KB bank row / 32 B column = 32 columns
  localparam int TAG_W    = 8;   // own choice: request tag carried back with read data
  localparam int NUM_PC   = 2;   // pseudo channels operated together (Fig. 8(b))
  localparam int PC_DW    = 256; // bits per pseudo channel per 1 ns beat (32 DQ x 8 Gb/s)
  localparam int CH_DW    = NUM_PC * PC_DW; // 512 bits = 64 B per beat
  localparam int NCOL     = 32;  // RD/WR per bank per row command
  localparam int BEATS    = 2 * NCOL; // 64 beats x 64 B = 4 KB per RD_row/WR_row
  localparam int BEAT_W   = 6;
  localparam int NUM_VBA  = (1 << (SID_W + VBA_W)); // 32 virtual banks per channel

  // --------------------------------------------- row-level timing (Table 5, ns)
  localparam int T_R2RS   = 64;
  localparam int T_R2RR   = 68;
  localparam int T_R2WS   = 69;
  localparam int T_R2WR   = 73;
  localparam int T_W2RS   = 71;
  localparam int T_W2RR   = 75;
  localparam int T_W2WS   = 64;
  localparam int T_W2WR   = 68;
  localparam int T_RD_ROW = 95;
  localparam int T_WR_ROW = 115;

  // ------------------------------------------------ HBM4 core timing (ns)
  localparam int T_RCD    = 16;  // tRCDRD = tRCDWR
  localparam int T_RRDS   = 2;
  localparam int T_CCDS   = 1;
  localparam int T_CCDL   = 2;
  localparam int T_RP     = 16;
  localparam int T_RAS    = 29;
  localparam int T_RC     = 45;
  localparam int T_WR     = 16;
  localparam int T_CL     = 16;
  localparam int T_RTP    = 0;   // own choice: the value that fits tRD_row = 95 with tRP = 16
  localparam int T_WL     = 3;   // own choice: write latency; with T_BURST it fits tWR_row = 115
  localparam int T_BURST  = 1;   // one 32 B burst per PC per tCCDS

  // ----------------------------------------------------------- refresh (ns)
  localparam int T_RFC_PB  = 280; // paper example
  localparam int T_RREFD   = 8;   // paper example
  localparam int T_REFI_PB = 61;  // own choice: 3.9 us tREFI spread over 32 VBAs at one REF per 2 x tREFIpb
  localparam int REF_SLACK = 4;   // own choice: covers a REFpb delayed by row-bus arbitration

  // ------------------------------------------------------------- types
  typedef enum logic [1:0] {
    ROW_RD  = 2'd0,   // RD_row
    ROW_WR  = 2'd1,   // WR_row
    ROW_REF = 2'd2    // per-bank refresh of one VBA (two REFpb)
  } row_op_e;

  typedef enum logic [1:0] {
    BK_IDLE       = 2'd0,
    BK_READING    = 2'd1,
    BK_WRITING    = 2'd2,
    BK_REFRESHING = 2'd3
  } bank_state_e;

  typedef enum logic [1:0] {
    D_ACT = 2'd0,
    D_PRE = 2'd1,
    D_REF = 2'd2
  } dram_row_op_e;

  // A 4 KB request as the controller queues it.
  typedef struct packed {
    logic             write;
    logic [SID_W-1:0] sid;
    logic [VBA_W-1:0] vba;
    logic [ROW_W-1:0] row;
    logic [TAG_W-1:0] tag;
  } req_t;

  // Row-level command from the controller to the command generator.
  typedef struct packed {
    logic             valid;
    row_op_e          op;
    logic [SID_W-1:0] sid;
    logic [VBA_W-1:0] vba;
    logic [ROW_W-1:0] row;
    logic [TAG_W-1:0] tag;
  } mc_cmd_t;

  // Conventional row command (ACT/PRE/REFpb), shared by both PCs.
  typedef struct packed {
    logic             valid;
    dram_row_op_e     op;
    logic [SID_W-1:0] sid;
    logic [BG_W-1:0]  bg;
    logic [BA_W-1:0]  ba;
    logic [ROW_W-1:0] row;
  } dram_row_cmd_t;

  // Conventional column command (RD/WR), shared by both PCs.
  typedef struct packed {
    logic             valid;
    logic             write;
    logic [SID_W-1:0] sid;
    logic [BG_W-1:0]  bg;
    logic [BA_W-1:0]  ba;
    logic [COL_W-1:0] col;
  } dram_col_cmd_t;

  // Read data returned to the host, one 64 B beat per cycle.
  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [BEAT_W-1:0] beat;
    logic [CH_DW-1:0]  data;
  } rd_beat_t;

  // Pull request for one 64 B write beat.
  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [BEAT_W-1:0] beat;
  } wd_req_t;

  // A VBA pairs bank BA of two neighbouring bank groups (Fig. 6 shows
  // BG0/BG1 x BA0..3 for VBA 0..3; VBA 4..7 use BG2/BG3 the same way).
  function automatic logic [BG_W-1:0] vba_bg(input logic [VBA_W-1:0] vba, input logic bank_b);
    return {vba[2], bank_b};
  endfunction

  function automatic logic [BA_W-1:0] vba_ba(input logic [VBA_W-1:0] vba);
    return vba[1:0];
  endfunction

endpackage
