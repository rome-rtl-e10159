// rome_cube: the RoMe memory system of one HBM cube, as the accelerator sees it.
//
// RoMe cuts each channel's C/A pins from 18 to 5, and the pins saved let the
// cube carry 36 channels instead of HBM4's 32 (nine per DRAM die instead of
// eight), for 36 x 64 B/ns = 2.25 TB/s. This top holds the address map and 36
// rome_channel instances, each with its own controller and logic-die command
// generator. The DRAM dies themselves are outside: their command and data
// buses are ports, one array element per channel.
//
// Host side: one request port takes a 4 KB-aligned read or write per cycle;
// the address map picks the channel and req_ready_o is that channel's queue
// ready. A misaligned or out-of-range request is refused (never accepted) and
// flagged on req_err_o. Read beats and write-data pulls come back per channel,
// tagged with the request's tag. Per-channel observation outputs show the
// row-level commands, refresh/arbitration events and the pending refresh count.
module rome_cube
  import rome_pkg::*;
#(
  parameter int NUM_CH = 36,
  parameter int ADDR_W = 36,
  parameter int QDEPTH = 4,
  parameter int T_REF_INTERVAL_P = 2 * T_REFI_PB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  output logic              req_err_o,
  input  logic              req_write_i,
  input  logic [ADDR_W-1:0] req_addr_i,
  input  logic [TAG_W-1:0]  req_tag_i,
  output rd_beat_t          rd_o        [NUM_CH],
  output wd_req_t           wd_req_o    [NUM_CH],
  input  logic [CH_DW-1:0]  wd_data_i   [NUM_CH],
  output dram_row_cmd_t     dram_row_o  [NUM_CH],
  output dram_col_cmd_t     dram_col_o  [NUM_CH],
  output logic              dram_wvalid_o [NUM_CH],
  output logic [PC_DW-1:0]  dram_wdata_o [NUM_CH][NUM_PC],
  input  logic              dram_rvalid_i [NUM_CH],
  input  logic [PC_DW-1:0]  dram_rdata_i [NUM_CH][NUM_PC],
  output mc_cmd_t           row_cmd_o   [NUM_CH],
  output logic [NUM_CH-1:0] pre_defer_o,
  output logic [NUM_CH-1:0] ref_defer_o,
  output logic [3:0]        ref_pending_o [NUM_CH]
);

  localparam int CHW = $clog2(NUM_CH);

  logic [CHW-1:0]   ch;
  logic [SID_W-1:0] sid;
  logic [VBA_W-1:0] vba;
  logic [ROW_W-1:0] row;
  logic             aligned, in_range;

  rome_addr_map #(.NUM_CH(NUM_CH), .ADDR_W(ADDR_W)) u_map (
    .addr_i(req_addr_i), .ch_o(ch), .sid_o(sid), .vba_o(vba), .row_o(row),
    .aligned_o(aligned), .in_range_o(in_range)
  );

  req_t              req;
  logic [NUM_CH-1:0] ch_ready;
  logic              ok;

  assign req       = '{write: req_write_i, sid: sid, vba: vba, row: row, tag: req_tag_i};
  assign ok        = aligned && in_range;
  assign req_err_o = req_valid_i && !ok;
  assign req_ready_o = ok && ch_ready[ch];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    rome_channel #(.QDEPTH(QDEPTH), .T_REF_INTERVAL_P(T_REF_INTERVAL_P)) u_ch (
      .clk, .rst_n,
      .req_valid_i  (req_valid_i && ok && ch == CHW'(c)),
      .req_ready_o  (ch_ready[c]),
      .req_i        (req),
      .rd_o         (rd_o[c]),
      .wd_req_o     (wd_req_o[c]),
      .wd_data_i    (wd_data_i[c]),
      .dram_row_o   (dram_row_o[c]),
      .dram_col_o   (dram_col_o[c]),
      .dram_wvalid_o(dram_wvalid_o[c]),
      .dram_wdata_o (dram_wdata_o[c]),
      .dram_rvalid_i(dram_rvalid_i[c]),
      .dram_rdata_i (dram_rdata_i[c]),
      .row_cmd_o    (row_cmd_o[c]),
      .pre_defer_o  (pre_defer_o[c]),
      .ref_defer_o  (ref_defer_o[c]),
      .ref_pending_o(ref_pending_o[c])
    );
  end

endmodule
