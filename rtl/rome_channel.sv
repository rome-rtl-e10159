// rome_channel: one RoMe channel, the controller on the processor side and the
// command generator on the HBM logic die.
//
// Between the two runs only the row-level command (RD_row, WR_row or REF, one
// per command slot): this is the narrow C/A link that lets RoMe drop from 18 to
// 5 C/A pins per channel. Its pin-level serialisation is not modelled; the
// command is passed as one registered word. Towards the DRAM dies the command
// generator drives the ordinary HBM row and column command buses and the DQ of
// both pseudo channels.
//
// Interface: 4 KB requests in on req_*, read beats out on rd_o (64 beats of
// 64 B per request), write beats pulled with wd_req_o/wd_data_i, DRAM command
// and data buses on dram_*. A read's first beat leaves rd_o 1 + 1 + 17 + 16 + 1
// cycles after the scheduling decision (controller register, generator
// offset to the first RD, tCL, output register).
module rome_channel
  import rome_pkg::*;
#(
  parameter int QDEPTH           = 4,
  parameter int T_REF_INTERVAL_P = 2 * T_REFI_PB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  req_t              req_i,
  output rd_beat_t          rd_o,
  output wd_req_t           wd_req_o,
  input  logic [CH_DW-1:0]  wd_data_i,
  output dram_row_cmd_t     dram_row_o,
  output dram_col_cmd_t     dram_col_o,
  output logic              dram_wvalid_o,
  output logic [PC_DW-1:0]  dram_wdata_o [NUM_PC],
  input  logic              dram_rvalid_i,
  input  logic [PC_DW-1:0]  dram_rdata_i [NUM_PC],
  output mc_cmd_t           row_cmd_o,      // observation of the row-level link
  output logic              pre_defer_o,
  output logic              ref_defer_o,
  output logic [3:0]        ref_pending_o
);

  mc_cmd_t     cmd;
  bank_state_e fsm_state [5];
  logic [$clog2(QDEPTH+1)-1:0] q_count;
  logic [1:0]  eng_busy;

  rome_mc #(.QDEPTH(QDEPTH), .T_REF_INTERVAL_P(T_REF_INTERVAL_P)) u_mc (
    .clk, .rst_n,
    .req_valid_i, .req_ready_o, .req_i,
    .cmd_o        (cmd),
    .q_count_o    (q_count),
    .ref_pending_o,
    .fsm_state_o  (fsm_state)
  );

  rome_cmd_gen u_cmd_gen (
    .clk, .rst_n,
    .cmd_i       (cmd),
    .row_cmd_o   (dram_row_o),
    .col_cmd_o   (dram_col_o),
    .dq_wvalid_o (dram_wvalid_o),
    .dq_wdata_o  (dram_wdata_o),
    .dq_rvalid_i (dram_rvalid_i),
    .dq_rdata_i  (dram_rdata_i),
    .wd_req_o,
    .wd_data_i,
    .rd_o,
    .pre_defer_o,
    .ref_defer_o,
    .eng_busy_o  (eng_busy)
  );

  assign row_cmd_o = cmd;

endmodule
