// rome_timing_ctrl: row-command-to-row-command timing of the RoMe controller.
//
// With row-level commands the controller only has to space one RD_row/WR_row
// from the previous one (Table 4 of the paper): tR2RS/tR2RR (read to read, to a
// different VBA of the same / a different stack ID), tR2WS/R, tW2RS/R and
// tW2WS/R. The same-VBA times tRD_row/tWR_row are kept by the bank FSMs.
// Because every gap is at least 64 cycles and the same-VBA times are at most
// 115, only the most recent access command matters, so the block keeps one
// saturating cycle counter, the last command's direction and its stack ID.
//
// Refresh spacing: a REF may follow an access after 2 x tRRDS (the paper's
// tightest C/A case, Sec. 4.4). An access or a further REF may follow a REF
// only after tRREFD + 1 cycles, so that the command generator's second REFpb
// has left the row bus; that rule is this design's own.
//
// Interface: issue_i/issue_op_i/issue_sid_i report the command the controller
// issues this cycle. The *_ok_o outputs say, for the next cycle onward,
// whether a read or write to the same / a different SID than the last access,
// or a REF, may be issued. Combinational outputs from registered state.
module rome_timing_ctrl
  import rome_pkg::*;
#(
  parameter int T_R2RS_P = T_R2RS,
  parameter int T_R2RR_P = T_R2RR,
  parameter int T_R2WS_P = T_R2WS,
  parameter int T_R2WR_P = T_R2WR,
  parameter int T_W2RS_P = T_W2RS,
  parameter int T_W2RR_P = T_W2RR,
  parameter int T_W2WS_P = T_W2WS,
  parameter int T_W2WR_P = T_W2WR,
  parameter int T_ACC2REF_P = 2 * T_RRDS,
  parameter int T_REF2X_P   = T_RREFD + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             issue_i,
  input  row_op_e          issue_op_i,
  input  logic [SID_W-1:0] issue_sid_i,
  output logic [SID_W-1:0] last_sid_o,
  output logic             rd_ok_same_o,   // read, same SID as last access
  output logic             rd_ok_diff_o,   // read, different SID
  output logic             wr_ok_same_o,
  output logic             wr_ok_diff_o,
  output logic             ref_ok_o
);

  localparam int CNT_W = 8;
  localparam logic [CNT_W-1:0] SAT = '1;

  logic [CNT_W-1:0] since_acc_q, since_ref_q;
  logic             last_wr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      since_acc_q <= SAT;
      since_ref_q <= SAT;
      last_wr_q   <= 1'b0;
      last_sid_o  <= '0;
    end else begin
      // The counters hold the cycles since the command, counted from 1 on
      // the cycle after it was issued.
      if (issue_i && issue_op_i != ROW_REF) begin
        since_acc_q <= CNT_W'(1);
        last_wr_q   <= (issue_op_i == ROW_WR);
        last_sid_o  <= issue_sid_i;
      end else if (since_acc_q != SAT) begin
        since_acc_q <= since_acc_q + 1'b1;
      end
      if (issue_i && issue_op_i == ROW_REF) since_ref_q <= CNT_W'(1);
      else if (since_ref_q != SAT)         since_ref_q <= since_ref_q + 1'b1;
    end
  end

  logic ref_clear;
  assign ref_clear = (since_ref_q >= CNT_W'(T_REF2X_P));

  always_comb begin
    if (last_wr_q) begin
      rd_ok_same_o = since_acc_q >= CNT_W'(T_W2RS_P);
      rd_ok_diff_o = since_acc_q >= CNT_W'(T_W2RR_P);
      wr_ok_same_o = since_acc_q >= CNT_W'(T_W2WS_P);
      wr_ok_diff_o = since_acc_q >= CNT_W'(T_W2WR_P);
    end else begin
      rd_ok_same_o = since_acc_q >= CNT_W'(T_R2RS_P);
      rd_ok_diff_o = since_acc_q >= CNT_W'(T_R2RR_P);
      wr_ok_same_o = since_acc_q >= CNT_W'(T_R2WS_P);
      wr_ok_diff_o = since_acc_q >= CNT_W'(T_R2WR_P);
    end
    rd_ok_same_o = rd_ok_same_o && ref_clear;
    rd_ok_diff_o = rd_ok_diff_o && ref_clear;
    wr_ok_same_o = wr_ok_same_o && ref_clear;
    wr_ok_diff_o = wr_ok_diff_o && ref_clear;
    ref_ok_o     = (since_acc_q >= CNT_W'(T_ACC2REF_P)) && ref_clear;
  end

endmodule
