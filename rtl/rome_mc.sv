// rome_mc: the RoMe memory controller of one channel.
//
// The controller issues only three row-level commands: RD_row, WR_row (one
// whole 4 KB virtual-bank row each) and REF (per-bank refresh of one VBA).
// It is built from the parts the paper lists (Sec. 5.1, Table 6):
//   * rome_req_queue   - four-entry age-ordered queue of 4 KB requests;
//   * rome_bank_fsm    - five pooled VBA FSMs: two for the at most two VBAs
//                        an access keeps busy at once, three for the at most
//                        three VBAs under refresh at once;
//   * rome_timing_ctrl - the row-command timing parameters of Table 5;
//   * rome_refresh_sched - one VBA refresh every 2 x tREFIpb.
// The scheduler is the paper's: find which VBAs are busy, then serve the
// oldest ready request. A request is ready when its VBA is not held by any
// FSM (so back-to-back commands to one VBA never happen), an access FSM is
// free and the timing parameter for its direction and stack ID has passed.
// A due refresh goes first whenever its VBA is idle, a refresh FSM is free
// and tACC2REF has passed; when refreshes have piled up (urgent) no new
// access to the refresh target is started. A request never overtakes an
// older one to the same VBA, so a read always sees an earlier write to its
// row. Refresh priority, the urgent rule and the same-VBA order are this
// design's choices.
//
// Interface: req_valid_i/req_ready_o/req_i take a request per cycle into the
// queue. cmd_o is registered: it is valid for one cycle, one cycle after the
// scheduling decision. Status outputs expose the queue fill, the pending
// refresh count and the FSM states for observation.
module rome_mc
  import rome_pkg::*;
#(
  parameter int QDEPTH    = 4,
  parameter int N_ACC_FSM = 2,
  parameter int N_REF_FSM = 3,
  parameter int T_R2RS_P  = T_R2RS,
  parameter int T_R2RR_P  = T_R2RR,
  parameter int T_R2WS_P  = T_R2WS,
  parameter int T_R2WR_P  = T_R2WR,
  parameter int T_W2RS_P  = T_W2RS,
  parameter int T_W2RR_P  = T_W2RR,
  parameter int T_W2WS_P  = T_W2WS,
  parameter int T_W2WR_P  = T_W2WR,
  parameter int T_RD_ROW_P = T_RD_ROW,
  parameter int T_WR_ROW_P = T_WR_ROW,
  parameter int T_REF_BUSY_P = T_RFC_PB + T_RREFD + REF_SLACK,
  parameter int T_REF_INTERVAL_P = 2 * T_REFI_PB,
  parameter int REF_MAX_PEND = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  req_t        req_i,
  output mc_cmd_t     cmd_o,
  output logic [$clog2(QDEPTH+1)-1:0] q_count_o,
  output logic [3:0]  ref_pending_o,
  output bank_state_e fsm_state_o [N_ACC_FSM + N_REF_FSM]
);

  localparam int NF = N_ACC_FSM + N_REF_FSM;
  localparam int VW = SID_W + VBA_W;
  localparam int QI = $clog2(QDEPTH);

  // ------------------------------------------------------------ request queue
  logic [QDEPTH-1:0] ent_valid;
  req_t              ent [QDEPTH];
  logic              deq;
  logic [QI-1:0]     deq_idx;

  rome_req_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid_i (req_valid_i),
    .in_ready_o (req_ready_o),
    .in_req_i   (req_i),
    .deq_i      (deq),
    .deq_idx_i  (deq_idx),
    .ent_valid_o(ent_valid),
    .ent_o      (ent),
    .count_o    (q_count_o)
  );

  // ------------------------------------------------------------ timing
  logic             issue;
  row_op_e          issue_op;
  logic [VW-1:0]    issue_vba;
  logic [SID_W-1:0] last_sid;
  logic rd_ok_s, rd_ok_r, wr_ok_s, wr_ok_r, ref_ok;

  rome_timing_ctrl #(
    .T_R2RS_P(T_R2RS_P), .T_R2RR_P(T_R2RR_P), .T_R2WS_P(T_R2WS_P), .T_R2WR_P(T_R2WR_P),
    .T_W2RS_P(T_W2RS_P), .T_W2RR_P(T_W2RR_P), .T_W2WS_P(T_W2WS_P), .T_W2WR_P(T_W2WR_P)
  ) u_timing (
    .clk, .rst_n,
    .issue_i     (issue),
    .issue_op_i  (issue_op),
    .issue_sid_i (issue_vba[VW-1 -: SID_W]),
    .last_sid_o  (last_sid),
    .rd_ok_same_o(rd_ok_s),
    .rd_ok_diff_o(rd_ok_r),
    .wr_ok_same_o(wr_ok_s),
    .wr_ok_diff_o(wr_ok_r),
    .ref_ok_o    (ref_ok)
  );

  // ------------------------------------------------------------ refresh
  logic          ref_req, ref_urgent, ref_ack;
  logic [VW-1:0] ref_target;

  rome_refresh_sched #(.T_INTERVAL(T_REF_INTERVAL_P), .MAX_PEND(REF_MAX_PEND)) u_refresh (
    .clk, .rst_n,
    .ack_i    (ref_ack),
    .req_o    (ref_req),
    .urgent_o (ref_urgent),
    .target_o (ref_target),
    .pending_o(ref_pending_o)
  );

  // ------------------------------------------------------------ bank FSMs
  logic [NF-1:0] fsm_start, fsm_idle;
  logic [VW-1:0] fsm_vba [NF];

  for (genvar f = 0; f < NF; f++) begin : g_fsm
    rome_bank_fsm #(
      .T_RD_ROW_P(T_RD_ROW_P), .T_WR_ROW_P(T_WR_ROW_P), .T_REF_P(T_REF_BUSY_P)
    ) u_fsm (
      .clk, .rst_n,
      .start_i(fsm_start[f]),
      .op_i   (issue_op),
      .vba_i  (issue_vba),
      .state_o(fsm_state_o[f]),
      .vba_o  (fsm_vba[f]),
      .idle_o (fsm_idle[f])
    );
  end

  function automatic logic vba_busy(input logic [VW-1:0] v,
                                    input logic [NF-1:0] idle,
                                    input logic [VW-1:0] fv [NF]);
    logic b = 1'b0;
    for (int f = 0; f < NF; f++) if (!idle[f] && fv[f] == v) b = 1'b1;
    return b;
  endfunction

  // ------------------------------------------------------------ scheduler
  logic acc_free, ref_free;
  logic [QDEPTH-1:0] ready;
  logic [VW-1:0]     ent_vba [QDEPTH];

  always_comb begin
    acc_free = |fsm_idle[N_ACC_FSM-1:0];
    ref_free = |fsm_idle[NF-1:N_ACC_FSM];

    ref_ack = ref_req && ref_free && ref_ok &&
              !vba_busy(ref_target, fsm_idle, fsm_vba);

    for (int i = 0; i < QDEPTH; i++) begin
      logic same_sid, t_ok;
      ent_vba[i] = {ent[i].sid, ent[i].vba};
      same_sid   = (ent[i].sid == last_sid);
      t_ok       = ent[i].write ? (same_sid ? wr_ok_s : wr_ok_r)
                                : (same_sid ? rd_ok_s : rd_ok_r);
      ready[i]   = ent_valid[i] && t_ok && acc_free && !ref_ack &&
                   !vba_busy(ent_vba[i], fsm_idle, fsm_vba) &&
                   !(ref_urgent && ent_vba[i] == ref_target);
      // Requests to one VBA (and so to one 4 KB row) stay in arrival order.
      for (int j = 0; j < i; j++)
        if (ent_valid[j] && ent_vba[j] == ent_vba[i]) ready[i] = 1'b0;
    end

    // Oldest first: entry 0 is the oldest.
    deq     = 1'b0;
    deq_idx = '0;
    for (int i = QDEPTH - 1; i >= 0; i--)
      if (ready[i]) begin deq = 1'b1; deq_idx = QI'(i); end

    issue     = ref_ack || deq;
    issue_op  = ref_ack ? ROW_REF : (ent[deq_idx].write ? ROW_WR : ROW_RD);
    issue_vba = ref_ack ? ref_target : ent_vba[deq_idx];

    // Allocate the lowest free FSM of the right pool.
    fsm_start = '0;
    if (ref_ack) begin
      for (int f = NF - 1; f >= N_ACC_FSM; f--)
        if (fsm_idle[f]) fsm_start = NF'(1) << f;
    end else if (deq) begin
      for (int f = N_ACC_FSM - 1; f >= 0; f--)
        if (fsm_idle[f]) fsm_start = NF'(1) << f;
    end
  end

  // ------------------------------------------------------------ command out
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_o <= '0;
    end else begin
      cmd_o.valid <= issue;
      cmd_o.op    <= issue_op;
      cmd_o.sid   <= issue_vba[VW-1 -: SID_W];
      cmd_o.vba   <= issue_vba[VBA_W-1:0];
      cmd_o.row   <= ref_ack ? '0 : ent[deq_idx].row;
      cmd_o.tag   <= ref_ack ? '0 : ent[deq_idx].tag;
    end
  end

  a_one_fsm: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(fsm_start));
  a_fsm_when_issue: assert property (@(posedge clk) disable iff (!rst_n) issue |-> fsm_start != '0);

endmodule
