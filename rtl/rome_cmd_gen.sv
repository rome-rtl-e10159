// rome_cmd_gen: the RoMe command generator on the HBM logic die, one per channel.
//
// It turns each row-level command from the controller into a fixed sequence of
// conventional HBM commands, without looking at bank state or timing. A
// virtual bank is two banks in different bank groups (bank A in BG 2m, bank B
// in BG 2m+1, same BA), and both pseudo channels get the same commands, so a
// RD_row reads 2 banks x 32 columns x 2 PCs x 32 B = 4 KB. Offsets are counted
// from the cycle after the command arrives (Fig. 9 of the paper):
//   ACT A at 0, ACT B at tRRDS;
//   RD/WR to bank A at tRCD + (tRRDS - tCCDS) + k*tCCDL, k = 0..31;
//   RD/WR to bank B tCCDS later, so the two banks alternate every tCCDS;
//   PRE to each bank tRTP after its last RD, or tWL + burst + tWR after its
//   last WR.
// The extra tRRDS - tCCDS wait is the paper's fix for RDs of the two banks
// landing in the same cycle. The paper's text places it "before the ACT to the
// first bank"; its Fig. 9 draws it between tRCDRD and bank A's first RD. This
// design follows the figure; both give the same RD/WR spacing.
// A REF becomes REFpb to bank A and, tRREFD later, REFpb to bank B.
//
// Two sequence engines let two row commands overlap (the controller spaces
// them by at least 64 cycles). The row C/A bus carries one command per cycle:
// ACT has priority, then PRE, then REFpb; a PRE or REFpb that loses waits a
// cycle. This arbitration is this design's own; the paper does not discuss
// row-bus conflicts.
//
// Data: read data from the DRAM arrives tCL after each RD and leaves on rd_o
// one cycle later with the request tag and the beat number (beat 2k is bank A
// column k, beat 2k+1 bank B column k; PC0 carries bits 255:0). For writes,
// wd_req_o asks the host for a beat in the cycle the WR is issued; the host
// answers combinationally on wd_data_i, and the beat is driven on the DQ
// outputs tWL cycles later.
module rome_cmd_gen
  import rome_pkg::*;
#(
  parameter int N_ENG    = 2,
  parameter int T_RCD_P  = T_RCD,
  parameter int T_RRDS_P = T_RRDS,
  parameter int T_CCDS_P = T_CCDS,
  parameter int T_CCDL_P = T_CCDL,
  parameter int T_RTP_P  = T_RTP,
  parameter int T_WL_P   = T_WL,
  parameter int T_BURST_P = T_BURST,
  parameter int T_WR_P   = T_WR,
  parameter int T_CL_P   = T_CL,
  parameter int T_RREFD_P = T_RREFD
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mc_cmd_t           cmd_i,
  // to the DRAM dies (shared by both PCs)
  output dram_row_cmd_t     row_cmd_o,
  output dram_col_cmd_t     col_cmd_o,
  output logic              dq_wvalid_o,
  output logic [PC_DW-1:0]  dq_wdata_o [NUM_PC],
  input  logic              dq_rvalid_i,
  input  logic [PC_DW-1:0]  dq_rdata_i [NUM_PC],
  // to the host
  output wd_req_t           wd_req_o,
  input  logic [CH_DW-1:0]  wd_data_i,
  output rd_beat_t          rd_o,
  // observation
  output logic              pre_defer_o,
  output logic              ref_defer_o,
  output logic [N_ENG-1:0]  eng_busy_o
);

  localparam int FIRST_A = T_RCD_P + T_RRDS_P - T_CCDS_P;
  localparam int FIRST_B = FIRST_A + T_CCDS_P;
  localparam int LAST_A  = FIRST_A + (NCOL - 1) * T_CCDL_P;
  localparam int LAST_B  = LAST_A + T_CCDS_P;
  localparam int GAP_RD  = T_RTP_P;
  localparam int GAP_WR  = T_WL_P + T_BURST_P + T_WR_P;
  localparam int T_SAT   = LAST_B + ((GAP_WR > GAP_RD) ? GAP_WR : GAP_RD) + 1;
  localparam int TW      = $clog2(T_SAT + 1);
  localparam int EW      = (N_ENG > 1) ? $clog2(N_ENG) : 1;

  if (T_CCDL_P != 2 * T_CCDS_P) begin : gen_chk_ccd
    $error("rome_cmd_gen: interleaving two banks needs tCCDL = 2 x tCCDS");
  end
  if (T_WL_P < 1 || T_CL_P < 1) begin : gen_chk_lat
    $error("rome_cmd_gen: tWL and tCL must be at least one cycle");
  end

  typedef struct packed {
    logic             active;
    logic             write;
    logic [SID_W-1:0] sid;
    logic [VBA_W-1:0] vba;
    logic [ROW_W-1:0] row;
    logic [TAG_W-1:0] tag;
    logic [TW-1:0]    t;
    logic             pa_done;
    logic             pb_done;
  } eng_t;

  eng_t eng_q [N_ENG];

  // REF engine
  logic             ref_act_q, ra_done_q, rb_done_q;
  logic [SID_W-1:0] ref_sid_q;
  logic [VBA_W-1:0] ref_vba_q;
  logic [4:0]       rt_q;

  // ------------------------------------------------------ per-engine wants
  logic [N_ENG-1:0] want_act, want_pa, want_pb, col_a, col_b;
  logic [COL_W-1:0] col_k [N_ENG];

  always_comb begin
    for (int e = 0; e < N_ENG; e++) begin
      int t, ka, kb;
      t  = int'(eng_q[e].t);
      ka = (t - FIRST_A) / T_CCDL_P;
      kb = (t - FIRST_B) / T_CCDL_P;
      want_act[e] = eng_q[e].active && (t == 0 || t == T_RRDS_P);
      col_a[e] = eng_q[e].active && t >= FIRST_A && ((t - FIRST_A) % T_CCDL_P) == 0 && ka < NCOL;
      col_b[e] = eng_q[e].active && t >= FIRST_B && ((t - FIRST_B) % T_CCDL_P) == 0 && kb < NCOL;
      col_k[e] = col_b[e] ? COL_W'(kb) : COL_W'(ka);
      want_pa[e] = eng_q[e].active && !eng_q[e].pa_done &&
                   t >= (LAST_A + (eng_q[e].write ? GAP_WR : GAP_RD));
      want_pb[e] = eng_q[e].active && !eng_q[e].pb_done &&
                   t >= (LAST_B + (eng_q[e].write ? GAP_WR : GAP_RD));
    end
  end

  // ------------------------------------------------------ row bus arbiter
  logic [N_ENG-1:0] gnt_pa, gnt_pb;
  logic             gnt_ra, gnt_rb;

  always_comb begin
    logic busy;
    row_cmd_o = '0;
    gnt_pa = '0; gnt_pb = '0; gnt_ra = 1'b0; gnt_rb = 1'b0;
    busy = 1'b0;
    for (int e = 0; e < N_ENG; e++)
      if (want_act[e] && !busy) begin
        busy = 1'b1;
        row_cmd_o = '{valid: 1'b1, op: D_ACT, sid: eng_q[e].sid,
                      bg: vba_bg(eng_q[e].vba, eng_q[e].t != '0),
                      ba: vba_ba(eng_q[e].vba), row: eng_q[e].row};
      end
    for (int e = 0; e < N_ENG; e++) begin
      if (want_pa[e] && !busy) begin
        busy = 1'b1; gnt_pa[e] = 1'b1;
        row_cmd_o = '{valid: 1'b1, op: D_PRE, sid: eng_q[e].sid,
                      bg: vba_bg(eng_q[e].vba, 1'b0), ba: vba_ba(eng_q[e].vba), row: '0};
      end
      if (want_pb[e] && !busy) begin
        busy = 1'b1; gnt_pb[e] = 1'b1;
        row_cmd_o = '{valid: 1'b1, op: D_PRE, sid: eng_q[e].sid,
                      bg: vba_bg(eng_q[e].vba, 1'b1), ba: vba_ba(eng_q[e].vba), row: '0};
      end
    end
    if (ref_act_q && !ra_done_q && !busy) begin
      busy = 1'b1; gnt_ra = 1'b1;
      row_cmd_o = '{valid: 1'b1, op: D_REF, sid: ref_sid_q,
                    bg: vba_bg(ref_vba_q, 1'b0), ba: vba_ba(ref_vba_q), row: '0};
    end
    if (ref_act_q && ra_done_q && !rb_done_q && int'(rt_q) >= T_RREFD_P && !busy) begin
      busy = 1'b1; gnt_rb = 1'b1;
      row_cmd_o = '{valid: 1'b1, op: D_REF, sid: ref_sid_q,
                    bg: vba_bg(ref_vba_q, 1'b1), ba: vba_ba(ref_vba_q), row: '0};
    end
    pre_defer_o = |((want_pa & ~gnt_pa) | (want_pb & ~gnt_pb));
    ref_defer_o = (ref_act_q && !ra_done_q && !gnt_ra) ||
                  (ref_act_q && ra_done_q && !rb_done_q && int'(rt_q) >= T_RREFD_P && !gnt_rb);
  end

  // ------------------------------------------------------ column bus
  always_comb begin
    col_cmd_o = '0;
    wd_req_o  = '0;
    for (int e = 0; e < N_ENG; e++)
      if (col_a[e] || col_b[e]) begin
        col_cmd_o = '{valid: 1'b1, write: eng_q[e].write, sid: eng_q[e].sid,
                      bg: vba_bg(eng_q[e].vba, col_b[e]), ba: vba_ba(eng_q[e].vba),
                      col: col_k[e]};
        wd_req_o  = '{valid: eng_q[e].write, tag: eng_q[e].tag,
                      beat: {col_k[e], col_b[e]}};
      end
  end

  // ------------------------------------------------------ engine state
  logic          acc_cmd, ref_cmd;
  logic [EW-1:0] free_e;
  logic          have_free;

  assign acc_cmd = cmd_i.valid && cmd_i.op != ROW_REF;
  assign ref_cmd = cmd_i.valid && cmd_i.op == ROW_REF;

  always_comb begin
    have_free = 1'b0;
    free_e    = '0;
    for (int e = N_ENG - 1; e >= 0; e--)
      if (!eng_q[e].active) begin have_free = 1'b1; free_e = EW'(e); end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_ENG; e++) eng_q[e] <= '0;
      ref_act_q <= 1'b0; ra_done_q <= 1'b0; rb_done_q <= 1'b0;
      ref_sid_q <= '0;   ref_vba_q <= '0;   rt_q <= '0;
    end else begin
      for (int e = 0; e < N_ENG; e++) begin
        if (eng_q[e].active) begin
          if (int'(eng_q[e].t) != T_SAT) eng_q[e].t <= eng_q[e].t + 1'b1;
          if (gnt_pa[e]) eng_q[e].pa_done <= 1'b1;
          if (gnt_pb[e]) eng_q[e].pb_done <= 1'b1;
          if (eng_q[e].pa_done && eng_q[e].pb_done) eng_q[e].active <= 1'b0;
        end else if (acc_cmd && free_e == EW'(e)) begin
          eng_q[e] <= '{active: 1'b1, write: (cmd_i.op == ROW_WR), sid: cmd_i.sid,
                        vba: cmd_i.vba, row: cmd_i.row, tag: cmd_i.tag,
                        t: '0, pa_done: 1'b0, pb_done: 1'b0};
        end
      end
      if (ref_act_q) begin
        if (gnt_ra) ra_done_q <= 1'b1;
        if (ra_done_q && rt_q != '1) rt_q <= rt_q + 1'b1;
        if (gnt_rb) begin ref_act_q <= 1'b0; rb_done_q <= 1'b1; end
      end else if (ref_cmd) begin
        ref_act_q <= 1'b1; ra_done_q <= 1'b0; rb_done_q <= 1'b0;
        ref_sid_q <= cmd_i.sid; ref_vba_q <= cmd_i.vba;
        rt_q      <= 5'd1;
      end
    end
  end

  always_comb
    for (int e = 0; e < N_ENG; e++) eng_busy_o[e] = eng_q[e].active;

  // ------------------------------------------------------ data pipelines
  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [BEAT_W-1:0] beat;
  } rtag_t;

  rtag_t            rpipe_q [T_CL_P];
  logic             wv_q    [T_WL_P];
  logic [CH_DW-1:0] wd_q    [T_WL_P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T_CL_P; i++) rpipe_q[i] <= '0;
      for (int i = 0; i < T_WL_P; i++) begin wv_q[i] <= 1'b0; wd_q[i] <= '0; end
      rd_o <= '0;
    end else begin
      rpipe_q[0] <= '{valid: col_cmd_o.valid && !col_cmd_o.write,
                      tag: wd_req_o.tag, beat: wd_req_o.beat};
      for (int i = 1; i < T_CL_P; i++) rpipe_q[i] <= rpipe_q[i-1];
      wv_q[0] <= wd_req_o.valid;
      wd_q[0] <= wd_data_i;
      for (int i = 1; i < T_WL_P; i++) begin wv_q[i] <= wv_q[i-1]; wd_q[i] <= wd_q[i-1]; end
      rd_o.valid <= rpipe_q[T_CL_P-1].valid;
      rd_o.tag   <= rpipe_q[T_CL_P-1].tag;
      rd_o.beat  <= rpipe_q[T_CL_P-1].beat;
      rd_o.data  <= {dq_rdata_i[1], dq_rdata_i[0]};
    end
  end

  assign dq_wvalid_o   = wv_q[T_WL_P-1];
  assign dq_wdata_o[0] = wd_q[T_WL_P-1][PC_DW-1:0];
  assign dq_wdata_o[1] = wd_q[T_WL_P-1][CH_DW-1:PC_DW];

  // ------------------------------------------------------ protocol checks
  a_one_act: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(want_act));
  a_one_col: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col_a | col_b));
  a_free_engine: assert property (@(posedge clk) disable iff (!rst_n) acc_cmd |-> have_free);
  a_ref_idle: assert property (@(posedge clk) disable iff (!rst_n) ref_cmd |-> !ref_act_q);
  a_rdata: assert property (@(posedge clk) disable iff (!rst_n)
                            rpipe_q[T_CL_P-1].valid |-> dq_rvalid_i);

endmodule
