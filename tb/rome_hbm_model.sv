// rome_hbm_model: behavioural model of one HBM4 channel (both pseudo channels,
// four stack IDs, 4 bank groups x 4 banks each) as the RoMe command generator
// drives it. Not synthesizable; for simulation only.
//
// It stores data per pseudo channel in associative arrays, returns read data
// tCL after each RD and takes write data tWL after each WR. Every command is
// checked against the HBM4 rules the command sequence has to meet: ACT only to
// a precharged bank and no earlier than tRP after its PRE, tRC after its last
// ACT and tRFCpb after its REF; tRRDS between ACTs and tFAW over four ACTs;
// RD/WR only to an open bank, tRCD after ACT, tCCDS apart and tCCDL apart in
// one bank group; PRE no earlier than tRAS after ACT, tRTP after a RD and
// tWL + burst + tWR after a WR; REFpb only to a precharged bank. Each broken
// rule is counted in violations_o. Cycles in which a read burst and a write
// burst would share the DQ are counted apart, in dq_conflicts_o: with tCL = 16
// and the paper's tR2WS/tR2WR they occur on every read-to-write turnaround.
module rome_hbm_model
  import rome_pkg::*;
  import rome_tb_pkg::*;
#(
  parameter int TRCD = T_RCD, parameter int TRP = T_RP, parameter int TRAS = T_RAS,
  parameter int TRC = T_RC, parameter int TRRDS = T_RRDS, parameter int TFAW = 12,
  parameter int TCCDS = T_CCDS, parameter int TCCDL = T_CCDL, parameter int TRTP = T_RTP,
  parameter int TWR = T_WR, parameter int TWL = T_WL, parameter int TBURST = T_BURST,
  parameter int TCL = T_CL, parameter int TRFCPB = T_RFC_PB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dram_row_cmd_t     row_i,
  input  dram_col_cmd_t     col_i,
  input  logic              wvalid_i,
  input  logic [PC_DW-1:0]  wdata_i [NUM_PC],
  output logic              rvalid_o,
  output logic [PC_DW-1:0]  rdata_o [NUM_PC],
  output int                violations_o,
  output int                dq_conflicts_o,  // read and write bursts on the DQ in one cycle
  output int                n_act_o, output int n_pre_o, output int n_ref_o,
  output int                n_rd_o,  output int n_wr_o
);
  localparam int NB = 64;
  localparam int NEG = -100000;

  logic [PC_DW-1:0] mem [NUM_PC][int];
  logic             open_q [NB];
  logic [ROW_W-1:0] orow_q [NB];
  int t_act [NB], t_pre [NB], t_ref [NB], t_rd [NB], t_wr [NB];
  int t_colbg [16];
  int act_hist [4];
  int t_lastact, t_lastcol, cyc;
  int dq_used [int];

  typedef struct { logic v; logic [31:0] key; } pend_t;
  pend_t rp [TCL];
  pend_t wp [TWL];

  function automatic int bidx(input logic [SID_W-1:0] s, input logic [BG_W-1:0] g, input logic [BA_W-1:0] a);
    return int'({s, g, a});
  endfunction

  task automatic viol(input string what);
    if (violations_o < 10) $display("HBM model: %s at cycle %0d", what, cyc);
    violations_o++;
  endtask

  task automatic use_dq(input int c);
    if (dq_used.exists(c)) dq_conflicts_o++;
    dq_used[c] = 1;
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; violations_o <= 0; dq_conflicts_o <= 0;
      n_act_o <= 0; n_pre_o <= 0; n_ref_o <= 0; n_rd_o <= 0; n_wr_o <= 0;
      for (int b = 0; b < NB; b++) begin
        open_q[b] <= 1'b0; orow_q[b] <= '0;
        t_act[b] <= NEG; t_pre[b] <= NEG; t_ref[b] <= NEG; t_rd[b] <= NEG; t_wr[b] <= NEG;
      end
      for (int i = 0; i < 16; i++) t_colbg[i] <= NEG;
      for (int i = 0; i < 4; i++) act_hist[i] <= NEG;
      t_lastact <= NEG; t_lastcol <= NEG;
      for (int i = 0; i < TCL; i++) rp[i].v <= 1'b0;
      for (int i = 0; i < TWL; i++) wp[i].v <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      // ---------------- row commands
      if (row_i.valid) begin
        automatic int b = bidx(row_i.sid, row_i.bg, row_i.ba);
        unique case (row_i.op)
          D_ACT: begin
            n_act_o <= n_act_o + 1;
            if (open_q[b]) viol("ACT to open bank");
            if (cyc - t_pre[b] < TRP) viol("tRP");
            if (cyc - t_act[b] < TRC) viol("tRC");
            if (cyc - t_ref[b] < TRFCPB) viol("tRFCpb");
            if (cyc - t_lastact < TRRDS) viol("tRRDS");
            if (cyc - act_hist[3] < TFAW) viol("tFAW");
            open_q[b] <= 1'b1; orow_q[b] <= row_i.row; t_act[b] <= cyc; t_lastact <= cyc;
            act_hist[0] <= cyc;
            for (int i = 1; i < 4; i++) act_hist[i] <= act_hist[i-1];
          end
          D_PRE: begin
            n_pre_o <= n_pre_o + 1;
            if (!open_q[b]) viol("PRE to closed bank");
            if (cyc - t_act[b] < TRAS) viol("tRAS");
            if (cyc - t_rd[b] < TRTP) viol("tRTP");
            if (cyc - t_wr[b] < TWL + TBURST + TWR) viol("tWR");
            open_q[b] <= 1'b0; t_pre[b] <= cyc;
          end
          default: begin
            n_ref_o <= n_ref_o + 1;
            if (open_q[b]) viol("REF to open bank");
            if (cyc - t_pre[b] < TRP) viol("tRP before REF");
            if (cyc - t_ref[b] < TRFCPB) viol("REF during refresh");
            t_ref[b] <= cyc;
          end
        endcase
      end
      // ---------------- column commands
      rp[0].v <= 1'b0;
      wp[0].v <= 1'b0;
      if (col_i.valid) begin
        automatic int b = bidx(col_i.sid, col_i.bg, col_i.ba);
        automatic int g = int'({col_i.sid, col_i.bg});
        automatic logic [31:0] key = 32'({col_i.sid, col_i.bg, col_i.ba, orow_q[b], col_i.col});
        if (!open_q[b]) viol("RD/WR to closed bank");
        if (cyc - t_act[b] < TRCD) viol("tRCD");
        if (cyc - t_lastcol < TCCDS) viol("tCCDS");
        if (cyc - t_colbg[g] < TCCDL) viol("tCCDL");
        t_lastcol <= cyc; t_colbg[g] <= cyc;
        if (col_i.write) begin
          n_wr_o <= n_wr_o + 1; t_wr[b] <= cyc;
          wp[0].v <= 1'b1; wp[0].key <= key;
          use_dq(cyc + TWL);
        end else begin
          n_rd_o <= n_rd_o + 1; t_rd[b] <= cyc;
          rp[0].v <= 1'b1; rp[0].key <= key;
          use_dq(cyc + TCL);
        end
      end
      for (int i = 1; i < TCL; i++) rp[i] <= rp[i-1];
      for (int i = 1; i < TWL; i++) wp[i] <= wp[i-1];
      // ---------------- write data capture
      if (wp[TWL-1].v) begin
        if (!wvalid_i) viol("write data missing");
        for (int p = 0; p < NUM_PC; p++) mem[p][int'(wp[TWL-1].key)] = wdata_i[p];
      end else if (wvalid_i) viol("unexpected write data");
    end
  end

  // ---------------- read data
  always_comb begin
    rvalid_o = rp[TCL-1].v;
    for (int p = 0; p < NUM_PC; p++) begin
      rdata_o[p] = '0;
      if (rp[TCL-1].v)
        rdata_o[p] = mem[p].exists(int'(rp[TCL-1].key)) ? mem[p][int'(rp[TCL-1].key)]
                                                        : init_data(rp[TCL-1].key, p);
    end
  end
endmodule
