// tb_rome_cmd_gen: checks the fixed command sequences of the command
// generator against the offsets of Fig. 9, cycle by cycle, and runs them into
// the HBM model, which checks HBM4 timing and stores the data.
//
// 1. A lone WR_row then, 200 cycles later, a RD_row of the same VBA row: every
//    ACT, WR/RD and PRE must come at its expected offset, write beats must be
//    pulled in order on the WR cycles, and the 64 read beats must come back
//    tCL + 1 after each RD with the written data.
// 2. A REF: REFpb to bank A, then bank B exactly tRREFD later.
// 3. Row commands 64 cycles apart, so the PREs of one meet the ACTs of the
//    next on the row bus: a deferred PRE must still meet HBM timing.
`timescale 1ns/100ps
module tb_rome_cmd_gen;
  import rome_pkg::*;
  import rome_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;

  mc_cmd_t cmd;
  dram_row_cmd_t rowc; dram_col_cmd_t colc;
  logic wv, rv; logic [PC_DW-1:0] wd [NUM_PC]; logic [PC_DW-1:0] rdd [NUM_PC];
  wd_req_t wdr; logic [CH_DW-1:0] wdd; rd_beat_t rd;
  logic pre_def, ref_def; logic [1:0] busy;
  int viol, dqc, nact, npre, nref, nrd, nwr;

  rome_cmd_gen dut (.clk, .rst_n, .cmd_i(cmd), .row_cmd_o(rowc), .col_cmd_o(colc),
    .dq_wvalid_o(wv), .dq_wdata_o(wd), .dq_rvalid_i(rv), .dq_rdata_i(rdd),
    .wd_req_o(wdr), .wd_data_i(wdd), .rd_o(rd), .pre_defer_o(pre_def), .ref_defer_o(ref_def),
    .eng_busy_o(busy));
  rome_hbm_model u_hbm (.clk, .rst_n, .row_i(rowc), .col_i(colc), .wvalid_i(wv), .wdata_i(wd),
    .rvalid_o(rv), .rdata_o(rdd), .violations_o(viol), .dq_conflicts_o(dqc),
    .n_act_o(nact), .n_pre_o(npre), .n_ref_o(nref), .n_rd_o(nrd), .n_wr_o(nwr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [31:0] seed [256];
  bit          chk [256];
  assign wdd = beat_data(seed[wdr.tag], int'(wdr.beat));

  int cyc = 0, t0 = 0;
  int n_def = 0, n_rbeats = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pre_def) n_def++;
    if (rst_n && rd.valid && chk[rd.tag]) begin
      check(rd.data == beat_data(seed[rd.tag], int'(rd.beat)), $sformatf("read data beat %0d", rd.beat));
      n_rbeats++;
    end
  end

  // Expected command at offset t (cycles after the command is taken) for a lone sequence.
  localparam int FA = T_RCD + T_RRDS - T_CCDS;  // 17
  task automatic send(input row_op_e op, input int sid, input int vba, input int row, input int tag);
    @(negedge clk);
    cmd = '{valid: 1'b1, op: op, sid: 2'(sid), vba: 3'(vba), row: 13'(row), tag: 8'(tag)};
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic check_sequence(input bit w, input int sid, input int vba, input int row, input int tag);
    int gap = w ? (T_WL + T_BURST + T_WR) : T_RTP;
    int nrow = 0, ncol = 0;
    send(w ? ROW_WR : ROW_RD, sid, vba, row, tag);
    // the command was sampled at the edge before this negedge; offset 0 is this cycle
    for (int t = 0; t < 140; t++) begin
      bit exp_row, exp_col; int ebank, ecol; dram_row_op_e eop;
      exp_row = 0; exp_col = 0; ebank = 0; ecol = 0; eop = D_ACT;
      if (t == 0)             begin exp_row = 1; eop = D_ACT; ebank = 0; end
      if (t == T_RRDS)        begin exp_row = 1; eop = D_ACT; ebank = 1; end
      if (t == FA + 62 + gap) begin exp_row = 1; eop = D_PRE; ebank = 0; end
      if (t == FA + 63 + gap) begin exp_row = 1; eop = D_PRE; ebank = 1; end
      if (t >= FA && t <= FA + 63) begin
        exp_col = 1; ebank = (t - FA) % 2; ecol = (t - FA) / 2;
      end
      check(rowc.valid == exp_row, $sformatf("row cmd presence at offset %0d", t));
      if (exp_row && rowc.valid) begin
        check(rowc.op == eop && rowc.bg == {vba[2], ebank[0]} && rowc.ba == 2'(vba) &&
              rowc.sid == 2'(sid), $sformatf("row cmd at offset %0d", t));
        if (eop == D_ACT) check(rowc.row == 13'(row), "ACT row");
        nrow++;
      end
      check(colc.valid == exp_col, $sformatf("col cmd presence at offset %0d", t));
      if (exp_col && colc.valid) begin
        check(colc.write == w && colc.bg == {vba[2], ebank[0]} && colc.ba == 2'(vba) &&
              int'(colc.col) == ecol, $sformatf("col cmd at offset %0d", t));
        check(wdr.valid == w && (!w || (int'(wdr.beat) == 2 * ecol + ebank && int'(wdr.tag) == tag)),
              "write beat request");
        ncol++;
      end
      // read data: tCL after the RD, one more cycle through the output register
      if (!w && t >= FA + T_CL + 1 && t <= FA + T_CL + 1 + 63)
        check(rd.valid && int'(rd.beat) == t - FA - T_CL - 1 && int'(rd.tag) == tag,
              $sformatf("read beat at offset %0d", t));
      else
        check(!rd.valid, "no read beat outside the burst");
      @(negedge clk);
    end
    check(nrow == 4 && ncol == 64, "4 row and 64 column commands");
  endtask

  initial begin
    cmd = '0;
    for (int i = 0; i < 256; i++) begin seed[i] = 32'(i * 7919 + 1); chk[i] = 1; end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    // 1. write then read the same VBA row, and another VBA in another SID
    check_sequence(1'b1, 1, 5, 77, 9);
    seed[10] = seed[9];
    check_sequence(1'b0, 1, 5, 77, 10);
    check(n_rbeats == 64, "64 read beats");
    check_sequence(1'b1, 3, 2, 4000, 11);
    // 2. refresh
    send(ROW_REF, 2, 6, 0, 0);
    begin
      automatic int ta = -1, tb = -1;
      for (int t = 0; t < 40; t++) begin
        if (rowc.valid && rowc.op == D_REF && rowc.bg == 2'b10 && ta < 0) ta = t;
        if (rowc.valid && rowc.op == D_REF && rowc.bg == 2'b11 && tb < 0) tb = t;
        @(negedge clk);
      end
      check(ta == 0 && tb == T_RREFD, $sformatf("REFpb at %0d and %0d", ta, tb));
    end
    repeat (300) @(negedge clk);
    // 3. row commands to different VBAs 71 and 78 cycles apart
    for (int k = 0; k < 24; k++) begin
      chk[20 + k] = 0;   // rows never written: data not checked here
      send((k % 3 == 2) ? ROW_WR : ROW_RD, k % 4, k % 8, k, 20 + k);
      repeat (((k % 3 == 1) ? 78 : 71) - 2) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    check(n_def > 0, "PRE deferred on the row bus at least once");
    check(viol == 0, $sformatf("HBM timing violations %0d", viol));
    check(nact == npre && nref == 2, "ACT/PRE pairs and two REFpb");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
