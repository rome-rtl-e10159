// tb_rome_channel: one RoMe channel (controller + command generator) against
// the behavioural HBM channel model. Writes every VBA's rows 0 and 1, reads
// them back, then runs a random read/write mix; checks every read beat
// against a reference copy, the 35-cycle latency from row-level command to
// first read beat, 64 consecutive beats per read, HBM4 timing (no model
// violations) and that every request completes.
`timescale 1ns/100ps
module tb_rome_channel;
  import rome_pkg::*;
  import rome_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;

  logic req_valid, req_ready; req_t req;
  rd_beat_t rd; wd_req_t wdr; logic [CH_DW-1:0] wdd;
  dram_row_cmd_t drow; dram_col_cmd_t dcol; logic dwv, drv;
  logic [PC_DW-1:0] dwd [NUM_PC]; logic [PC_DW-1:0] drd [NUM_PC];
  mc_cmd_t rcmd; logic pre_def, ref_def; logic [3:0] rpend;
  int viol, dqc, nact, npre, nref, nrd, nwr;

  rome_channel dut (.clk, .rst_n, .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rd_o(rd), .wd_req_o(wdr), .wd_data_i(wdd), .dram_row_o(drow), .dram_col_o(dcol),
    .dram_wvalid_o(dwv), .dram_wdata_o(dwd), .dram_rvalid_i(drv), .dram_rdata_i(drd),
    .row_cmd_o(rcmd), .pre_defer_o(pre_def), .ref_defer_o(ref_def), .ref_pending_o(rpend));
  rome_hbm_model u_hbm (.clk, .rst_n, .row_i(drow), .col_i(dcol), .wvalid_i(dwv), .wdata_i(dwd),
    .rvalid_o(drv), .rdata_o(drd), .violations_o(viol), .dq_conflicts_o(dqc),
    .n_act_o(nact), .n_pre_o(npre), .n_ref_o(nref), .n_rd_o(nrd), .n_wr_o(nwr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [31:0] chunk_seed [64];
  logic [31:0] tag_seed [256];
  bit tag_busy [256], tag_wr [256];
  int tag_beats [256];
  int done_reqs = 0, issued = 0, cyc = 0, last_beat = 0;
  int exp_first [$];

  assign wdd = beat_data(tag_seed[wdr.tag], int'(wdr.beat));

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (rcmd.valid && rcmd.op == ROW_RD) exp_first.push_back(cyc + 35);
    if (rd.valid) begin
      automatic int t = int'(rd.tag), b = int'(rd.beat);
      check(tag_busy[t] && !tag_wr[t] && b == tag_beats[t], "read beat bookkeeping");
      check(rd.data == beat_data(tag_seed[t], b), $sformatf("read data tag %0d beat %0d", t, b));
      if (b == 0) check(exp_first.size() > 0 && cyc == exp_first.pop_front(), "read latency 35");
      else check(cyc == last_beat + 1, "consecutive beats");
      last_beat = cyc;
      tag_beats[t]++;
      if (tag_beats[t] == BEATS) begin tag_busy[t] = 0; done_reqs++; end
    end
    if (wdr.valid) begin
      automatic int t = int'(wdr.tag);
      check(tag_busy[t] && tag_wr[t] && int'(wdr.beat) == tag_beats[t], "write beat pull order");
      tag_beats[t]++;
      if (tag_beats[t] == BEATS) begin tag_busy[t] = 0; done_reqs++; end
    end
  end

  int next_tag = 0;
  logic [31:0] sc = 32'hC0DE_0000;
  task automatic send(input bit w, input int chunk);
    int t;
    while (tag_busy[next_tag]) @(negedge clk);
    t = next_tag; next_tag = (next_tag + 1) % 256;
    @(negedge clk);
    req_valid = 1;
    req = '{write: w, sid: 2'(chunk / 8), vba: 3'(chunk), row: 13'(chunk / 32), tag: 8'(t)};
    #0.1;
    while (!req_ready) begin @(negedge clk); #0.1; end
    tag_busy[t] = 1; tag_wr[t] = w; tag_beats[t] = 0;
    if (w) begin sc++; chunk_seed[chunk] = sc; end
    tag_seed[t] = chunk_seed[chunk];
    issued++;
    @(posedge clk); #0.1 req_valid = 0;
  endtask

  initial begin
    req_valid = 0; req = '0;
    for (int t = 0; t < 256; t++) begin tag_busy[t] = 0; tag_seed[t] = 0; tag_beats[t] = 0; tag_wr[t] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) send(1, i);
    for (int i = 0; i < 64; i++) send(0, i);
    for (int i = 0; i < 300; i++) send(($urandom % 10) < 4, int'($urandom % 64));
    while (done_reqs < issued) @(negedge clk);
    repeat (300) @(negedge clk);
    check(done_reqs == issued, "all requests done");
    check(viol == 0, $sformatf("HBM violations %0d", viol));
    check(nact == 2 * issued && npre == nact, "two ACT and two PRE per request");
    check(nrd + nwr == 64 * issued, "64 RD/WR per request");
    check(nref > 0, "refresh reached the DRAM");
    $display("requests %0d cycles %0d REFpb %0d DQ overlap cycles %0d", issued, cyc, nref, dqc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
