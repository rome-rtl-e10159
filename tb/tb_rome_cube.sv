// tb_rome_cube: end-to-end test of the RoMe cube at its full size (36 channels,
// default parameters), with one behavioural HBM channel model per channel.
//
// Traffic, as an LLM kernel would make it: a streaming write of 2304 4 KB
// chunks (rows 0 and 1 of every VBA in every channel), a streaming read of all
// of them, then a random mix of reads and writes over the same chunks. The
// testbench keeps its own copy of what each chunk should hold and checks
// every 64 B read beat, the beat order and that the 64 beats of a read come on
// 64 consecutive cycles.
//
// On the row-level commands of each channel it checks the gap to the previous
// access against Table 5 (tR2RS/R, tR2WS/R, tW2RS/R, tW2WS/R; tRD_row/tWR_row
// for the same VBA), REF spacing, and the fixed read latency (first beat 35
// cycles after the command leaves the controller). The models check the HBM4
// timing of the generated ACT/RD/WR/PRE/REF commands. Each mechanism (the
// turnaround cases, different-SID gaps, same-VBA chaining, refresh, refresh
// postponement, row-bus deferral, queue-full back-pressure, a refused
// misaligned request) is counted and must occur at least once.
`timescale 1ns/100ps
module tb_rome_cube;
  import rome_pkg::*;
  import rome_tb_pkg::*;

  localparam int NUM_CH = 36;
  localparam int ADDR_W = 36;
  localparam int NCHUNK = NUM_CH * NUM_VBA * 2;
  localparam int NRAND  = 1500;
  localparam int RD_LAT = 35;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic              req_valid, req_ready, req_err, req_write;
  logic [ADDR_W-1:0] req_addr;
  logic [TAG_W-1:0]  req_tag;
  rd_beat_t          rd [NUM_CH];
  wd_req_t           wdr [NUM_CH];
  logic [CH_DW-1:0]  wdd [NUM_CH];
  dram_row_cmd_t     drow [NUM_CH];
  dram_col_cmd_t     dcol [NUM_CH];
  logic              dwv [NUM_CH];
  logic [PC_DW-1:0]  dwd [NUM_CH][NUM_PC];
  logic              drv [NUM_CH];
  logic [PC_DW-1:0]  drd [NUM_CH][NUM_PC];
  mc_cmd_t           rcmd [NUM_CH];
  logic [NUM_CH-1:0] pre_defer, ref_defer;
  int viol [NUM_CH], dqc [NUM_CH];
  int nact [NUM_CH], npre [NUM_CH], nref [NUM_CH], nrd [NUM_CH], nwr [NUM_CH];

  logic [3:0] ref_pend [NUM_CH];
  rome_cube dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_err_o(req_err),
    .req_write_i(req_write), .req_addr_i(req_addr), .req_tag_i(req_tag),
    .rd_o(rd), .wd_req_o(wdr), .wd_data_i(wdd),
    .dram_row_o(drow), .dram_col_o(dcol), .dram_wvalid_o(dwv), .dram_wdata_o(dwd),
    .dram_rvalid_i(drv), .dram_rdata_i(drd),
    .row_cmd_o(rcmd), .pre_defer_o(pre_defer), .ref_defer_o(ref_defer),
    .ref_pending_o(ref_pend)
  );

  for (genvar c = 0; c < NUM_CH; c++) begin : g_mem
    rome_hbm_model u_hbm (
      .clk, .rst_n, .row_i(drow[c]), .col_i(dcol[c]), .wvalid_i(dwv[c]), .wdata_i(dwd[c]),
      .rvalid_o(drv[c]), .rdata_o(drd[c]), .violations_o(viol[c]), .dq_conflicts_o(dqc[c]),
      .n_act_o(nact[c]), .n_pre_o(npre[c]), .n_ref_o(nref[c]), .n_rd_o(nrd[c]), .n_wr_o(nwr[c])
    );
  end


  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ------------------------------------------------------------ reference state
  logic [31:0] chunk_seed [NCHUNK];
  logic [31:0] tag_seed [256];
  bit          tag_wr [256];
  bit          tag_busy [256];
  int          tag_beats [256];
  int          tag_ch [256];
  int          done_reqs = 0, issued = 0;

  always_comb
    for (int c = 0; c < NUM_CH; c++) wdd[c] = beat_data(tag_seed[wdr[c].tag], int'(wdr[c].beat));

  // ------------------------------------------------------------ mechanism counters
  int m_r2rs, m_r2rr, m_r2ws, m_r2wr, m_w2rs, m_w2rr, m_w2ws, m_w2wr;
  int e_r2rs, e_r2rr;            // gaps exactly at the minimum
  int m_same_vba, m_ref, m_ref_wait, m_pre_defer, m_ref_defer, m_full, m_err;

  int  cyc = 0;
  int  last_acc_t [NUM_CH], last_ref_t [NUM_CH], vba_t [NUM_CH][NUM_VBA];
  bit  last_wr [NUM_CH], vba_wr [NUM_CH][NUM_VBA];
  int  last_sid [NUM_CH];
  int  exp_first [NUM_CH][$];
  int  last_beat_t [NUM_CH];

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NUM_CH; c++) begin
      if (pre_defer[c]) m_pre_defer++;
      if (ref_defer[c]) m_ref_defer++;
      if (ref_pend[c] != 0 && !(rcmd[c].valid && rcmd[c].op == ROW_REF)) m_ref_wait++;
      // --- row-level command monitor
      if (rcmd[c].valid) begin
        automatic int v = int'({rcmd[c].sid, rcmd[c].vba});
        if (rcmd[c].op == ROW_REF) begin
          m_ref++;
          check(cyc - last_acc_t[c] >= 2 * T_RRDS, "REF after access spacing");
          last_ref_t[c] = cyc;
          check(cyc - vba_t[c][v] >= (vba_wr[c][v] ? T_WR_ROW : T_RD_ROW), "REF to busy VBA");
          vba_t[c][v] = cyc + T_RFC_PB + T_RREFD - T_RD_ROW; vba_wr[c][v] = 0;
        end else begin
          automatic bit w = (rcmd[c].op == ROW_WR);
          automatic bit s = (int'(rcmd[c].sid) == last_sid[c]);
          automatic int gap = cyc - last_acc_t[c];
          automatic int need;
          if (!last_wr[c] && !w) begin need = s ? T_R2RS : T_R2RR; if (s) m_r2rs++; else m_r2rr++; end
          else if (!last_wr[c] && w) begin need = s ? T_R2WS : T_R2WR; if (s) m_r2ws++; else m_r2wr++; end
          else if (last_wr[c] && !w) begin need = s ? T_W2RS : T_W2RR; if (s) m_w2rs++; else m_w2rr++; end
          else begin need = s ? T_W2WS : T_W2WR; if (s) m_w2ws++; else m_w2wr++; end
          if (last_acc_t[c] > 0) begin
            check(gap >= need, $sformatf("row command gap %0d < %0d on ch %0d", gap, need, c));
            if (gap == need && !last_wr[c] && !w) begin if (s) e_r2rs++; else e_r2rr++; end
          end
          check(cyc - last_ref_t[c] >= T_RREFD + 1, "access after REF spacing");
          // same-VBA chaining: tRD_row / tWR_row
          if (cyc - vba_t[c][v] < 3 * T_WR_ROW) m_same_vba++;
          check(cyc - vba_t[c][v] >= (vba_wr[c][v] ? T_WR_ROW : T_RD_ROW), "same-VBA spacing");
          vba_t[c][v] = cyc; vba_wr[c][v] = w;
          last_acc_t[c] = cyc; last_wr[c] = w; last_sid[c] = int'(rcmd[c].sid);
          if (!w) exp_first[c].push_back(cyc + RD_LAT);
        end
      end
      // --- read data checks
      if (rd[c].valid) begin
        automatic int t = int'(rd[c].tag);
        automatic int b = int'(rd[c].beat);
        check(tag_busy[t] && !tag_wr[t], "read beat for no outstanding read");
        check(b == tag_beats[t], "read beat order");
        check(rd[c].data == beat_data(tag_seed[t], b), $sformatf("read data ch %0d tag %0d beat %0d", c, t, b));
        if (b == 0) begin
          automatic int e = (exp_first[c].size() > 0) ? exp_first[c].pop_front() : -1;
          check(cyc == e, $sformatf("read latency: first beat at %0d, expected %0d", cyc, e));
        end else begin
          check(cyc == last_beat_t[c] + 1, "read beats on consecutive cycles");
        end
        last_beat_t[c] = cyc;
        tag_beats[t]++;
        if (tag_beats[t] == BEATS) begin tag_busy[t] = 0; done_reqs++; end
      end
      if (wdr[c].valid) begin
        automatic int t = int'(wdr[c].tag);
        check(tag_busy[t] && tag_wr[t] && int'(wdr[c].beat) == tag_beats[t], "write beat request");
        tag_beats[t]++;
        if (tag_beats[t] == BEATS) begin tag_busy[t] = 0; done_reqs++; end
      end
    end
  end

  // ------------------------------------------------------------ host driver
  int next_tag = 0;
  logic [31:0] seed_ctr = 32'h1234_0000;

  task automatic send(input bit w, input int chunk);
    int t;
    while (tag_busy[next_tag]) @(negedge clk);
    t = next_tag;
    next_tag = (next_tag + 1) % 256;
    @(negedge clk);
    req_valid = 1'b1; req_write = w; req_addr = ADDR_W'(chunk) << 12; req_tag = TAG_W'(t);
    forever begin
      #0.1;
      if (req_ready) break;
      m_full++;
      @(negedge clk);
    end
    // accepted at the coming posedge
    tag_busy[t] = 1; tag_wr[t] = w; tag_beats[t] = 0; tag_ch[t] = chunk % NUM_CH;
    if (w) begin seed_ctr = seed_ctr + 1; chunk_seed[chunk] = seed_ctr; end
    tag_seed[t] = chunk_seed[chunk];
    issued++;
    @(posedge clk);
    #0.1 req_valid = 1'b0;
  endtask

  initial begin
    req_valid = 0; req_write = 0; req_addr = '0; req_tag = '0;
    for (int t = 0; t < 256; t++) begin tag_busy[t] = 0; tag_seed[t] = 0; tag_wr[t] = 0; tag_beats[t] = 0; end
    for (int c = 0; c < NUM_CH; c++) begin
      last_acc_t[c] = -1000; last_ref_t[c] = -1000; last_wr[c] = 0; last_sid[c] = 0; last_beat_t[c] = 0;
      for (int v = 0; v < NUM_VBA; v++) begin vba_t[c][v] = -1000; vba_wr[c][v] = 0; end
    end
    m_r2rs = 0; m_r2rr = 0; m_r2ws = 0; m_r2wr = 0; m_w2rs = 0; m_w2rr = 0; m_w2ws = 0; m_w2wr = 0;
    e_r2rs = 0; e_r2rr = 0; m_same_vba = 0; m_ref = 0; m_ref_wait = 0; m_pre_defer = 0;
    m_ref_defer = 0; m_full = 0; m_err = 0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    // a misaligned request is refused
    req_valid = 1'b1; req_addr = 36'h0_0000_0040; req_write = 1'b0; #0.1;
    check(req_err && !req_ready, "misaligned request refused");
    if (req_err) m_err++;
    @(negedge clk); req_valid = 1'b0;
    // phase A: streaming write, phase B: streaming read
    for (int i = 0; i < NCHUNK; i++) send(1'b1, i);
    for (int i = 0; i < NCHUNK; i++) send(1'b0, i);
    // phase C: random mix
    for (int i = 0; i < NRAND; i++) send(($urandom % 10) < 4, int'($urandom % NCHUNK));
    // drain
    while (done_reqs < issued) @(negedge clk);
    repeat (400) @(negedge clk);
    begin
      int tot_dqc = 0;
      automatic int tot_v = 0, tot_ref = 0, tot_act = 0, tot_rd = 0, tot_wr = 0;
      for (int c = 0; c < NUM_CH; c++) begin
        tot_v += viol[c]; tot_dqc += dqc[c]; tot_ref += nref[c]; tot_act += nact[c]; tot_rd += nrd[c]; tot_wr += nwr[c];
        check(nact[c] == npre[c], "every ACT has its PRE");
      end
      check(tot_v == 0, $sformatf("HBM timing violations: %0d", tot_v));
      check(tot_rd + tot_wr == 2 * NCOL * done_reqs, "32 RD/WR per bank per request");
      // a REF issued in the last tRREFD cycles may still lack its second REFpb
      check(tot_ref <= 2 * m_ref && tot_ref >= 2 * m_ref - NUM_CH, "two REFpb per VBA refresh");
      $display("DQ read/write overlap cycles at read-to-write turnarounds: %0d", tot_dqc);
      $display("requests %0d, cycles %0d, ACT %0d, RD %0d, WR %0d, REFpb %0d",
               done_reqs, cyc, tot_act, tot_rd, tot_wr, tot_ref);
    end
    $display("mechanisms: R2RS %0d (exact %0d) R2RR %0d (exact %0d) R2WS %0d R2WR %0d W2RS %0d W2RR %0d W2WS %0d W2WR %0d",
             m_r2rs, e_r2rs, m_r2rr, e_r2rr, m_r2ws, m_r2wr, m_w2rs, m_w2rr, m_w2ws, m_w2wr);
    $display("mechanisms: same-VBA chain %0d, REF %0d, refresh wait cycles %0d, PRE deferred %0d, REF deferred %0d, queue full %0d, refused %0d",
             m_same_vba, m_ref, m_ref_wait, m_pre_defer, m_ref_defer, m_full, m_err);
    check(done_reqs == issued, "all requests completed");
    check(m_r2rs > 0 && m_r2rr > 0 && m_r2ws > 0 && m_r2wr > 0, "read-to-X cases seen");
    check(m_w2rs > 0 && m_w2rr > 0 && m_w2ws > 0 && m_w2wr > 0, "write-to-X cases seen");
    check(e_r2rs > 0 && e_r2rr > 0, "back-to-back reads at exactly tR2RS and tR2RR");
    check(m_same_vba > 0, "same-VBA chaining seen");
    check(m_ref > 0, "refresh seen");
    check(m_ref_wait > 0, "refresh postponement seen");
    check(m_pre_defer > 0, "row-bus PRE deferral seen");
    check(m_full > 0, "queue-full back-pressure seen");
    check(m_err > 0, "misaligned request refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
