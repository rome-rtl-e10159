// tb_rome_mc: checks the RoMe memory controller's scheduling on its row-level
// command output.
//
// 1. Oldest-first with VBA interleaving: A and B to one VBA, then C to another.
//    A goes first, C overtakes the blocked B 64 cycles later, and B follows
//    when both tRD_row after A and tR2RS after C have passed.
// 2. A stream of reads to distinct VBAs keeps the queue full: consecutive
//    commands must be exactly tR2RS apart within a stack ID and tR2RR across.
// 3. Random reads and writes: every gap meets Table 5, same-VBA gaps meet
//    tRD_row/tWR_row, requests to one VBA leave in arrival order, each request
//    leaves exactly once.
// 4. Refresh: one VBA refresh per 2 x tREFIpb over the run, targets in round
//    robin, never to a busy VBA, spaced from accesses.
`timescale 1ns/100ps
module tb_rome_mc;
  import rome_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;

  logic req_valid, req_ready; req_t req; mc_cmd_t cmd;
  logic [2:0] qc; logic [3:0] rp; bank_state_e fs [5];
  rome_mc dut (.clk, .rst_n, .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
               .cmd_o(cmd), .q_count_o(qc), .ref_pending_o(rp), .fsm_state_o(fs));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ monitor
  int cyc = 0, last_t = -1000, last_ref = -1000, nref = 0, next_ref_target = 0;
  bit last_w = 0; int last_sid = 0;
  int vba_t [32]; bit vba_w [32];
  int issued_tags [$];
  int issue_time [256];
  int exact_s = 0, exact_r = 0, bypass = 0;
  int vba_order [32][$];   // tags in arrival order per VBA

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (cmd.valid) begin
      automatic int v = int'({cmd.sid, cmd.vba});
      if (cmd.op == ROW_REF) begin
        nref++;
        check(v == next_ref_target % 32, "refresh target round robin");
        next_ref_target++;
        check(cyc - last_t >= 2 * T_RRDS, "REF after access");
        check(cyc - vba_t[v] >= (vba_w[v] ? T_WR_ROW : T_RD_ROW), "REF to busy VBA");
        last_ref = cyc;
        vba_t[v] = cyc + T_RFC_PB + T_RREFD + REF_SLACK - T_WR_ROW; vba_w[v] = 1;
      end else begin
        automatic bit w = (cmd.op == ROW_WR);
        automatic bit s = (int'(cmd.sid) == last_sid);
        automatic int need = (!last_w && !w) ? (s ? T_R2RS : T_R2RR) :
                             (!last_w &&  w) ? (s ? T_R2WS : T_R2WR) :
                             ( last_w && !w) ? (s ? T_W2RS : T_W2RR) : (s ? T_W2WS : T_W2WR);
        check(cyc - last_t >= need, $sformatf("gap %0d < %0d", cyc - last_t, need));
        check(cyc - last_ref >= T_RREFD + 1, "access after REF");
        check(cyc - vba_t[v] >= (vba_w[v] ? T_WR_ROW : T_RD_ROW), $sformatf("same-VBA gap %0d", cyc - vba_t[v]));
        check(vba_order[v].size() > 0 && vba_order[v][0] == int'(cmd.tag), "per-VBA arrival order");
        if (vba_order[v].size() > 0) void'(vba_order[v].pop_front());
        issued_tags.push_back(int'(cmd.tag));
        issue_time[cmd.tag] = cyc;
        vba_t[v] = cyc; vba_w[v] = w;
        last_t = cyc; last_w = w; last_sid = int'(cmd.sid);
      end
    end
  end

  task automatic push(input bit w, input int sid, input int vba, input int tag);
    @(negedge clk);
    req_valid = 1; req = '{write: w, sid: 2'(sid), vba: 3'(vba), row: 13'(tag), tag: 8'(tag)};
    #0.1;
    while (!req_ready) begin @(negedge clk); #0.1; end
    vba_order[{sid[1:0], vba[2:0]}].push_back(tag);
    @(posedge clk); #0.1 req_valid = 0;
  endtask

  task automatic wait_drain();
    while (qc != 0) @(negedge clk);
    repeat (300) @(negedge clk);
  endtask

  initial begin
    req_valid = 0; req = '0;
    for (int v = 0; v < 32; v++) begin vba_t[v] = -1000; vba_w[v] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. bypass of a blocked oldest request
    push(0, 0, 3, 1); push(0, 0, 3, 2); push(0, 0, 4, 3);
    wait_drain();
    check(issued_tags.size() == 3 && issued_tags[0] == 1 && issued_tags[1] == 3 && issued_tags[2] == 2,
          "order A, C, B");
    check(issue_time[3] - issue_time[1] >= T_R2RS && issue_time[3] - issue_time[1] <= T_R2RS + 16,
          $sformatf("C after A: %0d", issue_time[3] - issue_time[1]));
    check(issue_time[2] - issue_time[3] >= T_R2RS && issue_time[2] - issue_time[1] >= T_RD_ROW,
          "B after tRD_row and tR2RS");
    // 2. saturating stream of reads
    fork
      for (int k = 0; k < 48; k++) push(0, (k / 8) % 4, k % 8, 10 + k);
    join_none
    begin
      automatic int prev = -1, prev_sid = 0, n = 0;
      while (n < 48) begin
        @(posedge clk); #0.1;
        if (cmd.valid && cmd.op == ROW_RD) begin
          if (prev >= 0) begin
            automatic bit  sm = (int'(cmd.sid) == prev_sid);
            automatic int  ex = prev + (sm ? T_R2RS : T_R2RR);
            if (last_ref + T_RREFD + 1 > ex) ex = last_ref + T_RREFD + 1;
            check(cyc == ex, $sformatf("stream gap %0d, expected %0d", cyc - prev, ex - prev));
            if (ex == prev + T_R2RS) exact_s++;
            if (ex == prev + T_R2RR) exact_r++;
          end
          prev = cyc; prev_sid = int'(cmd.sid); n++;
        end
      end
    end
    check(exact_s > 20 && exact_r > 2, "stream exact gaps measured");
    wait_drain();
    // 3. random mix
    for (int k = 0; k < 400; k++) push(($urandom % 3) == 0, $urandom % 4, $urandom % 8, 100 + (k % 150));
    wait_drain();
    check(issued_tags.size() == 3 + 48 + 400, $sformatf("all requests issued once (%0d)", issued_tags.size()));
    // 4. refresh rate
    check(nref >= cyc / (2 * T_REFI_PB) - 2 && nref <= cyc / (2 * T_REFI_PB) + 1,
          $sformatf("refreshes %0d in %0d cycles", nref, cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
