// tb_rome_timing_ctrl: checks that each *_ok output rises exactly the Table 5
// number of cycles after an access command (read and write, same and
// different stack ID), that REF may follow an access after 2 x tRRDS, and that
// nothing may follow a REF for tRREFD + 1 cycles.
`timescale 1ns/100ps
module tb_rome_timing_ctrl;
  import rome_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  logic issue; row_op_e op; logic [1:0] sid, last_sid;
  logic rs, rr, ws, wr, rf;
  rome_timing_ctrl dut (.clk, .rst_n, .issue_i(issue), .issue_op_i(op), .issue_sid_i(sid),
                        .last_sid_o(last_sid), .rd_ok_same_o(rs), .rd_ok_diff_o(rr),
                        .wr_ok_same_o(ws), .wr_ok_diff_o(wr), .ref_ok_o(rf));
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Issue op in one cycle, then record the first cycle each output is high.
  task automatic measure(input row_op_e o, input logic [1:0] s,
                         input int ers, input int err, input int ews, input int ewr, input int erf);
    int frs = -1, frr = -1, fws = -1, fwr = -1, frf = -1;
    @(negedge clk); issue = 1; op = o; sid = s;
    @(negedge clk); issue = 0;
    for (int n = 1; n < 200; n++) begin
      if (rs && frs < 0) frs = n;
      if (rr && frr < 0) frr = n;
      if (ws && fws < 0) fws = n;
      if (wr && fwr < 0) fwr = n;
      if (rf && frf < 0) frf = n;
      @(negedge clk);
    end
    check(last_sid == s || o == ROW_REF, "last SID");
    check(frs == ers, $sformatf("%s: rd same-SID after %0d, expected %0d", o.name(), frs, ers));
    check(frr == err, $sformatf("%s: rd diff-SID after %0d, expected %0d", o.name(), frr, err));
    check(fws == ews, $sformatf("%s: wr same-SID after %0d, expected %0d", o.name(), fws, ews));
    check(fwr == ewr, $sformatf("%s: wr diff-SID after %0d, expected %0d", o.name(), fwr, ewr));
    check(frf == erf, $sformatf("%s: ref after %0d, expected %0d", o.name(), frf, erf));
  endtask

  initial begin
    issue = 0; op = ROW_RD; sid = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(rs && rr && ws && wr && rf, "all allowed after reset");
    measure(ROW_RD, 2'd1, 64, 68, 69, 73, 4);
    measure(ROW_WR, 2'd2, 71, 75, 64, 68, 4);
    // REF: accesses wait tRREFD + 1, the last access is long past
    measure(ROW_REF, 2'd0, 9, 9, 9, 9, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
