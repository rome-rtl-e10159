// tb_rome_bank_fsm: checks the four-state VBA FSM. Each command must move Idle
// to its state, hold the VBA, and fall back to Idle exactly tRD_row (95),
// tWR_row (115) or tRFCpb + tRREFD + slack (292) cycles after the start edge.
`timescale 1ns/100ps
module tb_rome_bank_fsm;
  import rome_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  logic start; row_op_e op; logic [4:0] vba_in, vba_out; bank_state_e st; logic idle;
  rome_bank_fsm dut (.clk, .rst_n, .start_i(start), .op_i(op), .vba_i(vba_in),
                     .state_o(st), .vba_o(vba_out), .idle_o(idle));
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(input row_op_e o, input bank_state_e exp_st, input int dur, input logic [4:0] v);
    int n = 0;
    @(negedge clk); start = 1; op = o; vba_in = v;
    @(negedge clk); start = 0; vba_in = ~v;
    check(st == exp_st, $sformatf("state after %s", o.name()));
    check(vba_out == v, "VBA held");
    n = 1;
    while (!idle && n < 1000) begin @(negedge clk); n++; end
    check(n == dur, $sformatf("%s busy %0d cycles, expected %0d", o.name(), n, dur));
    check(st == BK_IDLE, "back to Idle");
  endtask

  initial begin
    start = 0; op = ROW_RD; vba_in = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(idle && st == BK_IDLE, "reset Idle");
    run(ROW_RD,  BK_READING,    T_RD_ROW, 5'd3);
    run(ROW_WR,  BK_WRITING,    T_WR_ROW, 5'd17);
    run(ROW_REF, BK_REFRESHING, T_RFC_PB + T_RREFD + REF_SLACK, 5'd31);
    for (int i = 0; i < 6; i++) begin
      automatic int r = $urandom % 2;
      if (r == 0) run(ROW_RD, BK_READING, T_RD_ROW, 5'($urandom));
      else        run(ROW_WR, BK_WRITING, T_WR_ROW, 5'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
