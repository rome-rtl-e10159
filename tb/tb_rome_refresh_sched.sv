// tb_rome_refresh_sched: checks that a VBA refresh falls due every 2 x tREFIpb
// (122 cycles), that the target walks round robin over the 32 VBAs, that
// unacknowledged refreshes pile up and raise urgent at MAX_PEND, and that the
// pile drains one per acknowledge.
`timescale 1ns/100ps
module tb_rome_refresh_sched;
  import rome_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  logic ack, req, urgent; logic [4:0] target; logic [3:0] pend;
  rome_refresh_sched dut (.clk, .rst_n, .ack_i(ack), .req_o(req), .urgent_o(urgent),
                          .target_o(target), .pending_o(pend));
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  localparam int IV = 2 * T_REFI_PB;

  initial begin
    int n, last;
    ack = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // Acknowledge at once: a request every IV cycles, target 0,1,2,...
    n = 0; last = 0;
    for (int k = 0; k < 40; k++) begin
      while (!req) begin @(negedge clk); n++; end
      check(n - last == IV || k == 0, $sformatf("interval %0d", n - last));
      if (k == 0) check(n == IV, $sformatf("first refresh at %0d", n));
      check(target == 5'(k), $sformatf("target %0d expected %0d", target, k % 32));
      last = n;
      ack = 1; @(negedge clk); n++; ack = 0;
      check(!req, "request cleared by ack");
    end
    // No acknowledge: pending grows to MAX_PEND (8) and urgent rises.
    repeat (9 * IV) @(negedge clk);
    check(pend == 4'd8 && urgent, $sformatf("pending %0d urgent %0d", pend, urgent));
    for (int k = 0; k < 8; k++) begin
      check(req, "still pending");
      ack = 1; @(negedge clk); ack = 0;
    end
    check(pend == 0 && !req && !urgent, "drained");
    check(target == 5'((40 + 8) % 32), "target after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
