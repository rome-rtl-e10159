// tb_rome_req_queue: random pushes and out-of-order removals against a
// reference queue; checks entry order (oldest at 0), count, full/ready.
`timescale 1ns/100ps
module tb_rome_req_queue;
  import rome_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  logic in_valid, in_ready, deq; req_t in_req; logic [1:0] deq_idx;
  logic [D-1:0] ev; req_t ent [D]; logic [2:0] cnt;
  rome_req_queue #(.DEPTH(D)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_req_i(in_req), .deq_i(deq), .deq_idx_i(deq_idx), .ent_valid_o(ev), .ent_o(ent), .count_o(cnt));
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  req_t model [$];
  int fulls = 0;

  initial begin
    in_valid = 0; deq = 0; deq_idx = 0; in_req = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // compare state
      check(int'(cnt) == model.size(), "count");
      check(in_ready == (model.size() < D), "ready");
      if (model.size() == D) fulls++;
      for (int i = 0; i < D; i++) begin
        check(ev[i] == (i < model.size()), "valid bits");
        if (i < model.size()) check(ent[i] == model[i], $sformatf("entry %0d", i));
      end
      // new stimulus
      in_valid = ($urandom % 3) != 0;
      in_req   = req_t'($urandom);
      deq      = (model.size() > 0) && (($urandom % 2) == 0);
      deq_idx  = deq ? 2'($urandom % model.size()) : 2'd0;
      #0.1;
      begin
        automatic bit push = in_valid && in_ready;
        if (deq) model.delete(int'(deq_idx));
        if (push) model.push_back(in_req);
      end
    end
    check(fulls > 0, "queue became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
