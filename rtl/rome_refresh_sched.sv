// rome_refresh_sched: per-bank refresh request generator of the RoMe controller.
//
// Instead of one REFpb every tREFIpb, the RoMe controller asks for one refresh
// of a whole virtual bank every 2 x tREFIpb; the command generator turns it into
// the two REFpb of the VBA's banks (paper, Sec. 5.2). The target VBA walks round
// robin over all 32 VBAs ({sid, vba}) of the channel. A refresh that cannot be
// issued yet (its VBA busy) is postponed: due refreshes pile up in a pending
// counter, and when it reaches MAX_PEND the urgent_o flag tells the controller
// to stop starting accesses to the target VBA. Round robin order, the pending
// counter and MAX_PEND are this design's choices; the paper only says that
// refreshes may be postponed or pooled.
//
// Interface: req_o/target_o stay up while a refresh is pending; ack_i (one
// cycle) reports that the controller issued it. The first refresh is due
// T_INTERVAL cycles after reset.
module rome_refresh_sched
  import rome_pkg::*;
#(
  parameter int T_INTERVAL = 2 * T_REFI_PB,
  parameter int MAX_PEND   = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   ack_i,
  output logic                   req_o,
  output logic                   urgent_o,
  output logic [SID_W+VBA_W-1:0] target_o,
  output logic [3:0]             pending_o
);

  localparam int CNT_W = $clog2(T_INTERVAL + 1);

  logic [CNT_W-1:0] cnt_q;
  logic             tick;

  assign tick = (cnt_q == CNT_W'(T_INTERVAL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      pending_o <= '0;
      target_o  <= '0;
    end else begin
      cnt_q <= tick ? '0 : cnt_q + 1'b1;
      // Saturate at MAX_PEND; urgent_o keeps it from being reached for long.
      unique case ({tick && (pending_o != 4'(MAX_PEND)), ack_i && req_o})
        2'b10:   pending_o <= pending_o + 1'b1;
        2'b01:   pending_o <= pending_o - 1'b1;
        default: pending_o <= pending_o;
      endcase
      if (ack_i && req_o) target_o <= target_o + 1'b1;
    end
  end

  assign req_o    = (pending_o != '0);
  assign urgent_o = (pending_o >= 4'(MAX_PEND));

  a_ack_only_when_req: assert property (@(posedge clk) disable iff (!rst_n) ack_i |-> req_o);

endmodule
