// rome_bank_fsm: state of one virtual bank (VBA) as the RoMe controller tracks it.
//
// A VBA has only four states: Idle, Reading, Writing and Refreshing (Fig. 11(a)
// of the paper). A row-level command moves an Idle FSM to the matching busy
// state; it then returns to Idle by itself once the command's same-VBA time
// has passed: tRD_row after RD_row, tWR_row after WR_row, and the refresh
// stall (tRFCpb + tRREFD, plus a small arbitration margin that is this
// design's own) after a REF. There is no Active, Activating or Precharging
// state because every row command precharges its row itself.
//
// The FSM is a pooled instance: the controller allocates a free one to the VBA
// it issues to, and the FSM remembers that VBA (vba_o) until it goes back to
// Idle, which frees it again.
//
// Interface: start_i (one cycle, only while idle_o) with op_i and vba_i.
// Timing: the state changes on the clock edge that samples start_i; idle_o is
// high again T - 1 cycles after that edge, so the next start is sampled exactly
// T cycles after the first one, where T is the command's time (T >= 2).
module rome_bank_fsm
  import rome_pkg::*;
#(
  parameter int T_RD_ROW_P = T_RD_ROW,
  parameter int T_WR_ROW_P = T_WR_ROW,
  parameter int T_REF_P    = T_RFC_PB + T_RREFD + REF_SLACK
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start_i,
  input  row_op_e                  op_i,
  input  logic [SID_W+VBA_W-1:0]   vba_i,    // {sid, vba}
  output bank_state_e              state_o,
  output logic [SID_W+VBA_W-1:0]   vba_o,
  output logic                     idle_o
);

  localparam int CNT_W = $clog2(T_REF_P + T_WR_ROW_P + T_RD_ROW_P + 1);

  bank_state_e      state_q;
  logic [CNT_W-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= BK_IDLE;
      cnt_q   <= '0;
      vba_o   <= '0;
    end else if (state_q == BK_IDLE) begin
      if (start_i) begin
        vba_o <= vba_i;
        unique case (op_i)
          ROW_RD:  begin state_q <= BK_READING;    cnt_q <= CNT_W'(T_RD_ROW_P - 2); end
          ROW_WR:  begin state_q <= BK_WRITING;    cnt_q <= CNT_W'(T_WR_ROW_P - 2); end
          default: begin state_q <= BK_REFRESHING; cnt_q <= CNT_W'(T_REF_P - 2);    end
        endcase
      end
    end else begin
      // Automatic return to Idle (dashed arcs of Fig. 11(a)).
      if (cnt_q == '0) state_q <= BK_IDLE;
      else             cnt_q   <= cnt_q - 1'b1;
    end
  end

  assign state_o = state_q;
  assign idle_o  = (state_q == BK_IDLE);

  // A busy FSM must not be started again.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start_i |-> idle_o);

endmodule
