// rome_req_queue: the RoMe controller's small age-ordered request queue.
//
// Each entry is one whole 4 KB RD_row or WR_row request, so a few entries are
// enough: the paper finds two entries saturate a channel and evaluates the
// area with four, which is the default here. Reads and writes share the one
// queue, so a write is handled as soon as it reaches the head of the ready
// requests instead of waiting in a write buffer (paper, Sec. 5.2).
//
// The queue is collapsing: entry 0 is always the oldest, and when the
// scheduler takes entry k, the entries above it move down by one. This makes
// oldest-first selection a plain priority encoder over ent_valid_o.
//
// Interface: in_valid_i/in_ready_o/in_req_i accept one request per cycle while
// not full (in_ready_o does not depend on deq_i). deq_i/deq_idx_i remove one
// entry per cycle. A request enqueued in a cycle can be selected from the next.
module rome_req_queue
  import rome_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid_i,
  output logic                     in_ready_o,
  input  req_t                     in_req_i,
  input  logic                     deq_i,
  input  logic [$clog2(DEPTH)-1:0] deq_idx_i,
  output logic [DEPTH-1:0]         ent_valid_o,
  output req_t                     ent_o [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int CW = $clog2(DEPTH + 1);
  localparam int IW = $clog2(DEPTH);

  req_t           ent_q [DEPTH];
  logic [CW-1:0]  cnt_q;
  logic           push;

  assign in_ready_o = (cnt_q != CW'(DEPTH));
  assign push       = in_valid_i && in_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= '0;
    end else begin
      // Collapse over the dequeued slot, then append the new request.
      if (deq_i) begin
        for (int i = 0; i < DEPTH - 1; i++)
          if (i >= int'(deq_idx_i)) ent_q[i] <= ent_q[i+1];
        if (push) ent_q[IW'(cnt_q - 1'b1)] <= in_req_i;
        cnt_q <= cnt_q + CW'(push) - 1'b1;
      end else begin
        if (push) ent_q[IW'(cnt_q)] <= in_req_i;
        cnt_q <= cnt_q + CW'(push);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      ent_valid_o[i] = (CW'(i) < cnt_q);
      ent_o[i]       = ent_q[i];
    end
  end
  assign count_o = cnt_q;

  a_deq_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                deq_i |-> (CW'(deq_idx_i) < cnt_q));

endmodule
