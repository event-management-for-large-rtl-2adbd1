// merger: chooses the next event among the roots of the event queues.
//
// With several processing elements each has its own event queue; the merger
// compares the root elements of all N_QUEUES queues and passes the earliest
// one (wrap-around time compare, lowest queue index on a tie) to the
// controller, together with the queue it came from. `settled` is high when
// every queue's root is settled, i.e. no operation is still working on it.
// The outputs are registered (one cycle). The function is the paper's; the
// linear scan, tie rule and register stage are this design's own. The
// design as built has one queue (N_QUEUES = 1), where the merger only
// re-times the root, as in the paper's single-queue system.
module merger
  import hsnn_pkg::*;
#(
  parameter int unsigned N_QUEUES = 1,
  localparam int unsigned QW = (N_QUEUES > 1) ? $clog2(N_QUEUES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          top_valid   [N_QUEUES],
  input  elem_t         top         [N_QUEUES],
  input  logic          top_settled [N_QUEUES],
  output logic          next_valid,
  output elem_t         next,
  output logic [QW-1:0] next_queue,
  output logic          settled
);

  logic          best_v;
  elem_t         best;
  logic [QW-1:0] best_q;
  logic          all_settled;

  always_comb begin
    best_v      = 1'b0;
    best        = '0;
    best_q      = '0;
    all_settled = 1'b1;
    for (int q = 0; q < N_QUEUES; q++) begin
      all_settled &= top_settled[q];
      if (top_valid[q] && (!best_v || time_before(top[q].ftime, best.ftime))) begin
        best_v = 1'b1;
        best   = top[q];
        best_q = QW'(q);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_valid <= 1'b0;
      next       <= '0;
      next_queue <= '0;
      settled    <= 1'b0;
    end else begin
      next_valid <= best_v;
      next       <= best;
      next_queue <= best_q;
      settled    <= all_settled;
    end
  end

endmodule
