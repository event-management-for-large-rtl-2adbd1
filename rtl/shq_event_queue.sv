// shq_event_queue: the event queue, a memory-optimised structured heap queue.
//
// The queue keeps one element per neuron (ID, predicted firing time, pixel
// value) partially sorted so that the earliest firing time is always in the
// root node, which is readable at any time through `top`. LEVELS levels hold
// 2^(LEVELS-1) elements in 1.25 * 2^(LEVELS-1) nodes; with the default of 17
// levels that is 65 536 neurons. Each level is an shq_level stage with its own
// slice of the memory tree and one comparator, so logic grows with the log of
// the size and the time per operation does not grow at all.
//
// Operations (op_valid && op_ready):
//   Q_INSERT  place a new element;
//   Q_DELETE  remove the element whose ID is op_elem.id;
//   Q_DELINS  remove it and, one cycle later, insert op_elem: the update of a
//             neuron's firing time.
// Issue rules, counted from the cycle an operation enters level 1: an insert
// may follow an insert or a delete after 3 cycles; a delete may follow any
// operation after 6 cycles. A delete-insert therefore takes 7 cycles and an
// insert 3, the figures the paper gives for its queue. op_ready applies these
// rules. Every level spends 3 cycles per operation, so an operation needs
// 3*LEVELS cycles to finish, but the root is correct 3 (insert) or 4
// (delete-insert) cycles after issue; `top_settled` says no operation is
// still working on the root. After reset each level clears its memory, one
// node per cycle; op_ready stays low until that is done.
// The rules, the level stages and the memory-optimised last level follow the
// paper. The clearing sweep, the handshake and the wrap-around time compare
// are this design's own.
module shq_event_queue
  import hsnn_pkg::*;
#(
  parameter int unsigned LEVELS = 17
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  op_valid,
  input  qop_e  op,
  input  elem_t op_elem,
  output logic  op_ready,
  output logic  top_valid,
  output elem_t top,
  output logic  top_settled,
  output logic  overflow
);

  initial begin
    assert (LEVELS >= 4 && LEVELS - 1 <= ID_W)
      else $fatal(1, "shq_event_queue: LEVELS must be in 4..%0d", ID_W + 1);
  end

  dtok_t d_tok  [LEVELS+1];
  itok_t i_tok  [LEVELS+1];
  logic  cr_en  [LEVELS+1];
  id_t   cr_pidx[LEVELS+1];
  node_t cr_l   [LEVELS+1];
  node_t cr_r   [LEVELS+1];
  node_t root_n [LEVELS+1];
  logic  busy   [LEVELS+1];
  logic  ovf    [LEVELS+1];

  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    shq_level #(.LEVEL(k), .LEVELS(LEVELS)) u_level (
      .clk     (clk),
      .rst_n   (rst_n),
      .d_in    (d_tok[k-1]),
      .i_in    (i_tok[k-1]),
      .d_out   (d_tok[k]),
      .i_out   (i_tok[k]),
      .cr_en   (cr_en[k]),
      .cr_pidx (cr_pidx[k]),
      .cr_left (cr_l[k]),
      .cr_right(cr_r[k]),
      .pr_en   (k > 1 ? cr_en[k-1] : 1'b0),
      .pr_pidx (k > 1 ? cr_pidx[k-1] : id_t'(0)),
      .pr_left (cr_l[k-1]),
      .pr_right(cr_r[k-1]),
      .root    (root_n[k]),
      .busy    (busy[k]),
      .overflow(ovf[k])
    );
  end
  // the last level has no children
  assign cr_l[LEVELS] = '0;
  assign cr_r[LEVELS] = '0;

  // ----------------------------------------------------------- issue rules
  logic [2:0] since_ins, since_del;
  logic       ins_pend;
  elem_t      ins_elem;

  // all levels sweep their nodes empty together; the widest one, level
  // LEVELS-1, needs 2^(LEVELS-2) cycles
  localparam int unsigned CLEAR_CYCLES = 2 ** (LEVELS - 2);
  logic [LEVELS-1:0] clr_cnt;
  logic              clear_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_cnt    <= '0;
      clear_done <= 1'b0;
    end else if (!clear_done) begin
      clr_cnt <= clr_cnt + 1'b1;
      if (clr_cnt == LEVELS'(CLEAR_CYCLES)) clear_done <= 1'b1;
    end
  end

  always_comb begin
    op_ready = 1'b0;
    if (clear_done && !ins_pend) begin
      case (op)
        Q_INSERT:           op_ready = (since_ins >= 3'(INSERT_INTERVAL)) &&
                                       (since_del >= 3'(INSERT_INTERVAL));
        Q_DELETE, Q_DELINS: op_ready = (since_ins >= 3'(DELETE_INTERVAL)) &&
                                       (since_del >= 3'(DELETE_INTERVAL));
        default:            op_ready = 1'b1;
      endcase
    end
  end

  logic take;
  assign take = op_valid && op_ready && op != Q_NOP;

  always_comb begin
    d_tok[0] = '0;
    i_tok[0] = '0;
    if (take && (op == Q_DELETE || op == Q_DELINS)) begin
      d_tok[0].valid   = 1'b1;
      d_tok[0].promote = 1'b0;
      d_tok[0].id      = op_elem.id;
      d_tok[0].idx     = '0;
    end
    if (take && op == Q_INSERT) begin
      i_tok[0].valid = 1'b1;
      i_tok[0].e     = op_elem;
    end
    if (ins_pend) begin
      i_tok[0].valid = 1'b1;
      i_tok[0].e     = ins_elem;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      since_ins <= 3'd7;
      since_del <= 3'd7;
      ins_pend  <= 1'b0;
      ins_elem  <= '0;
    end else begin
      if (i_tok[0].valid)      since_ins <= 3'd1;
      else if (since_ins != 3'd7) since_ins <= since_ins + 3'd1;
      if (d_tok[0].valid)      since_del <= 3'd1;
      else if (since_del != 3'd7) since_del <= since_del + 3'd1;
      ins_pend <= take && op == Q_DELINS;
      if (take) ins_elem <= op_elem;
    end
  end

  assign top_valid   = root_n[1].valid;
  assign top         = root_n[1].e;
  assign top_settled = clear_done && !busy[1] && !ins_pend && !take;

  always_comb begin
    overflow = 1'b0;
    for (int k = 1; k <= LEVELS; k++) overflow |= ovf[k];
  end

endmodule
