// shq_level: one level of the structured heap queue (SHQ), with its slice of
// the binary memory tree and the pipeline stage that works on it.
//
// An element's path down the tree is fixed by its ID: level k (1 = root) holds
// node number id >> (LEVELS-k), so reading the ID from its most significant
// bit chooses left or right at each level. In the memory-optimised tree the
// last level is cut to a quarter: its node id >> 2 is shared by four IDs and
// has two parents; a parent at level LEVELS-1 sees the leaf as its child only
// when the leaf element lies on that parent's path.
//
// Every operation spends three cycles on a level: read (R), compare (C) and
// write-back (W), then moves on to the level below.
//   Delete (locate / promote): in R it reads its own node and the two children
//   one level below; in C it either finds the element to delete (or already is
//   a hole) and promotes the earlier child into the node, the hole moving down
//   to that child, or it keeps locating along the ID's path. A node whose
//   children are both empty becomes empty and the delete ends.
//   Insert: in R it reads the node on the carried element's path; in C the
//   earlier of the two stays in the node and the later one is carried down.
//   An insert that meets an empty node settles there.
// An insert following a delete by one cycle (a delete-insert) does its C on a
// level while the delete does its W there; the delete's write is forwarded so
// the insert compares with the element just promoted. The issue rules that
// keep all other operations apart are enforced by shq_event_queue.
//
// Memory: level 1 is a register; levels 2..LEVELS-1 keep sibling pairs in two
// arrays (even and odd node) so both children are read in one cycle; the last
// level is a single array. Reads are synchronous, as in block RAM. The split
// into R/C/W, the children read from the level below and the last-level
// sharing follow the paper; the forwarding path, token formats and array
// organisation are this design's own.
module shq_level
  import hsnn_pkg::*;
#(
  parameter int unsigned LEVEL  = 1,
  parameter int unsigned LEVELS = 17
) (
  input  logic  clk,
  input  logic  rst_n,
  // operations arriving from the level above (or from the queue input)
  input  dtok_t d_in,
  input  itok_t i_in,
  // operations handed to the level below
  output dtok_t d_out,
  output itok_t i_out,
  // read of the children of node cr_pidx, served by the level below
  output logic  cr_en,
  output id_t   cr_pidx,
  input  node_t cr_left,
  input  node_t cr_right,
  // the same read served by this level for the level above
  input  logic  pr_en,
  input  id_t   pr_pidx,
  output node_t pr_left,
  output node_t pr_right,
  // node 0 of this level (the root when LEVEL = 1)
  output node_t root,
  output logic  busy,
  output logic  overflow
);

  localparam bit          HAS_CHILD = (LEVEL < LEVELS);
  localparam bit          IS_LEAF   = (LEVEL == LEVELS);
  localparam int unsigned NODES     = IS_LEAF ? (2 ** (LEVELS - 3)) : (2 ** (LEVEL - 1));
  localparam int unsigned SHIFT     = IS_LEAF ? 2 : (LEVELS - LEVEL);
  localparam int unsigned NSHIFT    = (LEVEL + 1 >= LEVELS) ? 2 : (LEVELS - LEVEL - 1);
  // address bits of a sibling-pair word (middle levels) and of a leaf
  localparam int unsigned AW        = (NODES > 4) ? $clog2(NODES / 2) : 1;
  localparam int unsigned LW        = (NODES > 2) ? $clog2(NODES) : 1;

  typedef enum logic [1:0] {PH_R = 2'd0, PH_C = 2'd1, PH_W = 2'd2} phase_e;

  // node index of an ID on this level and on the level below
  function automatic id_t idx_here(id_t id);
    return id_t'(id >> SHIFT);
  endfunction
  function automatic id_t idx_next(id_t id);
    return id_t'(id >> NSHIFT);
  endfunction

  // ---------------------------------------------------------------- storage
  logic  a_en;
  id_t   a_idx;
  node_t a_q;
  logic  w_en;
  id_t   w_idx;
  node_t w_data;

  if (LEVEL == 1) begin : g_root
    node_t root_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    root_q <= '0;
      else if (w_en) root_q <= w_data;
    end
    always_ff @(posedge clk) if (a_en) a_q <= root_q;
    assign root     = root_q;
    assign pr_left  = '0;
    assign pr_right = '0;
  end else if (!IS_LEAF) begin : g_mid
    localparam int unsigned WORDS = NODES / 2;
    node_t mem_e [WORDS];
    node_t mem_o [WORDS];
    always_ff @(posedge clk) begin
      if (w_en && !w_idx[0]) mem_e[w_idx[AW:1]] <= w_data;
      if (w_en &&  w_idx[0]) mem_o[w_idx[AW:1]] <= w_data;
      if (a_en) a_q <= a_idx[0] ? mem_o[a_idx[AW:1]] : mem_e[a_idx[AW:1]];
      // children of parent node p are the pair held in word p
      if (pr_en) begin
        pr_left  <= mem_e[pr_pidx[AW-1:0]];
        pr_right <= mem_o[pr_pidx[AW-1:0]];
      end
    end
    assign root = '0;
  end else begin : g_leaf
    node_t mem_l [NODES];
    node_t leaf_q;
    id_t   pidx_q;
    always_ff @(posedge clk) begin
      if (w_en) mem_l[w_idx[LW-1:0]] <= w_data;
      if (a_en) a_q <= mem_l[a_idx[LW-1:0]];
      if (pr_en) begin
        leaf_q <= mem_l[pr_pidx[LW:1]];
        pidx_q <= pr_pidx;
      end
    end
    // the shared leaf is a child of parent pidx only if its element is on
    // that parent's path
    always_comb begin
      pr_left       = leaf_q;
      pr_left.valid = leaf_q.valid && (id_t'(leaf_q.e.id >> 1) == pidx_q);
      pr_right      = '0;
    end
    assign root = '0;
  end

  // ----------------------------------------------------------- delete token
  dtok_t  d_q;
  phase_e d_ph;
  logic   dw_en;
  id_t    dw_idx;
  node_t  dw_data;
  dtok_t  d_nxt;    // what is handed down at W

  // ----------------------------------------------------------- insert token
  itok_t  i_q;
  phase_e i_ph;
  logic   iw_en;
  id_t    iw_idx;
  node_t  iw_data;
  itok_t  i_nxt;

  // clear sweep: after reset every node of this level is written empty once
  logic clr_busy;
  id_t  clr_idx;

  // read port A: delete locating (R), insert (R)
  always_comb begin
    a_en  = 1'b0;
    a_idx = '0;
    if (d_q.valid && d_ph == PH_R) begin
      a_en  = 1'b1;
      a_idx = d_q.idx;
    end
    if (i_q.valid && i_ph == PH_R) begin
      a_en  = 1'b1;
      a_idx = idx_here(i_q.e.id);
    end
  end

  // children read, issued in the delete's R phase
  assign cr_en   = HAS_CHILD && d_q.valid && d_ph == PH_R;
  assign cr_pidx = d_q.idx;

  // write port: delete W, insert W, clear sweep
  always_comb begin
    w_en   = 1'b0;
    w_idx  = '0;
    w_data = '0;
    if (clr_busy) begin
      w_en  = 1'b1;
      w_idx = clr_idx;
    end else if (d_q.valid && d_ph == PH_W && dw_en) begin
      w_en   = 1'b1;
      w_idx  = dw_idx;
      w_data = dw_data;
    end else if (i_q.valid && i_ph == PH_W && iw_en) begin
      w_en   = 1'b1;
      w_idx  = iw_idx;
      w_data = iw_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b1;
      clr_idx  <= '0;
    end else if (clr_busy) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == id_t'(NODES - 1)) clr_busy <= 1'b0;
    end
  end

  // ----------------------------------------------------- delete: decisions
  node_t own_d;
  node_t best_child;
  logic  found;
  always_comb begin
    own_d      = a_q;
    best_child = '0;
    if (HAS_CHILD) begin
      if (cr_left.valid && cr_right.valid)
        best_child = time_before(cr_right.e.ftime, cr_left.e.ftime) ? cr_right : cr_left;
      else if (cr_left.valid)
        best_child = cr_left;
      else if (cr_right.valid)
        best_child = cr_right;
    end
    // a promote token already stands on a hole; a locate token has found
    // its element when the node holds that ID
    found = d_q.promote || (own_d.valid && own_d.e.id == d_q.id);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q     <= '0;
      d_ph    <= PH_R;
      dw_en   <= 1'b0;
      dw_idx  <= '0;
      dw_data <= '0;
      d_nxt   <= '0;
    end else begin
      case (d_ph)
        PH_R: if (d_q.valid) d_ph <= PH_C;
        PH_C: begin
          d_ph    <= PH_W;
          dw_en   <= 1'b0;
          dw_idx  <= d_q.idx;
          dw_data <= '0;
          d_nxt   <= '0;
          if (found) begin
            // fill the node with the earlier child, or leave it empty
            dw_en   <= 1'b1;
            dw_data <= best_child;
            if (best_child.valid) begin
              d_nxt.valid   <= 1'b1;
              d_nxt.promote <= 1'b1;
              d_nxt.id      <= best_child.e.id;
              d_nxt.idx     <= idx_next(best_child.e.id);
            end
          end else if (own_d.valid && HAS_CHILD) begin
            // not here: keep locating along the ID's path
            d_nxt.valid   <= 1'b1;
            d_nxt.promote <= 1'b0;
            d_nxt.id      <= d_q.id;
            d_nxt.idx     <= idx_next(d_q.id);
          end
        end
        default: begin
          d_ph    <= PH_R;
          d_q     <= '0;
        end
      endcase
      if (d_in.valid) begin
        d_q  <= d_in;
        d_ph <= PH_R;
      end
    end
  end

  assign d_out = (d_q.valid && d_ph == PH_W) ? d_nxt : '0;

  // ----------------------------------------------------- insert: decisions
  node_t own_i;
  always_comb begin
    own_i = a_q;
    // a delete-insert: the delete is writing this level in this very cycle
    if (d_q.valid && d_ph == PH_W && dw_en && dw_idx == idx_here(i_q.e.id))
      own_i = dw_data;
  end

  // only the last level can overflow: an insert reaching it finds its node
  // occupied
  logic ovf_q;
  if (HAS_CHILD) begin : g_no_ovf
    assign ovf_q = 1'b0;
  end else begin : g_ovf
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ovf_q <= 1'b0;
      else if (i_q.valid && i_ph == PH_C && own_i.valid) ovf_q <= 1'b1;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_q     <= '0;
      i_ph    <= PH_R;
      iw_en   <= 1'b0;
      iw_idx  <= '0;
      iw_data <= '0;
      i_nxt   <= '0;
    end else begin
      case (i_ph)
        PH_R: if (i_q.valid) i_ph <= PH_C;
        PH_C: begin
          i_ph    <= PH_W;
          iw_idx  <= idx_here(i_q.e.id);
          iw_data <= '0;
          iw_en   <= 1'b0;
          i_nxt   <= '0;
          if (!own_i.valid) begin
            // empty node: the insert settles here
            iw_en         <= 1'b1;
            iw_data.valid <= 1'b1;
            iw_data.e     <= i_q.e;
          end else if (time_before(i_q.e.ftime, own_i.e.ftime)) begin
            // the carried element stays, the node's element is demoted
            iw_en         <= 1'b1;
            iw_data.valid <= 1'b1;
            iw_data.e     <= i_q.e;
            i_nxt.valid   <= HAS_CHILD;
            i_nxt.e       <= own_i.e;
          end else begin
            // the node keeps its element, the carried one goes on down
            i_nxt.valid <= HAS_CHILD;
            i_nxt.e     <= i_q.e;
          end
        end
        default: begin
          i_ph <= PH_R;
          i_q  <= '0;
        end
      endcase
      if (i_in.valid) begin
        i_q  <= i_in;
        i_ph <= PH_R;
      end
    end
  end

  assign i_out    = (i_q.valid && i_ph == PH_W) ? i_nxt : '0;
  assign busy     = d_q.valid || i_q.valid;
  assign overflow = ovf_q;

  // ------------------------------------------------------------ assertions
  // An operation may only arrive when the previous one of its kind is in
  // its last cycle here, and the two kinds never use a port together.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(d_in.valid && d_q.valid && d_ph != PH_W))
        else $error("shq_level %0d: delete arrived while busy", LEVEL);
      assert (!(i_in.valid && i_q.valid && i_ph != PH_W))
        else $error("shq_level %0d: insert arrived while busy", LEVEL);
      assert (!(d_q.valid && d_ph == PH_R && i_q.valid && i_ph == PH_R))
        else $error("shq_level %0d: read port conflict", LEVEL);
      assert (!(d_q.valid && d_ph == PH_W && dw_en && i_q.valid && i_ph == PH_W && iw_en))
        else $error("shq_level %0d: write port conflict", LEVEL);
      assert (!ovf_q) else $error("shq_level %0d: last level overflow", LEVEL);
    end
  end

endmodule
