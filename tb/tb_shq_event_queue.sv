// tb_shq_event_queue: self-checking test of the structured heap queue.
//
// A 5-level queue (16 elements) is filled with inserts issued back to back,
// then driven with random delete-inserts, deletes and inserts, and finally
// drained by deleting its root again and again. A plain array of the
// elements present is the reference: whenever the root has settled it must
// hold an element of the smallest firing time, and the drained elements must
// come out in time order and be exactly the reference's. The test also
// measures the accepted issue rate: one insert per 3 cycles and one
// delete-insert per 7.
module tb_shq_event_queue;
  import hsnn_pkg::*;

  localparam int unsigned LEVELS = 5;
  localparam int unsigned N      = 2 ** (LEVELS - 1);

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  op_valid;
  qop_e  op;
  elem_t op_elem;
  logic  op_ready, top_valid, top_settled, overflow;
  elem_t top;

  shq_event_queue #(.LEVELS(LEVELS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic        present [N];
  time_t       rtime   [N];
  time_t       base;
  longint      cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL at cycle %0d: %s", cyc, msg);
    end
  endtask

  // earliest firing time present in the reference
  function automatic bit ref_min(output time_t t);
    bit any = 0;
    t = '0;
    for (int i = 0; i < N; i++)
      if (present[i] && (!any || time_before(rtime[i], t))) begin
        t   = rtime[i];
        any = 1;
      end
    return any;
  endfunction

  task automatic check_root();
    time_t t;
    bit    any;
    while (!top_settled) @(posedge clk);
    #1;
    any = ref_min(t);
    check(top_valid == any, "root valid");
    if (any) begin
      check(top.ftime == t, $sformatf("root time %0d, expected %0d", top.ftime, t));
      check(present[top.id[LEVELS-2:0]] && rtime[top.id[LEVELS-2:0]] == top.ftime &&
            top.pixel == pixel_t'(top.id * 7), "root element is one of the reference");
    end
  endtask

  // issue one operation, return the cycle it was accepted in
  task automatic issue(input qop_e o, input id_t id, input time_t t, output longint at);
    @(negedge clk);
    op_valid = 1'b1;
    op       = o;
    op_elem  = '{id: id, ftime: t, pixel: pixel_t'(id * 7)};
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    at = cyc;
    #1;
    op_valid = 1'b0;
    case (o)
      Q_INSERT: begin present[id] = 1'b1; rtime[id] = t; end
      Q_DELETE: present[id] = 1'b0;
      Q_DELINS: begin present[id] = 1'b1; rtime[id] = t; end
      default: ;
    endcase
  endtask

  initial begin
    longint a0, a1, first, last;
    int     n_delins = 0;
    time_t  prev_t;
    op_valid = 1'b0;
    op       = Q_NOP;
    op_elem  = '0;
    for (int i = 0; i < N; i++) begin present[i] = 0; rtime[i] = '0; end
    base = 13'd8000;           // exercises the wrap-around of firing times
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. fill the queue, inserts back to back
    for (int i = 0; i < N; i++) begin
      issue(Q_INSERT, id_t'(i), base + time_t'($urandom_range(0, 1500)), a1);
      if (i == 0) first = a1;
      else check(a1 - a0 == 3, $sformatf("insert interval %0d, expected 3", a1 - a0));
      a0 = a1;
    end
    check_root();

    // 2. random traffic; delete-inserts back to back are 7 cycles apart
    last = 0;
    for (int k = 0; k < 600; k++) begin
      int    id, r;
      time_t t;
      id = $urandom_range(0, N - 1);
      r  = $urandom_range(0, 9);
      if (ref_min(t)) base = t;
      if (r < 8) begin
        issue(Q_DELINS, id_t'(id), base + time_t'($urandom_range(0, 1500)), a1);
        if (last != 0) check(a1 - last == 7, $sformatf("delete-insert interval %0d", a1 - last));
        last = a1;
        n_delins++;
      end else if (present[id]) begin
        issue(Q_DELETE, id_t'(id), '0, a1);
        last = 0;
      end else begin
        issue(Q_INSERT, id_t'(id), base + time_t'($urandom_range(0, 1500)), a1);
        last = 0;
      end
      if (k % 5 == 4) begin
        check_root();
        last = 0;
      end
    end
    check_root();

    // 3. drain: delete the root until empty; times must not decrease
    prev_t = '0;
    for (int k = 0; k <= N; k++) begin
      check_root();
      if (!top_valid) break;
      if (k > 0) check(!time_before(top.ftime, prev_t), "drain order");
      prev_t = top.ftime;
      issue(Q_DELETE, top.id, '0, a1);
    end
    repeat (3 * LEVELS + 5) @(posedge clk);
    check_root();
    check(!top_valid, "queue empty after drain");
    check(!overflow, "no overflow");
    $display("delete-inserts issued: %0d", n_delins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
