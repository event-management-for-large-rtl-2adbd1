// tb_merger: four queues' roots, random validity and times within half the
// time range; the registered output must be the earliest valid root (lowest
// index on a tie) with its queue number, and settled the AND of all.
module tb_merger;
  import hsnn_pkg::*;
  localparam int unsigned NQ = 4;
  logic clk = 0, rst_n = 0;
  logic  top_valid [NQ];
  elem_t top [NQ];
  logic  top_settled [NQ];
  logic  next_valid, settled;
  elem_t next;
  logic [1:0] next_queue;
  int checks = 0, failures = 0;

  merger #(.N_QUEUES(NQ)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      int base, bq, bt;
      bit any, st;
      base = $urandom_range(0, 8191);
      any = 0; st = 1; bq = 0; bt = 0;
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        int off;
        off = $urandom_range(0, 3000);
        top_valid[q]   = ($urandom_range(0, 3) != 0);
        top_settled[q] = ($urandom_range(0, 7) != 0);
        top[q]         = '{id: id_t'($urandom), ftime: time_t'(base + off), pixel: pixel_t'($urandom)};
        st &= top_settled[q];
        if (top_valid[q] && (!any || off < bt)) begin any = 1; bt = off; bq = q; end
      end
      @(negedge clk);
      checks++;
      if (next_valid != any || settled != st || (any && (next_queue != 2'(bq) || next != top[bq]))) begin
        failures++;
        $display("FAIL: valid %0d queue %0d expected %0d/%0d", next_valid, next_queue, any, bq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
