// tb_topology_solver: loads the nine offsets of a 256-wide grid and checks,
// for random events, the involved neuron ID (pre + offset, modulo 2^16), the
// same-neuron flag and the one-cycle latency.
module tb_topology_solver;
  import hsnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, in_valid = 0;
  syn_t wr_addr = '0, synapse_nbr = '0;
  id_t  wr_offset = '0, pre_id = '0;
  logic out_valid, same_pre_post;
  id_t  post_id;
  int checks = 0, failures = 0;
  id_t offs [N_SYN] = '{-16'sd257, -16'sd256, -16'sd255, -16'sd1, 16'sd0, 16'sd1, 16'sd255, 16'sd256, 16'sd257};

  topology_solver dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < N_SYN; s++) begin
      @(negedge clk); wr_en = 1; wr_addr = syn_t'(s); wr_offset = offs[s];
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 400; k++) begin
      int s; id_t p;
      s = $urandom_range(0, N_SYN - 1);
      p = id_t'($urandom);
      @(negedge clk); in_valid = 1; synapse_nbr = syn_t'(s); pre_id = p;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || post_id != id_t'(p + offs[s]) || same_pre_post != (s == 4)) begin
        failures++;
        $display("FAIL syn %0d pre %0d: post %0d flag %0d", s, p, post_id, same_pre_post);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
