// tb_inverse_membrane_model: fills the inverse table with a known pattern;
// a potential presented in one cycle must give table[potential] + sim_time
// (modulo 2^13) in the next, with sim_time that of the next cycle.
module tb_inverse_membrane_model;
  import hsnn_pkg::*;
  logic clk = 0, wr_en = 0, in_valid = 0;
  pot_t wr_addr = '0, post_new_potential = '0;
  time_t wr_phase = '0, sim_time = '0, post_new_ftime;
  int checks = 0, failures = 0;

  function automatic time_t pat(int a);
    return time_t'((a * 5) ^ 13'h0a5a);
  endfunction

  inverse_membrane_model dut (.*);
  always #5 clk = ~clk;
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = pot_t'(a); wr_phase = pat(a);
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 1000; k++) begin
      int p;
      p = $urandom_range(0, 8191);
      @(negedge clk); in_valid = 1; post_new_potential = pot_t'(p);
      @(negedge clk); in_valid = 0; sim_time = time_t'($urandom);
      #1;
      checks++;
      if (post_new_ftime != time_t'(pat(p) + sim_time)) begin
        failures++;
        $display("FAIL p %0d t %0d: %0d", p, sim_time, post_new_ftime);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
