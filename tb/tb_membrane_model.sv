// tb_membrane_model: fills the membrane table with a known pattern and
// checks that the potential read one cycle later is the entry addressed by
// post_ftime - sim_time modulo 2^13, including wrapped times.
module tb_membrane_model;
  import hsnn_pkg::*;
  logic clk = 0, wr_en = 0, in_valid = 0;
  time_t wr_addr = '0, post_ftime = '0, sim_time = '0;
  pot_t wr_pot = '0, post_potential;
  int checks = 0, failures = 0;

  function automatic pot_t pat(int a);
    return pot_t'(8191 - a ^ (a << 2));
  endfunction

  membrane_model dut (.*);
  always #5 clk = ~clk;
  initial begin #2_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = time_t'(a); wr_pot = pat(a);
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 1000; k++) begin
      int ph;
      @(negedge clk); in_valid = 1; post_ftime = time_t'($urandom); sim_time = time_t'($urandom);
      ph = (int'(post_ftime) - int'(sim_time)) & 8191;
      @(negedge clk); in_valid = 0;
      checks++;
      if (post_potential != pat(ph)) begin
        failures++;
        $display("FAIL ft %0d t %0d: %0d expected %0d", post_ftime, sim_time, post_potential, pat(ph));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
