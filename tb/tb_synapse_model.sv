// tb_synapse_model: random potentials, weights and thresholds; the new
// potential must be potential + weight (flag 0) or potential - threshold
// (flag 1), saturated to 0..8191.
module tb_synapse_model;
  import hsnn_pkg::*;
  logic same_pre_post;
  weight_t syn_weight;
  pot_t threshold, post_potential, post_new_potential;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;

  synapse_model dut (.*);
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < 5000; k++) begin
      int e;
      same_pre_post  = ($urandom_range(0, 1) == 1);
      syn_weight     = weight_t'($urandom);
      threshold      = pot_t'($urandom_range(0, 8191));
      post_potential = pot_t'($urandom_range(0, 8191));
      #1;
      e = same_pre_post ? int'(post_potential) - int'(threshold) : int'(post_potential) + int'(syn_weight);
      if (e < 0) begin e = 0; sat_lo++; end
      if (e > 8191) begin e = 8191; sat_hi++; end
      checks++;
      if (int'(post_new_potential) != e) begin
        failures++;
        $display("FAIL flag %0d w %0d th %0d p %0d: %0d expected %0d", same_pre_post, syn_weight,
                 threshold, post_potential, post_new_potential, e);
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
