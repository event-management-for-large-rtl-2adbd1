// synapse_model: new membrane potential of the processed neuron (stage 4).
//
// A multiplexer driven by same_pre_post chooses what is added to the
// neuron's potential: the synaptic weight for a post-synaptic neuron (flag 0)
// or, for the firing neuron itself (flag 1), minus the threshold, which
// resets it. The figure draws the threshold into an adder; the text says the
// threshold is subtracted, which is what is done here (two's complement of
// the threshold into the same adder). The result saturates to 0..2^13-1, a
// choice of this design: the paper gives no overflow rule. Combinational.
module synapse_model
  import hsnn_pkg::*;
(
  input  logic    same_pre_post,
  input  weight_t syn_weight,
  input  pot_t    threshold,
  input  pot_t    post_potential,
  output pot_t    post_new_potential
);

  logic signed [POT_W+1:0] addend;
  logic signed [POT_W+1:0] sum;

  always_comb begin
    addend = same_pre_post ? -$signed({2'b00, threshold})
                           : $signed({{(POT_W+2-WEIGHT_W){1'b0}}, syn_weight});
    sum    = $signed({2'b00, post_potential}) + addend;
    if (sum < 0)
      post_new_potential = '0;
    else if (sum > $signed({2'b00, {POT_W{1'b1}}}))
      post_new_potential = '1;
    else
      post_new_potential = sum[POT_W-1:0];
  end

endmodule
