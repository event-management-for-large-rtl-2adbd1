// inverse_membrane_model: new predicted firing time from a potential
// (stages 4 and 5).
//
// The new potential addresses an 8192-entry table, loaded by the host with
// the time left until the neuron reaches the threshold, T - t(p) from eq. (3)
// (0 for potentials at or above the threshold). The table output is added
// to the simulation time, modulo 2^13, to give the new firing time. The
// table read is registered (end of stage 4) and the adder works in stage 5,
// so sim_time must be the value belonging to the potential presented one
// cycle earlier. Table and adder follow the paper.
module inverse_membrane_model
  import hsnn_pkg::*;
(
  input  logic  clk,
  input  logic  wr_en,
  input  pot_t  wr_addr,
  input  time_t wr_phase,
  input  logic  in_valid,
  input  pot_t  post_new_potential,
  input  time_t sim_time,
  output time_t post_new_ftime
);

  time_t lut [2 ** POT_W];
  time_t new_phase;

  always_ff @(posedge clk) begin
    if (wr_en)    lut[wr_addr] <= wr_phase;
    if (in_valid) new_phase <= lut[post_new_potential];
  end

  assign post_new_ftime = new_phase + sim_time;

endmodule
