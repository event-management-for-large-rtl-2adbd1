// membrane_model: membrane potential from a predicted firing time (stage 3).
//
// The phase post_ftime - sim_time (modulo 2^13) is how long the neuron still
// has before it fires; it addresses an 8192-entry table of 13-bit potentials
// loaded by the host with p(T - phase), T the free-running period of eq. (1).
// Subtractor and table follow the paper. Latency: one cycle.
module membrane_model
  import hsnn_pkg::*;
(
  input  logic  clk,
  input  logic  wr_en,
  input  time_t wr_addr,
  input  pot_t  wr_pot,
  input  logic  in_valid,
  input  time_t post_ftime,
  input  time_t sim_time,
  output pot_t  post_potential
);

  pot_t  lut [2 ** TIME_W];
  time_t phase;

  assign phase = post_ftime - sim_time;

  always_ff @(posedge clk) begin
    if (wr_en)    lut[wr_addr] <= wr_pot;
    if (in_valid) post_potential <= lut[phase];
  end

endmodule
