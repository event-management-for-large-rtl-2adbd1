// topology_solver: first stage of the processing element.
//
// For synapse number s of the event fired by neuron pre_id, the topology
// look-up table gives a neuron offset; the involved neuron is pre_id + offset
// (modulo N_NEURONS, the neuron count, a power of two) and same_pre_post is set when the offset is 0,
// which marks the firing neuron itself, to be reset rather than excited.
// The look-up table, the adder and the zero test follow the paper. The table
// has N_SYN entries of a 16-bit two's-complement offset written by the host
// (wr_*); for the 256-wide image grid the eight neighbours are -257, -256,
// -255, -1, +1, +255, +256, +257. Edges wrap around: the paper does not say
// how border pixels are connected. Latency: one cycle, registered outputs.
module topology_solver
  import hsnn_pkg::*;
#(
  parameter int unsigned N_ENTRIES = N_SYN,
  parameter int unsigned N_NEURONS = 2 ** ID_W   // power of two
) (
  input  logic clk,
  input  logic rst_n,
  // table write from the host
  input  logic wr_en,
  input  syn_t wr_addr,
  input  id_t  wr_offset,
  // stage input
  input  logic in_valid,
  input  syn_t synapse_nbr,
  input  id_t  pre_id,
  // stage output, one cycle later
  output logic out_valid,
  output id_t  post_id,
  output logic same_pre_post
);

  id_t lut [N_ENTRIES];
  id_t offset;

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_addr) < N_ENTRIES) lut[wr_addr] <= wr_offset;
  end

  assign offset = (int'(synapse_nbr) < N_ENTRIES) ? lut[synapse_nbr] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      post_id       <= '0;
      same_pre_post <= 1'b0;
    end else begin
      out_valid     <= in_valid;
      post_id       <= (pre_id + offset) & id_t'(N_NEURONS - 1);
      same_pre_post <= (offset == '0);
    end
  end

endmodule
