// weight_calculator: synaptic weight from two pixel values (stage 3).
//
// The difference pre_pixel - post_pixel, a 9-bit two's-complement number,
// addresses a 512-entry table of 9-bit weights loaded by the host; the table
// holds w = f(|difference|) for the chosen weight function, so the sign is
// simply part of the address. Subtractor and table follow the paper.
// Latency: one cycle (synchronous table read).
module weight_calculator
  import hsnn_pkg::*;
(
  input  logic    clk,
  input  logic    wr_en,
  input  logic [PIXEL_W:0] wr_addr,
  input  weight_t wr_weight,
  input  logic    in_valid,
  input  pixel_t  pre_pixel,
  input  pixel_t  post_pixel,
  output weight_t syn_weight
);

  weight_t lut [2 ** (PIXEL_W + 1)];
  logic [PIXEL_W:0] diff;

  assign diff = {1'b0, pre_pixel} - {1'b0, post_pixel};

  always_ff @(posedge clk) begin
    if (wr_en)    lut[wr_addr] <= wr_weight;
    if (in_valid) syn_weight <= lut[diff];
  end

endmodule
