// neuron_state_memory: the state of every neuron, addressed by neuron ID.
//
// Each word holds the neuron's predicted firing time (13 bits) and its pixel
// value (8 bits), the two state items the image segmentation needs. The
// processing element reads it in its second pipeline stage and writes the
// new firing time back in its fifth; the host uses the write port to load
// the image and the initial firing times. One synchronous read port (data
// one cycle after the address, as in block RAM) and one write port. A write
// of only the firing time keeps the stored pixel (wr_pixel_en = 0).
// The content and the read/write interfaces follow the paper; the split
// pixel write enable is this design's own.
module neuron_state_memory
  import hsnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2 ** ID_W
) (
  input  logic   clk,
  input  logic   rd_en,
  input  id_t    rd_addr,
  output time_t  rd_ftime,
  output pixel_t rd_pixel,
  input  logic   wr_en,
  input  logic   wr_pixel_en,
  input  id_t    wr_addr,
  input  time_t  wr_ftime,
  input  pixel_t wr_pixel
);

  localparam int unsigned AW = $clog2(DEPTH);

  time_t  ftime_mem [DEPTH];
  pixel_t pixel_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)               ftime_mem[wr_addr[AW-1:0]] <= wr_ftime;
    if (wr_en && wr_pixel_en) pixel_mem[wr_addr[AW-1:0]] <= wr_pixel;
    if (rd_en) begin
      rd_ftime <= ftime_mem[rd_addr[AW-1:0]];
      rd_pixel <= pixel_mem[rd_addr[AW-1:0]];
    end
  end

endmodule
