// tb_neuron_state_memory: random writes (with and without the pixel) and
// reads against a reference array; read data must appear one cycle after
// the address.
module tb_neuron_state_memory;
  import hsnn_pkg::*;
  localparam int unsigned DEPTH = 256;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0, wr_pixel_en = 0;
  id_t  rd_addr = '0, wr_addr = '0;
  time_t rd_ftime, wr_ftime = '0;
  pixel_t rd_pixel, wr_pixel = '0;
  time_t  rf [DEPTH];
  pixel_t rp [DEPTH];
  int checks = 0, failures = 0;

  neuron_state_memory #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_pixel_en = 1; wr_addr = id_t'(i);
      wr_ftime = time_t'($urandom); wr_pixel = pixel_t'($urandom);
      rf[i] = wr_ftime; rp[i] = wr_pixel;
    end
    for (int k = 0; k < 2000; k++) begin
      int a, b;
      a = $urandom_range(0, DEPTH - 1);
      b = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) == 1); wr_pixel_en = ($urandom_range(0, 1) == 1);
      wr_addr = id_t'(a); wr_ftime = time_t'($urandom); wr_pixel = pixel_t'($urandom);
      rd_en = 1; rd_addr = id_t'(b);
      @(negedge clk);
      // the read of b saw the memory before this cycle's write
      checks++;
      if (rd_ftime != rf[b] || rd_pixel != rp[b]) begin
        failures++;
        $display("FAIL addr %0d: %0d/%0d expected %0d/%0d", b, rd_ftime, rd_pixel, rf[b], rp[b]);
      end
      if (wr_en) begin rf[a] = wr_ftime; if (wr_pixel_en) rp[a] = wr_pixel; end
      wr_en = 0; rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
