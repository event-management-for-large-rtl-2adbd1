// tb_weight_calculator: fills the weight table with a known pattern and
// checks that the weight read one cycle later is the entry addressed by the
// 9-bit difference pre_pixel - post_pixel.
module tb_weight_calculator;
  import hsnn_pkg::*;
  logic clk = 0, wr_en = 0, in_valid = 0;
  logic [PIXEL_W:0] wr_addr = '0;
  weight_t wr_weight = '0, syn_weight;
  pixel_t pre_pixel = '0, post_pixel = '0;
  int checks = 0, failures = 0;

  function automatic weight_t pat(int a);
    return weight_t'((a * 37 + 11) ^ (a >> 3));
  endfunction

  weight_calculator dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 9'(a); wr_weight = pat(a);
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 1000; k++) begin
      int d;
      @(negedge clk); in_valid = 1; pre_pixel = pixel_t'($urandom); post_pixel = pixel_t'($urandom);
      d = (int'(pre_pixel) - int'(post_pixel)) & 511;
      @(negedge clk); in_valid = 0;
      checks++;
      if (syn_weight != pat(d)) begin
        failures++;
        $display("FAIL %0d-%0d: %0d expected %0d", pre_pixel, post_pixel, syn_weight, pat(d));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
