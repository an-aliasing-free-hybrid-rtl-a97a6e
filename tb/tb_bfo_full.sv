// tb_bfo_full: end-to-end test of the BFO with every parameter at its default
// (K = 1024 partials per oscillator, 26 CORDIC micro-rotations, I2S bit clock =
// core clock / 16). Same stimulus and checks as tb_bfo_top, via bfo_checker.
module tb_bfo_full;
  logic clk = 1'b0;
  logic rst_n, spi_sclk, spi_cs_n, spi_mosi, i2s_sclk, i2s_lrck, i2s_sd, pdm_l, pdm_r;
  logic [7:0] clip_osc;
  logic [1:0] clip_mix;

  always #5 clk = ~clk;

  bfo_top dut (.*);
  bfo_checker #(.K(1024)) chk (.*);

  initial begin
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures + 1);
    $finish;
  end
endmodule
