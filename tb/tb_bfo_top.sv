// tb_bfo_top: end-to-end test of the BFO at K = 128 partials per oscillator
// (I2S bit clock = core clock / 2). All stimulus and checking is in bfo_checker.
module tb_bfo_top;
  localparam int unsigned K = 128;
  logic clk = 1'b0;
  logic rst_n, spi_sclk, spi_cs_n, spi_mosi, i2s_sclk, i2s_lrck, i2s_sd, pdm_l, pdm_r;
  logic [7:0] clip_osc;
  logic [1:0] clip_mix;

  always #5 clk = ~clk;

  bfo_top #(.K(K)) dut (.*);
  bfo_checker #(.K(K)) chk (.*);

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures + 1);
    $finish;
  end
endmodule
