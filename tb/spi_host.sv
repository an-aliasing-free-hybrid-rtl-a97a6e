// spi_host: testbench SPI controller sending BFO commands (mode 0, MSB first).
// 'send' transmits one 48-bit command {address, data} in its own CS_N frame;
// Each phase of the bit clock lasts half_ns time units (default HALF_NS); a
// testbench may change half_ns between commands.
module spi_host #(
  parameter int unsigned HALF_NS = 40
) (
  output logic sclk,
  output logic cs_n,
  output logic mosi
);
  int half_ns = HALF_NS;

  initial begin
    sclk = 1'b0; cs_n = 1'b1; mosi = 1'b0;
  end

  // one bit-clock phase, built from unit delays so that its length may change
  task automatic wait_half();
    repeat (half_ns) #1;
  endtask

  task automatic send(input logic [15:0] addr, input logic [31:0] data);
    logic [47:0] w;
    w = {addr, data};
    cs_n = 1'b0;
    wait_half();
    for (int i = 47; i >= 0; i--) begin
      mosi = w[i];
      wait_half();
      sclk = 1'b1;
      wait_half();
      sclk = 1'b0;
    end
    wait_half();
    cs_n = 1'b1;
    wait_half(); wait_half();
  endtask
endmodule
