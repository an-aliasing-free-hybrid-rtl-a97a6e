// tb_spi_slave: self-checking testbench of the SPI target.
// Sends random 48-bit commands, the first half at the paper's 13 Mb/s (38 ns
// per bit-clock phase against a 10 ns core clock), the rest at 25 Mb/s (two
// core clocks per phase), and checks that
// each produces exactly one write with the right address and data, that an
// aborted (short) frame produces none, and that two commands in one CS_N frame
// produce two writes.
module tb_spi_slave;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sclk, cs_n, mosi;
  logic wr_valid;
  logic [15:0] wr_addr;
  logic [31:0] wr_data;
  int checks = 0, failures = 0, nwr = 0;
  logic [47:0] q [$];

  spi_slave dut (.*);
  spi_host #(.HALF_NS(20)) host (.sclk, .cs_n, .mosi);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && wr_valid) begin
    nwr++;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected write %h%h at %0t", wr_addr, wr_data, $time); end
    else begin
      automatic logic [47:0] e = q.pop_front();
      if ({wr_addr, wr_data} != e) begin
        failures++; $display("FAIL exp %h got %h%h", e, wr_addr, wr_data);
      end
    end
  end

  initial begin
    logic [47:0] c;
    #20 rst_n = 1;
    #50;
    for (int i = 0; i < 100; i++) begin
      host.half_ns = (i < 50) ? 38 : 20;
      c = {16'($urandom), 32'($urandom)};
      q.push_back(c);
      host.send(c[47:32], c[31:0]);
    end
    // aborted frame: 20 bits then CS_N high
    host.cs_n = 0; #20;
    for (int i = 0; i < 20; i++) begin host.mosi = 1; #20 host.sclk = 1; #20 host.sclk = 0; end
    #20 host.cs_n = 1; #100;
    // two commands back to back in one frame
    host.cs_n = 0; #20;
    for (int n = 0; n < 2; n++) begin
      c = {16'($urandom), 32'($urandom)};
      q.push_back(c);
      for (int i = 47; i >= 0; i--) begin host.mosi = c[i]; #20 host.sclk = 1; #20 host.sclk = 0; end
    end
    #20 host.cs_n = 1;
    #200;
    checks++; if (q.size() != 0 || nwr != 102) begin failures++; $display("FAIL writes %0d", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
