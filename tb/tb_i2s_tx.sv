// tb_i2s_tx: self-checking testbench of the I2S transmitter.
// Loads a new random stereo pair once per frame (SCLK_DIV = 4, 256 clocks per
// frame), decodes the serial stream like an I2S receiver (sampling on rising
// bit-clock edges, MSB one bit clock after the word-select edge, left slot with
// word select low) and compares every received 24-bit word with the 24 MSBs of
// the loaded samples, in order. Also checks the frame length and bit-clock period.
module tb_i2s_tx;
  localparam int unsigned DIV = 4;
  localparam int unsigned FRAME = 64 * DIV;
  localparam int unsigned NF = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load;
  logic [31:0] left, right;
  logic sclk, lrck, sdata;
  int checks = 0, failures = 0, nwords = 0;
  logic [23:0] q [$];

  i2s_tx #(.SCLK_DIV(DIV)) dut (.*);

  always #5 clk = ~clk;

  // driver
  initial begin
    load = 0; left = '0; right = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (7) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      left = $urandom; right = $urandom;
      q.push_back(left[31:8]); q.push_back(right[31:8]);
      load = 1; @(negedge clk); load = 0;
      repeat (FRAME - 1) @(negedge clk);
    end
  end

  // receiver
  logic last_lr = 1'b1;
  int pos = 0;
  logic [23:0] w;
  longint unsigned cyc = 0, last_rise = 0, last_lr_rise = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge sclk) begin
    if (last_rise != 0) begin
      checks++;
      if (cyc - last_rise != 64'(DIV)) begin failures++; $display("FAIL sclk period %0d", cyc - last_rise); end
    end
    last_rise = cyc;
    if (lrck != last_lr) begin
      if (lrck && last_lr_rise != 0) begin
        checks++;
        if (cyc - last_lr_rise != 64'(FRAME)) begin failures++; $display("FAIL frame length"); end
      end
      if (lrck) last_lr_rise = cyc;
      pos = -1;
    end else pos++;
    last_lr = lrck;
    if (pos >= 0 && pos < 24) w[23 - pos] = sdata;
    if (pos >= 24 && pos < 32) begin
      checks++;
      if (sdata !== 1'b0) begin failures++; $display("FAIL padding bit not zero"); end
    end
    if (pos == 23) begin
      automatic logic [23:0] e = q.pop_front();
      checks++;
      nwords++;
      if (w != e) begin failures++; if (failures < 10) $display("FAIL word %0d exp %h got %h", nwords, e, w); end
      if (nwords == 2 * NF) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat ((NF + 3) * FRAME) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d words", nwords);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
