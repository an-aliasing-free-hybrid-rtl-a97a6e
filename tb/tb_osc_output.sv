// tb_osc_output: self-checking testbench of the oscillator output stage.
// Checks the weighted subwave sum against a double-precision model (within one
// LSB), clipping at both ends with the clip flag, the bit-crusher mask, and the
// rate-crusher: with rate = 1/4 of fs the output must change only on every
// fourth sample and hold otherwise.
module tb_osc_output;
  import bfo_pkg::*;
  localparam int unsigned ACC_W = 44;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [NSUB-1:0][ACC_W-1:0] x;
  logic [NSUB-1:0][31:0] v;
  logic [31:0] mask, rate;
  logic rate_en;
  logic out_valid;
  logic [31:0] y;
  logic clip;
  int checks = 0, failures = 0, nclip = 0, nhold = 0;

  osc_output #(.ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  // model: y in units of 2^-31, before clipping
  function automatic real model_y();
    real s = 0.0;
    for (int i = 0; i < NSUB; i++)
      s += real'(longint'(signed'(x[i]))) * real'(signed'(v[i])) / 2.0**30;
    return s;
  endfunction

  task automatic apply(output real ey);
    in_valid = 1; @(negedge clk); in_valid = 0;
    ey = model_y();
    checks++;
    if (!out_valid) failures++;
  endtask

  initial begin
    real ey, lim;
    logic [31:0] prev;
    in_valid = 0; x = '0; v = '0; mask = '1; rate = '0; rate_en = 0;
    @(negedge clk); rst_n = 1;
    // weighted sums, mostly in range
    for (int i = 0; i < 2000; i++) begin
      for (int j = 0; j < NSUB; j++) begin
        x[j] = ACC_W'(signed'($urandom)) <<< $urandom_range(1);
        v[j] = (j == 0 || $urandom_range(1) == 1) ? 32'(signed'($urandom) >>> 2) : 32'd0;
      end
      if (i % 50 == 0) x[0] = ACC_W'(signed'(64'sh7_0000_0000)) * ((i % 100 == 0) ? 1 : -1);
      apply(ey);
      lim = 2.0**31;
      checks++;
      if (ey > lim - 1.0 || ey < -lim) begin
        nclip++;
        if (!clip || y != ((ey > 0) ? 32'h7fff_ffff : 32'h8000_0000)) begin
          failures++; $display("FAIL clip exp %f got %h clip=%b", ey, y, clip);
        end
      end else begin
        automatic real d = real'(signed'(y)) - ey;
        if (clip || d > 1.0 || d < -1.0) begin
          failures++; if (failures < 10) $display("FAIL y exp %f got %0d", ey, signed'(y));
        end
      end
    end
    // bit-crusher: keep the top 8 bits only
    mask = 32'hff00_0000;
    x = '0; v = '0; x[0] = 44'h0_1234_5678; v[0] = ONE_S130;
    apply(ey);
    checks++; if (y != 32'h1200_0000) begin failures++; $display("FAIL mask %h", y); end
    // rate-crusher at fs/4: the value changes only every 4th sample
    mask = '1; rate = 32'h4000_0000; rate_en = 1;
    for (int i = 0; i < 40; i++) begin
      prev = y;
      x[0] = 44'(i + 1) <<< 20;
      apply(ey);
      checks++;
      if ((i % 4) == 3) begin
        if (y != 32'((i + 1) <<< 20)) begin failures++; $display("FAIL rate update i=%0d %h", i, y); end
      end else begin
        nhold++;
        if (y != prev) begin failures++; $display("FAIL rate hold i=%0d", i); end
      end
    end
    checks++; if (nclip == 0 || nhold == 0) failures++;
    $display("clipped %0d, held %0d", nclip, nhold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
