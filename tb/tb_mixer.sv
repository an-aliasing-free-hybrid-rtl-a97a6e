// tb_mixer: self-checking testbench of the mixer.
// Random oscillator samples and matrices (identity, mono 0.5/0.5, random) are
// checked against a double-precision model of the voice sums and the 2x2
// matrix (within one LSB); out-of-range results must clip and raise the flag.
module tb_mixer;
  import bfo_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [NOSC-1:0][31:0] osc_l, osc_r;
  logic [1:0][1:0][31:0] m;
  logic out_valid;
  logic [31:0] out_l, out_r;
  logic [1:0] clip;
  int checks = 0, failures = 0, nclip = 0;

  mixer dut (.*);

  always #5 clk = ~clk;

  initial begin
    real vl, vr, e [2];
    logic [31:0] got [2];
    in_valid = 0; osc_l = '0; osc_r = '0; m = '0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      for (int j = 0; j < NOSC; j++) begin
        osc_l[j] = 32'(signed'($urandom) >>> $urandom_range(4));
        osc_r[j] = 32'(signed'($urandom) >>> $urandom_range(4));
      end
      case (i % 3)
        0: m = '{'{ONE_S130, 32'd0}, '{32'd0, ONE_S130}};
        1: m = {4{32'h2000_0000}};
        default: for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) m[a][b] = $urandom;
      endcase
      in_valid = 1; @(negedge clk); in_valid = 0;
      vl = 0.0; vr = 0.0;
      for (int j = 0; j < NOSC; j++) begin
        vl += real'(signed'(osc_l[j]));
        vr += real'(signed'(osc_r[j]));
      end
      for (int o = 0; o < 2; o++)
        e[o] = (vl * real'(signed'(m[o][0])) + vr * real'(signed'(m[o][1]))) / 2.0**30;
      got[0] = out_l; got[1] = out_r;
      checks++; if (!out_valid) failures++;
      for (int o = 0; o < 2; o++) begin
        checks++;
        if (e[o] > 2.0**31 - 1.0 || e[o] < -(2.0**31)) begin
          nclip++;
          if (!clip[o] || got[o] != ((e[o] > 0) ? 32'h7fff_ffff : 32'h8000_0000)) begin
            failures++; $display("FAIL clip o=%0d", o);
          end
        end else if (clip[o] || real'(signed'(got[o])) - e[o] > 1.0 || e[o] - real'(signed'(got[o])) > 1.0) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d o=%0d exp %f got %0d", i, o, e[o], signed'(got[o]));
        end
      end
    end
    checks++; if (nclip == 0) failures++;
    $display("clipped %0d", nclip);
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
