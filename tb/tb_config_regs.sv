// tb_config_regs: self-checking testbench of the memory map.
// Checks the reset values, random writes to every oscillator register and
// mixer coefficient against a model, that unmapped addresses change nothing,
// and that coefficient writes raise exactly the right register-file enable
// with the right index and data.
module tb_config_regs;
  import bfo_pkg::*;
  localparam int unsigned K = 1024;
  localparam int unsigned NT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid;
  logic [15:0] wr_addr;
  logic [31:0] wr_data;
  osc_cfg_t [NT-1:0] osc_cfg;
  logic [1:0][1:0][31:0] mix;
  logic [NT-1:0][2:0] coef_we;
  logic [9:0] coef_addr;
  logic [31:0] coef_data;
  int checks = 0, failures = 0;

  osc_cfg_t [NT-1:0] m_osc;
  logic [1:0][1:0][31:0] m_mix;

  config_regs #(.K(K), .NOSC_TOT(NT)) dut (.*);

  always #5 clk = ~clk;

  task automatic compare(input string what);
    checks++;
    if (osc_cfg !== m_osc || mix !== m_mix) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    wr_addr = a; wr_data = d; wr_valid = 1;
    #1;
    // coefficient enable decode (combinational)
    checks++;
    if (!a[15] && a[11:10] != 2'd3) begin
      automatic logic [NT-1:0][2:0] e = '0;
      e[a[14:12]][a[11:10]] = 1'b1;
      if (coef_we !== e || coef_addr !== a[9:0] || coef_data !== d) begin
        failures++; $display("FAIL coef decode %h", a);
      end
    end else if (coef_we !== '0) begin
      failures++; $display("FAIL spurious coef_we %h", a);
    end
    @(negedge clk);
    wr_valid = 0;
  endtask

  initial begin
    wr_valid = 0; wr_addr = '0; wr_data = '0;
    for (int o = 0; o < NT; o++) begin
      m_osc[o].delta = 0; m_osc[o].f_hp = 0; m_osc[o].f_lp = 32'h8000_0000;
      m_osc[o].bound = {3{16'd1024}};
      m_osc[o].v = {32'd0, 32'd0, 32'd0, 32'h4000_0000};
      m_osc[o].mask = '1; m_osc[o].rate = 0; m_osc[o].rate_en = 0;
    end
    m_mix[0][0] = 32'h4000_0000; m_mix[0][1] = 0; m_mix[1][0] = 0; m_mix[1][1] = 32'h4000_0000;
    @(negedge clk); rst_n = 1; @(negedge clk);
    compare("reset values");
    for (int i = 0; i < 3000; i++) begin
      automatic int kind = $urandom_range(3);
      automatic logic [31:0] d = $urandom;
      automatic logic [2:0] o = 3'($urandom);
      automatic logic [3:0] r = 4'($urandom_range(15));
      automatic logic [15:0] a;
      case (kind)
        0: begin
          a = {9'h100, o, r};
          case (r)
            0: m_osc[o].delta = d;   1: m_osc[o].f_hp = d;   2: m_osc[o].f_lp = d;
            3: m_osc[o].bound[0] = d[15:0]; 4: m_osc[o].bound[1] = d[15:0]; 5: m_osc[o].bound[2] = d[15:0];
            6: m_osc[o].v[0] = d; 7: m_osc[o].v[1] = d; 8: m_osc[o].v[2] = d; 9: m_osc[o].v[3] = d;
            10: m_osc[o].mask = d; 11: m_osc[o].rate = d; 12: m_osc[o].rate_en = d[0];
            default: ;
          endcase
        end
        1: begin a = {14'h2040, 2'($urandom)}; m_mix[a[1]][a[0]] = d; end
        2: a = {1'b0, o, 2'($urandom), 10'($urandom)};      // coefficient
        default: a = 16'h8200 | 16'($urandom_range(16'h7dff));   // unmapped
      endcase
      wr(a, d);
      compare("after write");
    end
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
