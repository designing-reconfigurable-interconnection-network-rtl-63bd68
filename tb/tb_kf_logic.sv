// tb_kf_logic -- checks the KF-logic decode: after reset mode 0 with GPU on
// VC0-1 and CPU on VC2-3 and plain round-robin; one cycle after the input turns
// to 1, GPU on VC0-2, CPU on VC3 and a GPU weight of 2; and back again. Also run
// with 8 VCs (half / three quarters).
module tb_kf_logic;
  logic clk = 0, rst_n = 0, m_in = 0;
  logic mode4, mode8;
  logic [3:0] g4, c4;
  logic [7:0] g8, c8;
  logic [1:0] w4, w8;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  kf_logic #(.NUM_VC(4)) dut4 (.clk, .rst_n, .kf_mode_in(m_in), .mode(mode4),
    .gpu_vc_mask(g4), .cpu_vc_mask(c4), .sw_gpu_weight(w4));
  kf_logic #(.NUM_VC(8)) dut8 (.clk, .rst_n, .kf_mode_in(m_in), .mode(mode8),
    .gpu_vc_mask(g8), .cpu_vc_mask(c8), .sw_gpu_weight(w8));

  task automatic check(input logic em, input logic [3:0] eg4, input logic [7:0] eg8, input logic [1:0] ew);
    checks++;
    if (mode4 !== em || g4 !== eg4 || c4 !== ~eg4 || w4 !== ew ||
        mode8 !== em || g8 !== eg8 || c8 !== ~eg8 || w8 !== ew) begin
      failures++;
      $display("FAIL t=%0t mode=%b g4=%b c4=%b w4=%0d g8=%b c8=%b (exp mode %b g4 %b g8 %b w %0d)",
               $time, mode4, g4, c4, w4, g8, c8, em, eg4, eg8, ew);
    end
  endtask

  initial begin
    #12 rst_n = 1;
    @(negedge clk) check(0, 4'b0011, 8'h0F, 0);
    m_in = 1;
    #0 check(0, 4'b0011, 8'h0F, 0);           // not yet: registered
    @(negedge clk) check(1, 4'b0111, 8'h3F, 2);
    @(negedge clk) check(1, 4'b0111, 8'h3F, 2);
    m_in = 0;
    @(negedge clk) check(0, 4'b0011, 8'h0F, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
