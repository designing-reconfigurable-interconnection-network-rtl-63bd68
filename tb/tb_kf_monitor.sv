// tb_kf_monitor -- random per-node event bits over several short epochs (100
// cycles, 8 nodes, 16 injection points, small full-scale values so that both
// the linear range and the clamp at +1 are exercised). At every z_valid pulse the
// raw totals and the normalised values 2*min(c, 2^L)/2^L - 1 are compared with
// counts kept by the testbench, and the pulse spacing must equal the epoch.
module tb_kf_monitor;
  import kf_noc_pkg::*;
  localparam int N = 8, NP = 16, EP = 100;
  localparam int L [3] = '{8, 9, 6};
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] push_ev = '0;
  logic [N-1:0]  shader_ev = '0, dram_ev = '0;
  logic z_valid;
  fx_t  z [3];
  logic [31:0] count [3];
  int checks = 0, failures = 0;
  int acc [3], exp_c [3];
  int last_pulse = -1, cyc = 0, epochs = 0, clamped = 0;

  always #5 clk = ~clk;
  kf_monitor #(.N_NODES(N), .N_PUSH(NP), .EPOCH_CYCLES(EP), .PUSH_LOG2(L[0]),
               .SHADER_LOG2(L[1]), .DRAM_LOG2(L[2])) dut (
    .clk, .rst_n, .push_ev, .shader_ev, .dram_ev, .z_valid, .z, .count);

  function automatic int ones(input logic [31:0] v);
    int c = 0;
    for (int i = 0; i < 32; i++) c += v[i];
    return c;
  endfunction

  initial begin
    acc = '{0, 0, 0};
    #12 rst_n = 1;
    while (epochs < 12) begin
      @(negedge clk);
      // check a pulse produced by the previous edge
      if (z_valid) begin
        for (int m = 0; m < 3; m++) begin
          longint full, cl;
          fx_t ez;
          full = longint'(1) << L[m];
          cl = (exp_c[m] > full) ? full : exp_c[m];
          if (exp_c[m] > full) clamped++;
          ez = fx_t'((cl * 2 * 65536) / full - 65536);
          checks++;
          if (count[m] != 32'(exp_c[m]) || z[m] != ez) begin
            failures++;
            $display("FAIL epoch %0d metric %0d count %0d exp %0d z %0d exp %0d", epochs, m, count[m], exp_c[m], z[m], ez);
          end
        end
        if (last_pulse >= 0) begin
          checks++;
          if (cyc - last_pulse != EP) begin failures++; $display("FAIL spacing %0d", cyc - last_pulse); end
        end
        last_pulse = cyc;
        epochs++;
      end
      // drive new events; density varies by epoch
      begin
        int dens;
        dens = (epochs % 3) + 1;
        push_ev   = NP'($urandom()) & NP'($urandom() | ((dens > 1) ? 32'hffff_ffff : 32'h0));
        shader_ev = N'($urandom());
        dram_ev   = (dens == 3) ? N'($urandom()) : (N'($urandom()) & N'($urandom()) & N'($urandom()));
      end
      @(posedge clk);
      acc[0] += ones(32'(push_ev)); acc[1] += ones(32'(shader_ev)); acc[2] += ones(32'(dram_ev));
      cyc++;
      #1;
      if (z_valid) begin exp_c = acc; acc = '{0, 0, 0}; end
    end
    checks++;
    if (clamped == 0) begin failures++; $display("FAIL clamp never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
