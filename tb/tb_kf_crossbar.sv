// tb_kf_crossbar -- random input flits and random one-hot selections (at most
// one output per input); one cycle later every output must carry exactly the
// selected input's flit with its vc field replaced by that input's output VC, and
// outputs without a selection must be idle.
module tb_kf_crossbar;
  import kf_noc_pkg::*;
  localparam int P = 5;
  logic clk = 0, rst_n = 0;
  flit_t in_flit [P];
  logic [VC_ID_W-1:0] in_out_vc [P];
  logic [P-1:0] sel [P];
  logic sel_valid [P];
  link_t out_link [P];
  link_t exp_l [P];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kf_crossbar #(.NUM_PORT(P)) dut (.clk, .rst_n, .in_flit, .in_out_vc, .sel, .sel_valid, .out_link);

  initial begin
    for (int o = 0; o < P; o++) begin sel[o] = '0; sel_valid[o] = 0; in_flit[o] = '0; in_out_vc[o] = '0; end
    #12 rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      begin
        int perm [P];
        for (int i = 0; i < P; i++) perm[i] = i;
        perm.shuffle();
        for (int p = 0; p < P; p++) begin
          in_flit[p] = '0;
          in_flit[p].data = {8{$urandom()}};
          in_flit[p].vc = VC_ID_W'($urandom());
          in_flit[p].head = $urandom_range(0,1);
          in_out_vc[p] = VC_ID_W'($urandom_range(0, 3));
        end
        for (int o = 0; o < P; o++) begin
          sel_valid[o] = $urandom_range(0, 1);
          sel[o] = sel_valid[o] ? (P'(1) << perm[o]) : '0;
          exp_l[o].valid = sel_valid[o];
          exp_l[o].flit = in_flit[perm[o]];
          exp_l[o].flit.vc = in_out_vc[perm[o]];
        end
      end
      @(posedge clk); #1;
      for (int o = 0; o < P; o++) begin
        checks++;
        if (out_link[o].valid !== exp_l[o].valid ||
            (exp_l[o].valid && out_link[o].flit !== exp_l[o].flit)) begin
          failures++;
          if (failures < 10) $display("FAIL cyc %0d out %0d", cyc, o);
        end
      end
    end
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
