// tb_kf_sw_allocator -- switch allocation policy and legality.
// Directed part (the paper's switch-allocation example): a GPU VC on one input
// and a CPU VC on another input compete for the West output without pause. With
// weight 0 (KF output 0) the grants must alternate GPU, CPU, ...; with weight 2
// (KF output 1) they must repeat GPU, GPU, CPU. A third phase with only GPU
// requests checks that no slot is wasted. Random part: random ready VCs and
// routes; grants must come only from ready VCs, at most one per input and per
// output, and the crossbar selection must match the VC grants and their routes.
module tb_kf_sw_allocator;
  localparam int P = 5, V = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0]   weight;
  logic [V-1:0] ready [P];
  logic [V-1:0] vc_gpu [P];
  logic [2:0]   vc_port [P][V];
  logic [V-1:0] in_gnt [P];
  logic [P-1:0] xbar_sel [P];
  logic         out_valid [P];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kf_sw_allocator #(.NUM_PORT(P), .NUM_VC(V)) dut (.clk, .rst_n, .weight, .ready, .vc_gpu,
    .vc_port, .in_gnt, .xbar_sel, .out_valid);

  task automatic err(input string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  task automatic clear();
    for (int p = 0; p < P; p++) begin
      ready[p] = '0; vc_gpu[p] = '0;
      for (int v = 0; v < V; v++) vc_port[p][v] = 3'd0;
    end
  endtask

  // returns 1 for a GPU grant on output 3, 0 for CPU, -1 for none
  function automatic int w_grant();
    if (!out_valid[3]) return -1;
    if (xbar_sel[3][0]) return 1;   // input 0 holds the GPU VC
    if (xbar_sel[3][1]) return 0;   // input 1 holds the CPU VC
    return -2;
  endfunction

  task automatic directed(input logic [1:0] w, input int exp_seq[], input bit cpu_present);
    clear();
    weight = w;
    ready[0][0] = 1'b1; vc_gpu[0][0] = 1'b1; vc_port[0][0] = 3'd3;
    ready[0][1] = 1'b1; vc_gpu[0][1] = 1'b1; vc_port[0][1] = 3'd3;
    if (cpu_present) begin ready[1][3] = 1'b1; vc_gpu[1][3] = 1'b0; vc_port[1][3] = 3'd3; end
    // let the arbiters settle into the new weighting
    for (int k = 0; k < 3; k++) @(negedge clk);
    begin
      int start;
      #1 start = w_grant();
      // align to the start of the pattern: wait for the first CPU grant
      if (cpu_present) begin
        int guard = 0;
        while (w_grant() != 0 && guard < 10) begin @(negedge clk); #1; guard++; end
        @(negedge clk); #1;
      end
      foreach (exp_seq[i]) begin
        int g;
        g = w_grant();
        checks++;
        if (g != exp_seq[i]) err($sformatf("w=%0d step %0d: got %0d exp %0d", w, i, g, exp_seq[i]));
        @(negedge clk); #1;
      end
    end
  endtask

  initial begin
    clear(); weight = 0;
    #12 rst_n = 1;
    @(negedge clk);
    directed(2'd0, '{1,0,1,0,1,0,1,0,1,0,1,0}, 1);
    directed(2'd2, '{1,1,0,1,1,0,1,1,0,1,1,0}, 1);
    directed(2'd2, '{1,1,1,1,1,1}, 0);
    // random legality
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      weight = ($urandom_range(0, 1) == 1) ? 2'd2 : 2'd0;
      for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
        ready[p][v]   = $urandom_range(0, 1);
        vc_gpu[p][v]  = $urandom_range(0, 1);
        vc_port[p][v] = 3'($urandom_range(0, P-1));
      end
      #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (!$onehot0(in_gnt[p])) err("more than one VC granted at an input");
        if ((in_gnt[p] & ~ready[p]) != 0) err("grant to a VC that is not ready");
      end
      for (int o = 0; o < P; o++) begin
        checks++;
        if (!$onehot0(xbar_sel[o]) || (out_valid[o] != (xbar_sel[o] != 0))) err("bad crossbar select");
        for (int p = 0; p < P; p++) if (xbar_sel[o][p]) begin
          bit ok; ok = 0;
          for (int v = 0; v < V; v++) if (in_gnt[p][v] && vc_port[p][v] == 3'(o)) ok = 1;
          if (!ok) err("crossbar select does not match VC grant/route");
        end
      end
      // each input granted appears in exactly one output
      for (int p = 0; p < P; p++) begin
        int c; c = 0;
        for (int o = 0; o < P; o++) if (xbar_sel[o][p]) c++;
        checks++;
        if (c != (in_gnt[p] != 0 ? 1 : 0)) err("input grant/crossbar mismatch");
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
