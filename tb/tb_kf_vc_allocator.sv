// tb_kf_vc_allocator -- random requests against a reference model of output-VC
// ownership. Every cycle it checks that grants go only to requesters, that each
// output grants at most one request and does grant one whenever some requester's
// class has a free allowed VC, that the VC given is the lowest free VC of the
// requester's class partition (GPU VC0-1 / CPU VC2-3 in mode 0, GPU VC0-2 /
// CPU VC3 in mode 1) and that ownership follows grants and releases.
module tb_kf_vc_allocator;
  import kf_noc_pkg::*;
  localparam int P = 5, V = 4, NR = P * V;
  logic clk = 0, rst_n = 0;
  logic              req [NR];
  logic [2:0]        req_port [NR];
  logic              req_gpu [NR];
  logic [V-1:0]      gmask, cmask;
  logic [V-1:0]      release_vc [P];
  logic              gnt [NR];
  logic [VC_ID_W-1:0] gnt_vc [NR];
  logic [V-1:0]      busy [P];
  logic [V-1:0]      model [P];
  logic [V-1:0]      gset [P];
  int checks = 0, failures = 0, n_grants = 0, n_gpu_vc2 = 0;

  always #5 clk = ~clk;
  kf_vc_allocator #(.NUM_IN(P), .NUM_OUT(P), .NUM_VC(V)) dut (
    .clk, .rst_n, .req, .req_port, .req_gpu, .gpu_vc_mask(gmask), .cpu_vc_mask(cmask),
    .release_vc, .gnt, .gnt_vc, .busy);

  task automatic err(input string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  initial begin
    for (int i = 0; i < NR; i++) begin req[i] = 0; req_port[i] = 0; req_gpu[i] = 0; end
    for (int o = 0; o < P; o++) begin release_vc[o] = '0; model[o] = '0; end
    gmask = 4'b0011; cmask = 4'b1100;
    #12 rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if (cyc % 500 == 250) begin
        if (gmask == 4'b0011) begin gmask = 4'b0111; cmask = 4'b1000; end
        else                  begin gmask = 4'b0011; cmask = 4'b1100; end
      end
      for (int i = 0; i < NR; i++) begin
        req[i]      = ($urandom_range(0, 2) == 0);
        req_port[i] = 3'($urandom_range(0, P-1));
        req_gpu[i]  = $urandom_range(0, 1);
      end
      for (int o = 0; o < P; o++) begin
        release_vc[o] = '0;
        for (int w = 0; w < V; w++) if (model[o][w] && $urandom_range(0, 3) == 0) release_vc[o][w] = 1'b1;
      end
      #1;
      for (int o = 0; o < P; o++) begin
        int ng;
        bit possible;
        logic [V-1:0] fg, fc;
        int lg, lc;
        ng = 0; possible = 0; gset[o] = '0;
        checks++;
        if (busy[o] !== model[o]) err($sformatf("busy[%0d]=%b model %b", o, busy[o], model[o]));
        fg = ~model[o] & gmask; fc = ~model[o] & cmask;
        lg = -1; lc = -1;
        for (int w = V-1; w >= 0; w--) begin if (fg[w]) lg = w; if (fc[w]) lc = w; end
        for (int i = 0; i < NR; i++)
          if (req[i] && req_port[i] == o && (req_gpu[i] ? fg != 0 : fc != 0)) possible = 1;
        for (int i = 0; i < NR; i++) if (gnt[i] && req_port[i] == o) begin
          ng++;
          if (!req[i]) err("grant without request");
          if (int'(gnt_vc[i]) != (req_gpu[i] ? lg : lc))
            err($sformatf("out %0d gpu=%0d got vc %0d exp %0d", o, req_gpu[i], gnt_vc[i], req_gpu[i] ? lg : lc));
          else begin
            gset[o][gnt_vc[i]] = 1'b1;
            n_grants++;
            if (req_gpu[i] && gnt_vc[i] == 2) n_gpu_vc2++;
          end
        end
        checks++;
        if (ng != (possible ? 1 : 0)) err($sformatf("out %0d: %0d grants, possible=%0d", o, ng, possible));
      end
      for (int o = 0; o < P; o++) model[o] = (model[o] & ~release_vc[o]) | gset[o];
      @(posedge clk);
    end
    checks++;
    if (n_gpu_vc2 == 0) err("GPU never received VC2 in mode 1");
    $display("grants=%0d gpu_on_vc2=%0d", n_grants, n_gpu_vc2);
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
