// tb_kf_ni -- network interface against a model of the router's Local input.
// A random tile injects CPU and GPU packets of 1-5 flits; the testbench plays
// the router, holding each received flit for a random time before returning its
// credit. Checked: every packet uses one VC from head to tail, that VC belongs to
// the packet's class in the KF mode in force (mode toggles during the run), no VC
// ever holds more than BUF_DEPTH flits, flits arrive in order and unchanged,
// push_gpu counts exactly the GPU head flits, the interface stalls when its
// class has no credit, and ejected flits pass through with one credit back.
module tb_kf_ni;
  import kf_noc_pkg::*;
  localparam int V = 4, D = 4;
  logic clk = 0, rst_n = 0, kf_mode = 0;
  logic inj_valid = 0, inj_ready, ej_valid, push_gpu;
  flit_t inj_flit, ej_flit;
  link_t to_router, from_router;
  credit_t credit_from_router, credit_to_router;
  int checks = 0, failures = 0;
  int occ [V];
  int held [$];            // VCs of flits held by the model router
  flit_t sent [$];         // flits accepted from the tile, in order
  int n_gpu_heads = 0, n_push = 0, n_stall = 0, n_mode1_vc2 = 0;
  int pkt_vc = -1;

  always #5 clk = ~clk;
  kf_ni #(.NUM_VC(V), .BUF_DEPTH(D)) dut (.clk, .rst_n, .kf_mode, .inj_valid, .inj_flit,
    .inj_ready, .ej_valid, .ej_flit, .push_gpu, .to_router, .credit_from_router,
    .from_router, .credit_to_router);

  task automatic err(input string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  // model router: receive, hold, return credits (sampled at the falling edge,
  // where the mode seen by the interface when it chose the VC is mode_prev)
  logic mode_prev = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      credit_from_router <= '0;
      if (held.size() != 0 && $urandom_range(0, 2) == 0) begin
        credit_from_router.valid <= 1'b1;
        credit_from_router.vc    <= VC_ID_W'(held[0]);
        occ[held[0]]--;
        held.pop_front();
      end
      if (to_router.valid) begin
        flit_t f;
        int v;
        v = int'(to_router.flit.vc);
        occ[v]++;
        held.push_back(v);
        checks++;
        if (occ[v] > D) err($sformatf("VC%0d overrun", v));
        f = sent.pop_front();
        checks++;
        if (to_router.flit.data !== f.data || to_router.flit.head !== f.head ||
            to_router.flit.tail !== f.tail || to_router.flit.cls !== f.cls) err("flit changed or out of order");
        if (to_router.flit.head) pkt_vc = v;
        checks++;
        if (v != pkt_vc) err("packet changed VC");
        if (to_router.flit.head) begin
          logic [V-1:0] allowed;
          allowed = (mode_prev ? 4'b0111 : 4'b0011);
          if (to_router.flit.cls == CLS_CPU) allowed = ~allowed;
          checks++;
          if (!allowed[v]) err($sformatf("class %0d on VC%0d in mode %0d", to_router.flit.cls, v, mode_prev));
          if (mode_prev && to_router.flit.cls == CLS_GPU && v == 2) n_mode1_vc2++;
        end
      end
      if (push_gpu) n_push++;
      mode_prev = dut.mode_q;
    end
  end

  // ejection path
  always @(negedge clk) begin
    from_router.valid <= ($urandom_range(0, 3) == 0);
    from_router.flit  <= '0;
    from_router.flit.vc <= VC_ID_W'($urandom_range(0, V-1));
    from_router.flit.data <= {8{$urandom()}};
  end
  link_t ej_prev;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (ej_valid != from_router.valid || (ej_valid && ej_flit != from_router.flit)) err("ejection passthrough");
      #1;
      checks++;
      if (credit_to_router.valid != from_router.valid ||
          (from_router.valid && credit_to_router.vc != from_router.flit.vc)) err("ejection credit");
    end
  end

  initial begin
    occ = '{default: 0};
    inj_flit = '0;
    #12 rst_n = 1;
    for (int pk = 0; pk < 400; pk++) begin
      int len;
      logic gpu;
      len = $urandom_range(1, 5);
      gpu = $urandom_range(0, 1);
      if (pk % 50 == 25) kf_mode = ~kf_mode;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        inj_valid = 1;
        inj_flit = '0;
        inj_flit.head = (i == 0);
        inj_flit.tail = (i == len - 1);
        inj_flit.cls = gpu ? CLS_GPU : CLS_CPU;
        inj_flit.data = {8{$urandom()}};
        #1;
        while (!inj_ready) begin n_stall++; @(negedge clk); #1; end
        sent.push_back(inj_flit);
        if (inj_flit.head && gpu) n_gpu_heads++;
        @(posedge clk); #1;
        inj_valid = 0;
      end
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    checks++;
    if (n_push != n_gpu_heads) err($sformatf("push_gpu %0d, GPU heads %0d", n_push, n_gpu_heads));
    checks++;
    if (sent.size() != 0) err("flits never delivered");
    checks++;
    if (n_stall == 0 || n_mode1_vc2 == 0) err($sformatf("not exercised: stalls %0d, GPU on VC2 %0d", n_stall, n_mode1_vc2));
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
