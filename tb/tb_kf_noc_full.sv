// tb_kf_noc_full -- end-to-end test of the whole interconnect at the design's default size: two 6x6 subnets, 1000-cycle epochs, 10,000-cycle
// start delay, 5,000-cycle hold, with the tile layout of the evaluated system (8 memory
// controllers, 14 CPU and 14 GPU nodes).
//
// Tiles are modelled by the testbench. CPU and GPU nodes send one-flit read
// requests over the request subnet to memory-controller nodes; a memory
// controller serves one request every MC_SERVICE cycles and answers with a
// four-flit reply (a 128-byte line over a 32-byte channel) on the reply subnet.
// GPU nodes alternate between light and heavy phases of demand. A GPU node
// raises its shader-stall event in every cycle in which it is blocked (all its
// requests outstanding, or injection refused); a memory controller raises its
// DRAM-full event while more than MC_FULL requests wait. These, with the GPU
// injections counted inside the design, feed the Kalman filter.
//
// Checked: every request is answered once, at the node that sent it, every flit
// arrives at its destination in order, the mode stays 0 until the start delay
// has passed, and each mechanism of the design happens at least once: the filter
// predicts both 0 and 1, the mode switches to 1 and back, a decision is deferred
// by the minimum hold, GPU packets use the third VC in mode 1, switch
// grants go to both classes in mode 1, and injection is back-pressured.
module tb_kf_noc_full;
  import kf_noc_pkg::*;
  localparam int MX = 6, MY = 6, N = MX * MY, S = 2;
  localparam int EPOCH = 1000, START = 10000;
  localparam int RUN = 22000;
  localparam int MC_SERVICE = 4, MC_FULL = 6;
  localparam int MAX_OUT_GPU = 8, MAX_OUT_CPU = 4;
  // tile map: 0 = memory controller, 1 = CPU, 2 = GPU
  localparam int TILE [N] = '{0,1,2,1,2,0,0,2,1,2,1,0,1,2,1,2,1,2,2,1,2,1,2,1,0,1,2,1,2,0,0,2,1,2,1,0};

  logic clk = 0, rst_n = 0, gpu_active = 0;
  logic  inj_valid [S][N], inj_ready [S][N], ej_valid [S][N];
  flit_t inj_flit [S][N], ej_flit [S][N];
  logic [N-1:0] shader_ev = '0, dram_ev = '0;
  logic kf_mode, kf_enabled, kf_forced_return, kf_pred_valid, kf_pred;
  fx_t  kf_x;
  logic [31:0] epoch_count [3];
  logic [NUM_PORTS-1:0] sgg [S][N], scg [S][N];

  always #5 clk = ~clk;

  kf_noc_top dut (
    .clk, .rst_n, .gpu_active, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit,
    .gpu_stall_shader_ev(shader_ev), .gpu_stall_dramfull_ev(dram_ev),
    .kf_mode, .kf_enabled, .kf_forced_return, .kf_pred_valid, .kf_pred, .kf_x,
    .epoch_count, .sa_gpu_grant(sgg), .sa_cpu_grant(scg));

  typedef struct { int dst; bit gpu; int len; int id; int src; } pkt_t;
  pkt_t txq [S][N][$];
  pkt_t mcq [N][$];
  int outstanding [N];
  bit pend [int];
  int checks = 0, failures = 0, cyc = 0, t_active = 0, next_id = 0, replies = 0, requests = 0;
  int n_pred1 = 0, n_pred0 = 0, n_up = 0, n_down = 0, n_forced = 0, n_defer = 0;
  int n_gpu_vc2 = 0, n_sa_gpu1 = 0, n_sa_cpu1 = 0, n_backpressure = 0;
  int cur_pkt [S][N][4], cur_seq [S][N][4];
  logic mode_d = 0;

  task automatic err(input string s);
    failures++;
    if (failures < 20) $display("FAIL cyc %0d %s", cyc, s);
  endtask

  function automatic bit heavy(input int c);
    return (c >= 6000 && c < 12000);
  endfunction

  link_t ni_link [S][N];
  for (genvar s = 0; s < S; s++) begin : g_peek_s
    for (genvar n = 0; n < N; n++) begin : g_peek_n
      assign ni_link[s][n] = dut.g_sub[s].g_ni[n].u_ni.to_router;
    end
  end

  // ---------------- injection processes, one per node and subnet ----------------
  for (genvar s = 0; s < S; s++) begin : g_s
    for (genvar n = 0; n < N; n++) begin : g_n
      initial begin
        inj_valid[s][n] = 0; inj_flit[s][n] = '0;
        wait (rst_n);
        forever begin
          @(negedge clk);
          if (txq[s][n].size() == 0) continue;
          begin
            pkt_t pk;
            pk = txq[s][n].pop_front();
            for (int i = 0; i < pk.len; i++) begin
              inj_valid[s][n] = 1;
              inj_flit[s][n] = '0;
              inj_flit[s][n].head = (i == 0);
              inj_flit[s][n].tail = (i == pk.len - 1);
              inj_flit[s][n].cls = pk.gpu ? CLS_GPU : CLS_CPU;
              inj_flit[s][n].dst_x = COORD_W'(pk.dst % MX);
              inj_flit[s][n].dst_y = COORD_W'(pk.dst / MX);
              inj_flit[s][n].data = {128'($urandom()), 32'(pk.len), 32'(pk.src), 32'(pk.dst), 8'(i), 24'(pk.id)};
              #1;
              while (!inj_ready[s][n]) begin @(negedge clk); #1; end
              @(negedge clk);
            end
            inj_valid[s][n] = 0;
          end
        end
      end
    end
  end

  // ---------------- tiles: request generation, MC service, events ----------------
  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int n = 0; n < N; n++) begin
      // requesters
      if (gpu_active && TILE[n] != 0) begin
        int rate, maxo;
        rate = (TILE[n] == 2) ? (heavy(cyc - t_active) ? 150 : 10) : 20;   // per mille
        maxo = (TILE[n] == 2) ? MAX_OUT_GPU : MAX_OUT_CPU;
        if (outstanding[n] < maxo && $urandom_range(0, 999) < rate) begin
          pkt_t pk;
          int m;
          do m = $urandom_range(0, N-1); while (TILE[m] != 0);
          pk = '{dst: m, gpu: (TILE[n] == 2), len: 1, id: next_id++, src: n};
          pend[pk.id] = 1;
          txq[0][n].push_back(pk);
          outstanding[n]++;
          requests++;
        end
      end
      // memory controllers
      if (TILE[n] == 0 && mcq[n].size() != 0 && (cyc % MC_SERVICE) == 0 && txq[1][n].size() < 2) begin
        pkt_t rq, rp;
        rq = mcq[n].pop_front();
        rp = '{dst: rq.src, gpu: rq.gpu, len: 4, id: rq.id, src: n};
        txq[1][n].push_back(rp);
      end
      // stall events
      shader_ev[n] = (TILE[n] == 2) && gpu_active &&
                     (outstanding[n] >= MAX_OUT_GPU || (inj_valid[0][n] && !inj_ready[0][n]));
      dram_ev[n]   = (TILE[n] == 0) && (mcq[n].size() > MC_FULL);
      for (int s = 0; s < S; s++) if (inj_valid[s][n] && !inj_ready[s][n]) n_backpressure++;
    end
    // ejection
    for (int s = 0; s < S; s++) for (int n = 0; n < N; n++) if (ej_valid[s][n]) begin
      flit_t f;
      int v, id, seq;
      f = ej_flit[s][n]; v = int'(f.vc); id = int'(f.data[23:0]); seq = int'(f.data[31:24]);
      checks++;
      if (int'(f.data[63:32]) != n) err($sformatf("flit for node %0d ejected at %0d", f.data[63:32], n));
      if (f.head) begin
        if (cur_pkt[s][n][v] != -1 || seq != 0) err("head on busy VC");
        cur_pkt[s][n][v] = id; cur_seq[s][n][v] = 0;
        if (f.cls == CLS_GPU && v == 2) n_gpu_vc2++;
      end else if (cur_pkt[s][n][v] != id || cur_seq[s][n][v] + 1 != seq) err("flits reordered or interleaved");
      else cur_seq[s][n][v] = seq;
      if (f.tail) begin
        cur_pkt[s][n][v] = -1;
        if (s == 0) begin
          checks++;
          if (TILE[n] != 0) err("request at a non-MC node");
          mcq[n].push_back('{dst: n, gpu: (f.cls == CLS_GPU), len: 1, id: id, src: int'(f.data[95:64])});
        end else begin
          checks++;
          if (!pend.exists(id) || seq != 3) err($sformatf("unexpected or short reply %0d", id));
          else begin pend.delete(id); outstanding[n]--; replies++; end
        end
      end
    end
    // mechanism counters (VC use at the injection links of the network interfaces)
    for (int s = 0; s < S; s++) for (int n = 0; n < N; n++)
      if (ni_link[s][n].valid && ni_link[s][n].flit.head && ni_link[s][n].flit.cls == CLS_GPU &&
          ni_link[s][n].flit.vc == 2) n_gpu_vc2++;
    if (kf_pred_valid) begin if (kf_pred) n_pred1++; else n_pred0++; end
    if (kf_mode && !mode_d) n_up++;
    if (!kf_mode && mode_d) n_down++;
    mode_d = kf_mode;
    if (kf_forced_return) n_forced++;
    if (kf_enabled && (dut.u_ctrl.target != kf_mode)) n_defer++;
    if (gpu_active && (cyc - t_active) < START) begin
      checks++;
      if (kf_mode) err("mode changed before the start delay");
    end
    if (kf_mode) for (int s = 0; s < S; s++) for (int n = 0; n < N; n++) begin
      if (sgg[s][n] != 0) n_sa_gpu1++;
      if (scg[s][n] != 0) n_sa_cpu1++;
    end
  end

  initial begin
    for (int s = 0; s < S; s++) for (int n = 0; n < N; n++) for (int v = 0; v < 4; v++) cur_pkt[s][n][v] = -1;
    outstanding = '{default: 0};
    #12 rst_n = 1;
    repeat (20) @(negedge clk);
    gpu_active = 1;
    t_active = cyc;
    while (cyc - t_active < RUN) begin
      @(negedge clk);
      if ((cyc % EPOCH) == 1 && 1'b1)
        $display("cyc %0d counts %0d %0d %0d x=%0d pred=%0d mode=%0d", cyc - t_active,
                 epoch_count[0], epoch_count[1], epoch_count[2], kf_x, kf_pred, kf_mode);
    end
    gpu_active = 0;           // stop issuing, drain
    repeat (3000) @(negedge clk);
    checks++;
    if (pend.size() != 0) err($sformatf("%0d requests never answered", pend.size()));
    $display("requests %0d replies %0d; pred1 %0d pred0 %0d; up %0d down %0d forced %0d defer %0d",
             requests, replies, n_pred1, n_pred0, n_up, n_down, n_forced, n_defer);
    $display("gpu on VC2 %0d; mode-1 switch grants gpu %0d cpu %0d; backpressure %0d",
             n_gpu_vc2, n_sa_gpu1, n_sa_cpu1, n_backpressure);
    checks++; if (n_pred1 == 0)  err("filter never predicted 1");
    checks++; if (n_pred0 == 0)  err("filter never predicted 0");
    checks++; if (n_up == 0)     err("mode never switched to 1");
    checks++; if (n_down == 0)   err("mode never returned to 0");
    checks++; if (n_defer == 0)  err("no decision was ever deferred by the hold");
    checks++; if (n_gpu_vc2 == 0) err("no GPU packet used VC2");
    checks++; if (n_sa_gpu1 == 0 || n_sa_cpu1 == 0) err("mode-1 switch arbitration not exercised");
    checks++; if (n_backpressure == 0) err("injection never back-pressured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
