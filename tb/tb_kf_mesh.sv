// tb_kf_mesh -- a 3x3 mesh subnet with a network interface at every node and
// uniform random CPU and GPU traffic of 1-4 flit packets between all nodes,
// while the KF mode toggles. Checked: every flit is delivered at its destination
// node, the flits of a packet arrive in order on one VC without another packet's
// flits between them on that VC, every packet arrives exactly once, and GPU
// packets were delivered on VC2 (only possible in mode 1).
module tb_kf_mesh;
  import kf_noc_pkg::*;
  localparam int MX = 3, MY = 3, N = MX * MY, V = 4, D = 4;
  logic clk = 0, rst_n = 0, kf_mode = 0;
  link_t   ni2r [N], r2ni [N];
  credit_t cr_r2ni [N], cr_ni2r [N];
  logic    router_mode [N];
  logic [NUM_PORTS-1:0] sgg [N], scg [N];
  logic    inj_valid [N], inj_ready [N], ej_valid [N], push [N];
  flit_t   inj_flit [N], ej_flit [N];
  int checks = 0, failures = 0, sent_pk = 0, recv_pk = 0, gpu_vc2 = 0, cyc = 0;
  bit gen_on = 0;
  int cur_pkt [N][V], cur_seq [N][V];
  bit got [int];

  always #5 clk = ~clk;

  kf_mesh #(.MESH_X(MX), .MESH_Y(MY), .NUM_VC(V), .BUF_DEPTH(D)) dut (.clk, .rst_n, .kf_mode,
    .local_in(ni2r), .local_credit_out(cr_r2ni), .local_out(r2ni), .local_credit_in(cr_ni2r),
    .router_mode, .sa_gpu_grant(sgg), .sa_cpu_grant(scg));

  for (genvar n = 0; n < N; n++) begin : g_node
    kf_ni #(.NUM_VC(V), .BUF_DEPTH(D)) u_ni (.clk, .rst_n, .kf_mode,
      .inj_valid(inj_valid[n]), .inj_flit(inj_flit[n]), .inj_ready(inj_ready[n]),
      .ej_valid(ej_valid[n]), .ej_flit(ej_flit[n]), .push_gpu(push[n]),
      .to_router(ni2r[n]), .credit_from_router(cr_r2ni[n]),
      .from_router(r2ni[n]), .credit_to_router(cr_ni2r[n]));

    initial begin
      inj_valid[n] = 0; inj_flit[n] = '0;
      wait (rst_n);
      forever begin
        int len, dst, id;
        logic gpu;
        @(negedge clk);
        if (!gen_on || $urandom_range(0, 4) != 0) continue;
        len = $urandom_range(1, 4); dst = $urandom_range(0, N-1); gpu = $urandom_range(0, 1);
        id = sent_pk++;
        for (int i = 0; i < len; i++) begin
          inj_valid[n] = 1;
          inj_flit[n] = '0;
          inj_flit[n].head = (i == 0); inj_flit[n].tail = (i == len - 1);
          inj_flit[n].cls = gpu ? CLS_GPU : CLS_CPU;
          inj_flit[n].dst_x = COORD_W'(dst % MX); inj_flit[n].dst_y = COORD_W'(dst / MX);
          inj_flit[n].data = {160'($urandom()), 32'(len), 32'(dst), 8'(i), 24'(id)};
          #1;
          while (!inj_ready[n]) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        inj_valid[n] = 0;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int n = 0; n < N; n++) if (ej_valid[n]) begin
      flit_t f;
      int v, id, seq;
      f = ej_flit[n]; v = int'(f.vc); id = int'(f.data[23:0]); seq = int'(f.data[31:24]);
      checks++;
      if (int'(f.data[63:32]) != n) begin failures++; $display("FAIL packet %0d for %0d ejected at %0d", id, f.data[63:32], n); end
      checks++;
      if (f.head) begin
        if (cur_pkt[n][v] != -1 || seq != 0) begin failures++; $display("FAIL head on busy VC / seq"); end
        cur_pkt[n][v] = id; cur_seq[n][v] = 0;
        if (f.cls == CLS_GPU && v == 2) gpu_vc2++;
      end else if (cur_pkt[n][v] != id || cur_seq[n][v] + 1 != seq) begin
        failures++; $display("FAIL interleaved or reordered flits at node %0d vc %0d", n, v);
      end else cur_seq[n][v] = seq;
      if (f.tail) begin
        cur_pkt[n][v] = -1;
        checks++;
        if (got.exists(id) || seq + 1 != int'(f.data[95:64])) begin failures++; $display("FAIL duplicate or short packet %0d", id); end
        got[id] = 1;
        recv_pk++;
      end
    end
  end

  initial begin
    for (int n = 0; n < N; n++) for (int v = 0; v < V; v++) cur_pkt[n][v] = -1;
    #12 rst_n = 1;
    gen_on = 1;
    for (int ph = 0; ph < 6; ph++) begin
      repeat (600) @(negedge clk);
      kf_mode = ~kf_mode;
    end
    gen_on = 0;
    repeat (600) @(negedge clk);
    checks++;
    if (recv_pk != sent_pk) begin failures++; $display("FAIL sent %0d received %0d", sent_pk, recv_pk); end
    checks++;
    if (gpu_vc2 == 0) begin failures++; $display("FAIL no GPU packet used VC2"); end
    $display("packets %0d, GPU packets on VC2 %0d", recv_pk, gpu_vc2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
