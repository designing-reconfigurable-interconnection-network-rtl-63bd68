// tb_kf_router -- one router at (1,1) of a 3x3 grid, with a packet source on
// each of its five inputs (destinations chosen so that XY routing could bring
// the packet there) and a sink on each output that returns credits after a random
// delay. The KF mode toggles during the run. Checked for every flit: it leaves on
// the XY output port, a packet keeps one output VC and no other packet
// interleaves on that VC, head flits take a VC of their class partition, the
// downstream buffer of a VC never holds more than BUF_DEPTH flits, payloads are
// unchanged, and every packet arrives. Also checked: a lone head flit crosses the
// empty router in 3 cycles.
module tb_kf_router;
  import kf_noc_pkg::*;
  localparam int V = 4, D = 4, P = 5;
  logic clk = 0, rst_n = 0, kf_mode = 0;
  link_t   in_link [P], out_link [P];
  credit_t credit_out [P], credit_in [P];
  logic    mode_q;
  logic [P-1:0] sa_gpu_grant, sa_cpu_grant;
  int checks = 0, failures = 0;
  int sent_pk = 0, recv_pk = 0;
  int up_cred [P][V];
  int down_occ [P][V];
  int down_held [P][$];
  int ovc_pkt [P][V];        // packet id currently on each output VC, -1 if none
  int ovc_seq [P][V];
  int last_mode_change = -1000, cyc = 0;
  bit gen_on = 0, directed = 0;
  int gpu_g = 0, cpu_g = 0;

  always #5 clk = ~clk;
  kf_router #(.NUM_VC(V), .BUF_DEPTH(D)) dut (.clk, .rst_n, .my_x(3'd1), .my_y(3'd1), .kf_mode,
    .in_link, .credit_out, .out_link, .credit_in, .mode_q, .sa_gpu_grant, .sa_cpu_grant);

  task automatic err(input string s);
    failures++;
    if (failures < 20) $display("FAIL cyc %0d %s", cyc, s);
  endtask

  function automatic port_e xy(input int dx, input int dy);
    if (dx > 1) return PORT_E;
    if (dx < 1) return PORT_W;
    if (dy > 1) return PORT_S;
    if (dy < 1) return PORT_N;
    return PORT_L;
  endfunction

  // data layout: [15:0] packet id, [23:16] flit seq, [26:24] source port, [63:32] length
  // ---------------- sources ----------------
  for (genvar p = 0; p < P; p++) begin : g_src
    initial begin
      in_link[p] = '0;
      wait (rst_n);
      forever begin
        int len, dx, dy, vc, id;
        logic gpu;
        @(negedge clk);
        if (!gen_on) begin if (!directed) in_link[p] = '0; continue; end
        if ($urandom_range(0, 3) != 0) begin in_link[p] = '0; continue; end
        len = $urandom_range(1, 4);
        gpu = $urandom_range(0, 2) != 0;
        case (p)
          PORT_W: begin dx = $urandom_range(1, 2); dy = (dx == 1) ? $urandom_range(0, 2) : $urandom_range(0, 2); end
          PORT_E: begin dx = $urandom_range(0, 1); dy = $urandom_range(0, 2); end
          PORT_N: begin dx = 1; dy = $urandom_range(1, 2); end
          PORT_S: begin dx = 1; dy = $urandom_range(0, 1); end
          default: begin dx = $urandom_range(0, 2); dy = $urandom_range(0, 2); end
        endcase
        id = sent_pk++;
        // choose the lowest VC of the class partition with a free slot
        vc = -1;
        while (vc < 0) begin
          for (int v = V - 1; v >= 0; v--) begin
            bit ok;
            ok = gpu ? (v < (kf_mode ? 3 : 2)) : (v >= (kf_mode ? 3 : 2));
            if (ok && up_cred[p][v] > 0) vc = v;
          end
          if (vc < 0) begin in_link[p] = '0; @(negedge clk); end
        end
        for (int i = 0; i < len; i++) begin
          while (up_cred[p][vc] == 0) begin in_link[p] = '0; @(negedge clk); end
          in_link[p].valid      = 1'b1;
          in_link[p].flit       = '0;
          in_link[p].flit.head  = (i == 0);
          in_link[p].flit.tail  = (i == len - 1);
          in_link[p].flit.cls   = gpu ? CLS_GPU : CLS_CPU;
          in_link[p].flit.vc    = VC_ID_W'(vc);
          in_link[p].flit.dst_x = COORD_W'(dx);
          in_link[p].flit.dst_y = COORD_W'(dy);
          in_link[p].flit.data  = {192'($urandom()), 32'(len), 5'd0, 3'(p), 8'(i), 16'(id)};
          up_cred[p][vc]--;
          if (i != len - 1) @(negedge clk);
        end
      end
    end
  end

  // credits returned by the router to the sources; sinks at the outputs
  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int p = 0; p < P; p++) begin
      if (credit_out[p].valid) up_cred[p][credit_out[p].vc]++;
      checks++;
      if (up_cred[p][0] > D || up_cred[p][1] > D || up_cred[p][2] > D || up_cred[p][3] > D) err("credit overflow at source");
    end
    for (int o = 0; o < P; o++) begin
      credit_in[o] = '0;
      if (down_held[o].size() != 0 && $urandom_range(0, 1) == 0) begin
        int v;
        v = down_held[o].pop_front();
        down_occ[o][v]--;
        credit_in[o].valid = 1'b1;
        credit_in[o].vc    = VC_ID_W'(v);
      end
      if (out_link[o].valid) begin
        flit_t f;
        int v, id, seq;
        f = out_link[o].flit;
        v = int'(f.vc);
        id = int'(f.data[15:0]); seq = int'(f.data[23:16]);
        checks++;
        if (xy(int'(f.dst_x), int'(f.dst_y)) != port_e'(o)) err($sformatf("flit for (%0d,%0d) left on port %0d", f.dst_x, f.dst_y, o));
        down_occ[o][v]++;
        down_held[o].push_back(v);
        checks++;
        if (down_occ[o][v] > D) err("downstream VC overrun");
        checks++;
        if (f.head) begin
          bit ok_now, ok_old;
          ok_now = (f.cls == CLS_GPU) ? (v < (mode_q ? 3 : 2)) : (v >= (mode_q ? 3 : 2));
          ok_old = (f.cls == CLS_GPU) ? (v < (mode_q ? 2 : 3)) : (v >= (mode_q ? 2 : 3));
          if (ovc_pkt[o][v] != -1) err("head on an output VC still owned");
          if (!ok_now && !(ok_old && cyc - last_mode_change < 60)) err($sformatf("class %0d on VC%0d mode %0d", f.cls, v, mode_q));
          ovc_pkt[o][v] = id; ovc_seq[o][v] = 0;
          if (seq != 0) err("head flit with non-zero sequence");
        end else begin
          if (ovc_pkt[o][v] != id || ovc_seq[o][v] + 1 != seq) err("flits of packets interleaved on one VC or reordered");
          ovc_seq[o][v] = seq;
        end
        if (f.tail) begin
          ovc_pkt[o][v] = -1;
          recv_pk++;
          checks++;
          if (seq + 1 != int'(f.data[63:32])) err("packet length");
        end
      end
    end
  end

  initial begin
    for (int p = 0; p < P; p++) for (int v = 0; v < V; v++) begin
      up_cred[p][v] = D; down_occ[p][v] = 0; ovc_pkt[p][v] = -1;
    end
    for (int o = 0; o < P; o++) credit_in[o] = '0;
    #12 rst_n = 1;
    // directed latency check: one single-flit packet W -> E on an idle router
    directed = 1;
    @(negedge clk);
    in_link[PORT_W].valid = 1; in_link[PORT_W].flit = '0;
    in_link[PORT_W].flit.head = 1; in_link[PORT_W].flit.tail = 1; in_link[PORT_W].flit.cls = CLS_GPU;
    in_link[PORT_W].flit.dst_x = 2; in_link[PORT_W].flit.dst_y = 1;
    in_link[PORT_W].flit.data = {192'd0, 32'd1, 32'd0 | 32'(sent_pk)};
    sent_pk++; up_cred[PORT_W][0]--;
    @(negedge clk); in_link[PORT_W] = '0;
    begin
      int lat = 1;
      while (!out_link[PORT_E].valid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3) err($sformatf("idle router latency %0d cycles, expected 3", lat));
    end
    repeat (5) @(negedge clk);
    directed = 0;
    gen_on = 1;
    for (int ph = 0; ph < 8; ph++) begin
      repeat (700) @(negedge clk);
      kf_mode = ~kf_mode;
      last_mode_change = cyc;
    end
    gen_on = 0;
    repeat (400) @(negedge clk);
    checks++;
    if (recv_pk != sent_pk) err($sformatf("sent %0d packets, received %0d", sent_pk, recv_pk));
    $display("packets %0d", recv_pk);
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
