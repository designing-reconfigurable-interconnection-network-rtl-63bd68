// kf_router -- five-port virtual-channel router with KF-reconfigurable allocation.
//
// Ports N, E, S, W and Local, each with NUM_VC input VCs of BUF_DEPTH flits. The
// datapath follows the router of the paper's microarchitecture figure: VC buffers,
// routing logic (XY), a VC allocator and a switch allocator that both take their
// policy from the per-router KF logic, and a crossbar.
//
// Pipeline (this design's choice): a flit arriving on in_link is written into its
// VC FIFO at the clock edge. In the next cycle a head flit at the front of a FIFO
// computes its route and requests an output VC (VA). Once the VC owns an output
// VC, each cycle its front flit may compete in switch allocation (SA); the winner
// is popped and registered onto out_link at the next edge. A head flit therefore
// spends three cycles per hop and body flits two. Flow control is credit based:
// the router keeps a credit counter of BUF_DEPTH per downstream VC, spends one per
// flit sent and regains one for every credit_in; it returns one credit upstream
// (credit_out, registered) for every flit it pops. The tail flit frees both the
// input VC state and the output VC.
module kf_router
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned BUF_DEPTH = 4
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               kf_mode,                 // 0/1 decision of the Kalman filter
  input  link_t              in_link    [NUM_PORTS],
  output credit_t            credit_out [NUM_PORTS],  // to upstream of each input
  output link_t              out_link   [NUM_PORTS],
  input  credit_t            credit_in  [NUM_PORTS],  // from downstream of each output
  output logic               mode_q,                  // mode in force in this router
  output logic [NUM_PORTS-1:0] sa_gpu_grant,          // per output: a GPU flit was granted
  output logic [NUM_PORTS-1:0] sa_cpu_grant           // per output: a CPU flit was granted
);
  localparam int unsigned P   = NUM_PORTS;
  localparam int unsigned CW  = $clog2(BUF_DEPTH + 1);

  // ---------------- KF logic ----------------
  logic [NUM_VC-1:0] gpu_vc_mask, cpu_vc_mask;
  logic [1:0]        sw_weight;
  kf_logic #(.NUM_VC(NUM_VC)) u_kf_logic (
    .clk, .rst_n, .kf_mode_in(kf_mode), .mode(mode_q),
    .gpu_vc_mask, .cpu_vc_mask, .sw_gpu_weight(sw_weight)
  );

  // ---------------- input buffers ----------------
  flit_t             front    [P][NUM_VC];
  logic [NUM_VC-1:0] nonempty [P];
  logic [NUM_VC-1:0] pop      [P];

  for (genvar p = 0; p < P; p++) begin : g_buf
    kf_vc_buffer #(.NUM_VC(NUM_VC), .BUF_DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n, .in_link(in_link[p]), .pop(pop[p]),
      .front(front[p]), .nonempty(nonempty[p])
    );
  end

  // ---------------- per input-VC state ----------------
  logic               active [P][NUM_VC];
  logic [2:0]         route  [P][NUM_VC];
  logic [VC_ID_W-1:0] ovc    [P][NUM_VC];
  port_e              rc     [P][NUM_VC];

  for (genvar p = 0; p < P; p++) begin : g_rc
    for (genvar v = 0; v < NUM_VC; v++) begin : g_v
      kf_route_xy u_route (
        .my_x, .my_y, .dst_x(front[p][v].dst_x), .dst_y(front[p][v].dst_y),
        .out_port(rc[p][v])
      );
    end
  end

  // ---------------- VC allocation ----------------
  logic               va_req   [P*NUM_VC];
  logic [2:0]         va_port  [P*NUM_VC];
  logic               va_gpu   [P*NUM_VC];
  logic               va_gnt   [P*NUM_VC];
  logic [VC_ID_W-1:0] va_vc    [P*NUM_VC];
  logic [NUM_VC-1:0]  release_vc [P];
  logic [NUM_VC-1:0]  ovc_busy   [P];

  always_comb begin
    for (int p = 0; p < int'(P); p++)
      for (int v = 0; v < int'(NUM_VC); v++) begin
        va_req [p*NUM_VC+v] = nonempty[p][v] && front[p][v].head && !active[p][v];
        va_port[p*NUM_VC+v] = rc[p][v];
        va_gpu [p*NUM_VC+v] = (front[p][v].cls == CLS_GPU);
      end
  end

  kf_vc_allocator #(.NUM_IN(P), .NUM_OUT(P), .NUM_VC(NUM_VC)) u_va (
    .clk, .rst_n,
    .req(va_req), .req_port(va_port), .req_gpu(va_gpu),
    .gpu_vc_mask, .cpu_vc_mask, .release_vc,
    .gnt(va_gnt), .gnt_vc(va_vc), .busy(ovc_busy)
  );

  // ---------------- credits towards downstream ----------------
  logic [CW-1:0] credits [P][NUM_VC];

  // ---------------- switch allocation ----------------
  logic [NUM_VC-1:0] sa_ready [P];
  logic [NUM_VC-1:0] sa_gpu   [P];
  logic [P-1:0]      xbar_sel [P];
  logic              out_val  [P];
  flit_t             xin_flit [P];
  logic [VC_ID_W-1:0] xin_vc  [P];

  always_comb begin
    for (int p = 0; p < int'(P); p++)
      for (int v = 0; v < int'(NUM_VC); v++) begin
        sa_ready[p][v] = nonempty[p][v] && active[p][v] &&
                         (credits[route[p][v]][ovc[p][v][$clog2(NUM_VC)-1:0]] != '0);
        sa_gpu[p][v]   = (front[p][v].cls == CLS_GPU);
      end
  end

  kf_sw_allocator #(.NUM_PORT(P), .NUM_VC(NUM_VC)) u_sa (
    .clk, .rst_n, .weight(sw_weight),
    .ready(sa_ready), .vc_gpu(sa_gpu), .vc_port(route),
    .in_gnt(pop), .xbar_sel, .out_valid(out_val)
  );

  always_comb begin
    for (int p = 0; p < int'(P); p++) begin
      xin_flit[p] = '0;
      xin_vc[p]   = '0;
      for (int v = 0; v < int'(NUM_VC); v++)
        if (pop[p][v]) begin
          xin_flit[p] = front[p][v];
          xin_vc[p]   = ovc[p][v];
        end
    end
    for (int o = 0; o < int'(P); o++) begin
      release_vc[o]   = '0;
      sa_gpu_grant[o] = 1'b0;
      sa_cpu_grant[o] = 1'b0;
    end
    for (int p = 0; p < int'(P); p++)
      for (int v = 0; v < int'(NUM_VC); v++)
        if (pop[p][v]) begin
          if (front[p][v].tail) release_vc[route[p][v]][ovc[p][v][$clog2(NUM_VC)-1:0]] = 1'b1;
          if (front[p][v].cls == CLS_GPU) sa_gpu_grant[route[p][v]] = 1'b1;
          else                            sa_cpu_grant[route[p][v]] = 1'b1;
        end
  end

  kf_crossbar #(.NUM_PORT(P)) u_xbar (
    .clk, .rst_n, .in_flit(xin_flit), .in_out_vc(xin_vc),
    .sel(xbar_sel), .sel_valid(out_val), .out_link
  );

  // credit counters: one spent per flit sent, one regained per credit_in
  logic [NUM_VC-1:0] cr_spend [P];
  logic [NUM_VC-1:0] cr_gain  [P];
  always_comb begin
    for (int o = 0; o < int'(P); o++)
      for (int w = 0; w < int'(NUM_VC); w++) begin
        cr_spend[o][w] = 1'b0;
        for (int p = 0; p < int'(P); p++)
          if (xbar_sel[o][p] && out_val[o] && (32'(xin_vc[p]) == w)) cr_spend[o][w] = 1'b1;
        cr_gain[o][w] = credit_in[o].valid && (32'(credit_in[o].vc) == w);
      end
  end

  // ---------------- state updates ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(P); p++)
        for (int v = 0; v < int'(NUM_VC); v++) begin
          active[p][v]  <= 1'b0;
          route[p][v]   <= '0;
          ovc[p][v]     <= '0;
          credits[p][v] <= CW'(BUF_DEPTH);
        end
    end else begin
      for (int p = 0; p < int'(P); p++)
        for (int v = 0; v < int'(NUM_VC); v++) begin
          if (va_gnt[p*NUM_VC+v]) begin
            active[p][v] <= 1'b1;
            route[p][v]  <= rc[p][v];
            ovc[p][v]    <= va_vc[p*NUM_VC+v];
          end else if (pop[p][v] && front[p][v].tail) begin
            active[p][v] <= 1'b0;
          end
        end
      for (int o = 0; o < int'(P); o++)
        for (int w = 0; w < int'(NUM_VC); w++)
          credits[o][w] <= credits[o][w] - CW'(cr_spend[o][w]) + CW'(cr_gain[o][w]);
    end
  end

  // credit return to upstream: one per popped flit
  for (genvar p = 0; p < P; p++) begin : g_cred
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) credit_out[p] <= '0;
      else begin
        credit_out[p].valid <= (pop[p] != '0);
        credit_out[p].vc    <= '0;
        for (int v = 0; v < int'(NUM_VC); v++)
          if (pop[p][v]) credit_out[p].vc <= VC_ID_W'(v);
      end
    end
  end
endmodule
